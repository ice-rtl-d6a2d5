// spi_slave: memory-mapped serial link between the ARM co-processor and the
// FPGA fabric.
//
// The ARM is the SPI master (mode 0: clock idles low, both sides sample on
// the rising edge). A transaction, with cs_n low throughout, is 56 bits,
// most significant bit first:
//   bit 0        1 = write, 0 = read
//   bits 1..15   15-bit word address
//   bits 16..23  turnaround (ignored), gives the register file time to answer
//   bits 24..55  32-bit data: from the master on a write, to it on a read
// SCLK, CS_N and MOSI are oversampled in the fabric clock through two-flop
// synchronisers, so the fabric clock must be at least five times SCLK
// (40 Mbit/s against 200 MHz). A read strobe is issued as soon as the
// address is complete and rdata is taken on the next cycle; a write strobe
// is issued after the 56th bit. MISO changes right after each rising SCLK
// edge the slave detects, which leaves most of a period before the master
// samples it (changing it on the falling edge would not leave enough time
// after synchronisation at 40 MHz). A transaction cut short by cs_n rising
// is discarded.
//
// The paper gives the link (SPI, 40 Mbit/s) and that it carries a
// memory-mapped interface; the frame format and the oversampling scheme are
// this design's choices.
module spi_slave
  import ice_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output reg_req_t    req,
  input  logic [31:0] rdata
);

  localparam int unsigned NBITS = 56;

  logic [2:0]  sclk_q;
  logic [1:0]  cs_q, mosi_q;
  logic        rise;
  logic [5:0]  bitcnt;        // rising edges seen in this transaction
  logic [55:0] shreg;
  logic [31:0] tx;
  logic        rd_pend;

  always_ff @(posedge clk) begin
    if (rst) begin
      sclk_q <= '0;
      cs_q   <= 2'b11;
      mosi_q <= '0;
    end else begin
      sclk_q <= {sclk_q[1:0], sclk};
      cs_q   <= {cs_q[0], cs_n};
      mosi_q <= {mosi_q[0], mosi};
    end
  end

  // sclk_q[1] is aligned with cs_q[1] and mosi_q[1]
  assign rise     = sclk_q[1] & ~sclk_q[2];

  logic        op_write;
  logic [14:0] op_addr;

  always_ff @(posedge clk) begin
    req.wr  <= 1'b0;
    req.rd  <= 1'b0;
    rd_pend <= req.rd;   // rdata is valid the cycle after the read strobe
    if (rst) begin
      bitcnt   <= '0;
      shreg    <= '0;
      tx       <= '0;
      miso     <= 1'b0;
      op_write <= 1'b0;
      op_addr  <= '0;
      req.addr <= '0;
      req.wdata<= '0;
    end else if (cs_q[1]) begin
      bitcnt <= '0;
      miso   <= 1'b0;
    end else begin
      if (rise && bitcnt < 6'(NBITS)) begin
        shreg  <= {shreg[54:0], mosi_q[1]};
        bitcnt <= bitcnt + 1'b1;
        if (bitcnt == 6'd0) op_write <= mosi_q[1];
        if (bitcnt == 6'd15) begin
          op_addr <= {shreg[13:0], mosi_q[1]};
          if (!op_write) begin
            req.rd   <= 1'b1;
            req.addr <= {shreg[13:0], mosi_q[1]};
          end
        end
        // present the bit the master samples on its next rising edge
        if (bitcnt >= 6'd23 && bitcnt < 6'd55) miso <= tx[5'(6'd54 - bitcnt)];
        else                                  miso <= 1'b0;
        if (bitcnt == 6'(NBITS - 1) && op_write) begin
          req.wr    <= 1'b1;
          req.addr  <= op_addr;
          req.wdata <= {shreg[30:0], mosi_q[1]};
        end
      end
      if (rd_pend) tx <= rdata;
    end
  end

  // A read and a write strobe are never issued in the same cycle
  a_excl: assert property (@(posedge clk) disable iff (rst) !(req.wr && req.rd));

endmodule
