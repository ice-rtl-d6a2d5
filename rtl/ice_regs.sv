// ice_regs: register map of the motherboard firmware, reached by the ARM
// through spi_slave.
//
// Word addresses (15-bit):
//   0x000 ID            RO  0x1CE0_0001
//   0x001 CONTROL       WO  bit0 arm sync, bit1 capture request, bit2 buck
//                           resync (each a one-cycle pulse)
//   0x002 STATUS        RO  bit0 IRIG-B locked, bit1 armed, bit2 running,
//                           bit3 capture valid, bit4 frame-length error
//                           (sticky, cleared by writing 1 to bit4),
//                           [31:16] IRIG-B frames dropped
//   0x003 TARGET_TIME   RW  sync target {day[25:17],hour[16:12],min[11:6],sec[5:0]}
//   0x004 TARGET_YEAR   RW  [6:0]
//   0x005 SYNC_DELAY    RW  [7:0] extra cycles between 10 MHz edge and ADC sync
//   0x006/0x007 CAP_FRAME RO captured frame counter, low 32 / high 16 bits
//   0x008 CAP_TIME      RO  captured IRIG-B time (same layout as TARGET_TIME)
//   0x009 CAP_YEAR      RO  [6:0] year, [26:16] sample index at capture
//   0x00A LAST_TIME     RO  latest decoded IRIG-B time
//   0x00B SLOT          RO  backplane slot number
//   0x00C BUCK_ENABLE   RW  one bit per regulator (reset: all on)
//   0x00D ENC_CTRL      RW  bit0 IRIG-B encoder enable
//   0x00E ENC_TIME      RW  time sent by the encoder; 0x00F ENC_YEAR RW
//   0x010+i BUCK_CFG[i] RW  {phase[31:16], divider[15:0]} (divider 0 = default)
//   0x020/0x021 FRAME_CTR RO current frame counter, low / high
//   0x4000 + lane*N_BINS + bin  WO  complex gain {imag[31:16], real[15:0]}
// Unmapped reads return 0. Read data is registered: rdata is valid the
// cycle after rd. Gain writes are forwarded as a one-cycle write port to
// the per-input gain tables.
//
// The paper describes a memory-mapped serial interface and the functions
// the ARM controls (sync arming and delay, time capture, switcher phase,
// slot query, gain corrections); the addresses and layout are this design's.
module ice_regs
  import ice_pkg::*;
#(
  parameter int unsigned N_LANES  = 16,
  parameter int unsigned NB       = 1024,
  parameter int unsigned NBUCK    = 9,
  parameter int unsigned CTR_W    = 48
) (
  input  logic       clk,
  input  logic       rst,
  input  reg_req_t   req,
  output logic [31:0] rdata,
  // status in
  input  logic       irig_locked,
  input  logic [15:0] irig_bad,
  input  irig_time_t last_time,
  input  logic       armed,
  input  logic       running,
  input  logic       capture_valid,
  input  irig_time_t cap_time,
  input  logic [CTR_W-1:0] cap_frame,
  input  logic [10:0] cap_sample,
  input  logic [CTR_W-1:0] frame_ctr,
  input  logic       frame_err,
  input  logic [3:0] slot,
  // control out
  output logic       arm,
  output logic       capture_req,
  output logic       buck_resync,
  output irig_time_t target,
  output logic [7:0] sync_delay,
  output logic [NBUCK-1:0] buck_en,
  output logic [NBUCK-1:0][15:0] buck_div,
  output logic [NBUCK-1:0][15:0] buck_phase,
  output logic       enc_en,
  output irig_time_t enc_time,
  // gain table write port
  output logic                       gain_we,
  output logic [$clog2(N_LANES)-1:0] gain_lane,
  output logic [$clog2(NB)-1:0]      gain_bin,
  output logic [31:0]                gain_data
);

  localparam int unsigned LW = $clog2(N_LANES);
  localparam int unsigned BW = $clog2(NB);

  logic [31:0] tgt_r, enc_r;
  logic [6:0]  tgt_y, enc_y;
  logic        ferr_sticky;

  assign target   = reg_to_time(tgt_r, tgt_y);
  assign enc_time = reg_to_time(enc_r, enc_y);

  initial assert (LW + BW <= 14) else $error("gain window too small");

  always_ff @(posedge clk) begin
    arm         <= 1'b0;
    capture_req <= 1'b0;
    buck_resync <= 1'b0;
    gain_we     <= 1'b0;
    if (rst) begin
      tgt_r       <= '0;
      tgt_y       <= '0;
      enc_r       <= '0;
      enc_y       <= '0;
      sync_delay  <= '0;
      buck_en     <= '1;
      buck_div    <= '0;
      buck_phase  <= '0;
      enc_en      <= 1'b0;
      ferr_sticky <= 1'b0;
      gain_lane   <= '0;
      gain_bin    <= '0;
      gain_data   <= '0;
    end else begin
      if (frame_err) ferr_sticky <= 1'b1;
      if (req.wr) begin
        if (req.addr[14]) begin
          gain_we   <= 1'b1;
          gain_lane <= req.addr[BW +: LW];
          gain_bin  <= req.addr[BW-1:0];
          gain_data <= req.wdata;
        end else begin
          unique casez (req.addr[13:0])
            14'h001: begin
                       arm         <= req.wdata[0];
                       capture_req <= req.wdata[1];
                       buck_resync <= req.wdata[2];
                     end
            14'h002: if (req.wdata[4]) ferr_sticky <= 1'b0;
            14'h003: tgt_r      <= req.wdata;
            14'h004: tgt_y      <= req.wdata[6:0];
            14'h005: sync_delay <= req.wdata[7:0];
            14'h00C: buck_en    <= req.wdata[NBUCK-1:0];
            14'h00D: enc_en     <= req.wdata[0];
            14'h00E: enc_r      <= req.wdata;
            14'h00F: enc_y      <= req.wdata[6:0];
            default: begin
              for (int i = 0; i < NBUCK; i++) begin
                if (req.addr[13:0] == 14'(16 + i)) begin
                  buck_div[i]   <= req.wdata[15:0];
                  buck_phase[i] <= req.wdata[31:16];
                end
              end
            end
          endcase
        end
      end
    end
  end

  // Read side
  always_ff @(posedge clk) begin
    if (rst) begin
      rdata <= '0;
    end else if (req.rd) begin
      rdata <= '0;
      if (!req.addr[14]) begin
        unique casez (req.addr[13:0])
          14'h000: rdata <= 32'h1CE0_0001;
          14'h002: rdata <= {irig_bad, 11'd0, ferr_sticky, capture_valid, running, armed, irig_locked};
          14'h003: rdata <= tgt_r;
          14'h004: rdata <= {25'd0, tgt_y};
          14'h005: rdata <= {24'd0, sync_delay};
          14'h006: rdata <= cap_frame[31:0];
          14'h007: rdata <= 32'(cap_frame[CTR_W-1:32]);
          14'h008: rdata <= time_to_reg(cap_time);
          14'h009: rdata <= {5'd0, cap_sample, 9'd0, cap_time.year};
          14'h00A: rdata <= time_to_reg(last_time);
          14'h00B: rdata <= {28'd0, slot};
          14'h00C: rdata <= 32'(buck_en);
          14'h00D: rdata <= {31'd0, enc_en};
          14'h00E: rdata <= enc_r;
          14'h00F: rdata <= {25'd0, enc_y};
          14'h020: rdata <= frame_ctr[31:0];
          14'h021: rdata <= 32'(frame_ctr[CTR_W-1:32]);
          default: begin
            for (int i = 0; i < NBUCK; i++)
              if (req.addr[13:0] == 14'(16 + i)) rdata <= {buck_phase[i], buck_div[i]};
          end
        endcase
      end
    end
  end

endmodule
