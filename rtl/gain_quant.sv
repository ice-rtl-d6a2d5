// gain_quant: complex gain correction and 4+4 bit requantization of one
// digitizer input's channelized data.
//
// The FFT delivers one complex frequency bin per cycle (in_valid), the first
// bin of a frame flagged by in_sof. Each bin b is multiplied by its own
// complex gain g[b] from a table of NB entries; the product is scaled down
// by 2^SHIFT with rounding (add half, then floor), and each part is clipped
// to the symmetric range -7..+7, giving one byte {real[3:0], imag[3:0]} in
// two's complement per bin. sat pulses for every output in which either
// part was clipped.
//
// Gain format: {imag[31:16], real[15:0]}, each a signed 16-bit integer; the
// output is round(x * g / 2^SHIFT). The table is written through
// gain_we/gain_addr/gain_data (one entry per cycle, no read-back) and is not
// reset: software loads it before data is used.
//
// Timing: fully pipelined, one bin per cycle, latency 3 cycles (table read,
// complex multiply, round and clip); out_valid/out_sof follow in_valid/in_sof
// by 3 cycles. Bins past NB-1 in a frame wrap to entry 0.
//
// From the paper: complex gain corrections applied to every frequency bin
// and the reduction to 4-bit real + 4-bit imaginary values. Input and gain
// widths, rounding, symmetric clipping and the pipeline are this design's.
module gain_quant
  import ice_pkg::*;
#(
  parameter int unsigned NB    = 1024,
  parameter int unsigned IN_W  = 18,
  parameter int unsigned SHIFT = 24
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic                   in_sof,
  input  logic signed [IN_W-1:0] in_re,
  input  logic signed [IN_W-1:0] in_im,
  input  logic                   gain_we,
  input  logic [$clog2(NB)-1:0]  gain_addr,
  input  logic [31:0]            gain_data,
  output logic                   out_valid,
  output logic                   out_sof,
  output cplx4_t                 out_data,
  output logic                   sat
);

  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned PW = IN_W + 16 + 1;   // complex product width

  logic [31:0] gain_mem [NB];
  logic [BW-1:0] bin_cnt, bin;

  // stage 1: table read
  logic                   v1, s1;
  logic signed [IN_W-1:0] re1, im1;
  logic [31:0]            g1;
  // stage 2: complex multiply
  logic                   v2, s2;
  logic signed [PW-1:0]   pr2, pi2;

  always_ff @(posedge clk) begin
    if (gain_we) gain_mem[gain_addr] <= gain_data;
  end

  assign bin = in_sof ? '0 : bin_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      bin_cnt <= '0;
    end else if (in_valid) begin
      bin_cnt <= (bin == BW'(NB - 1)) ? '0 : bin + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    g1  <= gain_mem[bin];
    re1 <= in_re;
    im1 <= in_im;
  end

  logic signed [PW-1:0] ar, ai, gr, gi;
  assign ar = PW'(re1);
  assign ai = PW'(im1);
  assign gr = PW'($signed(g1[15:0]));
  assign gi = PW'($signed(g1[31:16]));

  always_ff @(posedge clk) begin
    pr2 <= ar * gr - ai * gi;
    pi2 <= ar * gi + ai * gr;
  end

  function automatic logic [4:0] round_clip(input logic signed [PW-1:0] p);
    logic signed [PW-1:0] r;
    logic                 clip;
    logic [3:0]           q;
    r = (p + (PW'(1) <<< (SHIFT - 1))) >>> SHIFT;
    if (r > 7)       begin q = 4'sd7;  clip = 1'b1; end
    else if (r < -7) begin q = -4'sd7; clip = 1'b1; end
    else             begin q = r[3:0]; clip = 1'b0; end
    return {clip, q};
  endfunction

  always_ff @(posedge clk) begin
    logic [4:0] qr, qi;
    if (rst) begin
      v1 <= 1'b0; s1 <= 1'b0;
      v2 <= 1'b0; s2 <= 1'b0;
      out_valid <= 1'b0; out_sof <= 1'b0; out_data <= '0; sat <= 1'b0;
    end else begin
      v1 <= in_valid; s1 <= in_valid & in_sof;
      v2 <= v1;       s2 <= s1;
      qr = round_clip(pr2);
      qi = round_clip(pi2);
      out_valid <= v2;
      out_sof   <= s2;
      out_data  <= {qr[3:0], qi[3:0]};
      sat       <= v2 & (qr[4] | qi[4]);
    end
  end

endmodule
