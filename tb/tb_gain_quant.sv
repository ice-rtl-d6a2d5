// tb_gain_quant: self-checking test of gain correction and requantization.
//
// With a 16-entry gain table and SHIFT = 8, the bench loads random complex
// gains, streams three frames of random 18-bit complex bins (with gaps in
// in_valid and inputs scaled so that some outputs clip and some do not)
// and compares every output byte with a reference computed in 64-bit
// integers: real = xr*gr - xi*gi, imag = xr*gi + xi*gr, then
// floor((p + 2^7) / 2^8) clipped to -7..7. It also checks the 3-cycle
// latency, the start-of-frame flag, and the saturation flag against the
// reference.
module tb_gain_quant;
  import ice_pkg::*;

  localparam int NB = 16, IN_W = 18, SH = 8, LAT = 3;
  logic clk = 0, rst = 1;
  logic in_valid = 0, in_sof = 0, gain_we = 0;
  logic signed [IN_W-1:0] in_re = '0, in_im = '0;
  logic [3:0] gain_addr;
  logic [31:0] gain_data;
  logic out_valid, out_sof, sat;
  cplx4_t out_data;
  int checks = 0, failures = 0, cyc = 0;

  gain_quant #(.NB(NB), .IN_W(IN_W), .SHIFT(SH)) dut (
    .clk, .rst, .in_valid, .in_sof, .in_re, .in_im, .gain_we, .gain_addr, .gain_data,
    .out_valid, .out_sof, .out_data, .sat
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [15:0] gr [NB], gi [NB];

  function automatic int q(longint p, output bit c);
    longint r;
    r = (p + (64'sd1 <<< (SH - 1))) >>> SH;
    c = 0;
    if (r > 7) begin r = 7; c = 1; end
    if (r < -7) begin r = -7; c = 1; end
    return int'(r);
  endfunction

  typedef struct { int re; int im; bit sof; bit c; int t; } exp_t;
  exp_t expq[$];
  int n_out = 0, n_sat = 0, n_clip_exp = 0;

  always @(posedge clk) if (!rst) begin
    if (out_valid) begin
      exp_t e;
      n_out++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = expq.pop_front();
        if ($signed(out_data[7:4]) != e.re || $signed(out_data[3:0]) != e.im || out_sof != e.sof
            || sat != e.c || cyc - e.t != LAT) begin
          failures++;
          if (failures < 6)
            $display("got %0d,%0d sof %0d sat %0d lat %0d exp %0d,%0d sof %0d sat %0d",
                     $signed(out_data[7:4]), $signed(out_data[3:0]), out_sof, sat, cyc - e.t,
                     e.re, e.im, e.sof, e.c);
        end
      end
      if (sat) n_sat++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int b = 0; b < NB; b++) begin
      gr[b] = 16'($signed($urandom_range(0, 600)) - 300);
      gi[b] = 16'($signed($urandom_range(0, 600)) - 300);
      @(negedge clk); gain_we = 1; gain_addr = 4'(b); gain_data = {gi[b], gr[b]};
    end
    @(negedge clk); gain_we = 0;
    for (int f = 0; f < 3; f++) begin
      int b;
      b = 0;
      while (b < NB) begin
        @(negedge clk);
        if ($urandom_range(0, 4) == 0) begin
          in_valid = 0; in_sof = 0;
        end else begin
          int amp;
          exp_t e;
          bit c1, c2;
          longint xr, xi;
          amp = (b % 4 == 0) ? 131071 : 8;   // every 4th bin large: clips
          in_re = IN_W'($signed($urandom_range(0, 2 * amp)) - amp);
          in_im = IN_W'($signed($urandom_range(0, 2 * amp)) - amp);
          in_valid = 1; in_sof = (b == 0);
          xr = longint'(in_re); xi = longint'(in_im);
          e.re = q(xr * gr[b] - xi * gi[b], c1);
          e.im = q(xr * gi[b] + xi * gr[b], c2);
          e.c = c1 | c2; e.sof = (b == 0); e.t = cyc + 1;
          if (e.c) n_clip_exp++;
          expq.push_back(e);
          b++;
        end
      end
    end
    @(negedge clk); in_valid = 0; in_sof = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != 3 * NB || expq.size() != 0) begin failures++; $display("outputs %0d", n_out); end
    checks++;
    if (n_sat == 0 || n_sat == n_out) begin failures++; $display("saturation not exercised: %0d", n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
