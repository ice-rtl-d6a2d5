// tb_buck_sync: self-checking test of the switching-regulator sync clocks.
//
// Three channels with different dividers and phases are compared every
// cycle with a reference written as plain modulo arithmetic on the number of
// cycles since the last resync. The bench also measures, per channel, the
// period and high time between edges, checks that the default divider is
// used for a divider of 0, that a disabled channel stays low and that resync
// brings all channels back to a common phase.
module tb_buck_sync;
  localparam int N = 3, W = 16, DDIV = 10;
  logic clk = 0, rst = 1, resync = 0;
  logic [N-1:0] en;
  logic [N-1:0][W-1:0] div, phase;
  logic [N-1:0] so;
  int checks = 0, failures = 0, k = 0;

  buck_sync #(.N_CH(N), .W(W), .DEFAULT_DIV(DDIV)) dut (
    .clk, .rst, .resync, .enable(en), .div, .phase, .sync_out(so)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int period(int i);
    return (div[i] < 2) ? DDIV : int'(div[i]);
  endfunction

  // expected output k cycles after the cycle in which resync was sampled
  function automatic bit expect_out(int i, int kk);
    int p = period(i);
    int pos = ((kk % p) - (int'(phase[i]) % p) + p) % p;
    return en[i] && pos < p / 2;
  endfunction

  bit compare = 0;
  int mism = 0;
  int rise_c[N], fall_c[N], per_bad[N], hi_bad[N], nrise[N];
  logic [N-1:0] prev = '0;
  always @(posedge clk) begin
    #1;
    if (compare) begin
      for (int i = 0; i < N; i++) begin
        checks++;
        if (so[i] !== expect_out(i, k)) begin
          failures++; mism++;
          if (mism < 5) $display("ch %0d at k=%0d got %0d", i, k, so[i]);
        end
        if (so[i] && !prev[i]) begin
          if (nrise[i] > 0 && k - rise_c[i] != period(i)) per_bad[i]++;
          rise_c[i] = k; nrise[i]++;
        end
        if (!so[i] && prev[i]) begin
          if (k - rise_c[i] != period(i) / 2) hi_bad[i]++;
        end
      end
      prev = so;
    end
    k++;
  end

  // level of each channel in the cycle before the first compared one; a
  // channel already high then has its rise at k = 0
  task automatic init_prev();
    for (int i = 0; i < N; i++) begin
      prev[i] = expect_out(i, 0);
      rise_c[i] = 0;
      nrise[i] = prev[i] ? 1 : 0;
    end
  endtask

  initial begin
    en = '1;
    div[0] = 0;  phase[0] = 0;    // default divider
    div[1] = 7;  phase[1] = 2;
    div[2] = 12; phase[2] = 15;   // phase beyond the period wraps
    repeat (5) @(posedge clk);
    rst = 0;
    @(negedge clk); resync = 1; @(negedge clk); resync = 0;
    // k counts from the first edge after resync was removed
    @(posedge clk); #2; k = 1; compare = 1; init_prev();
    repeat (200) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (per_bad[i] != 0 || hi_bad[i] != 0 || nrise[i] < 5) begin
        failures++; $display("ch %0d period errors %0d high errors %0d rises %0d", i, per_bad[i], hi_bad[i], nrise[i]);
      end
    end
    // disable channel 1: it goes low and stays low
    @(negedge clk); en[1] = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (so[1] !== 0) begin failures++; $display("disabled channel not low"); end
    // new settings and a resync: channels restart together
    compare = 0;
    @(negedge clk); en = '1; div[1] = 20; phase[1] = 0; phase[0] = 0; div[0] = 20;
    resync = 1; @(negedge clk); resync = 0;
    @(posedge clk); #2; k = 1; compare = 1; init_prev();
    repeat (100) @(posedge clk);
    checks++;
    if (rise_c[0] != rise_c[1]) begin failures++; $display("channels 0 and 1 not aligned after resync"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
