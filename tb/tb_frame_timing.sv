// tb_frame_timing: self-checking test of array synchronisation and framing.
//
// A 10 MHz reference is modelled as a square wave of 20 clock cycles
// (200 MHz clock), changing between clock edges. The bench arms the block
// with a target time, reports other times first (no start), then the target,
// and checks that adc_sync comes exactly 4 + sync_delay cycles after the
// next reference rising edge (2-flop synchroniser, edge detect, state
// change), for two delays. It then checks the frame cadence (one
// frame_start per FRAME_SAMPLES/SAMPLES_PER_CLK cycles), the sample index,
// the frame counter, a capture of frame counter and time, and a re-arm that
// restarts the counter.
module tb_frame_timing;
  import ice_pkg::*;

  localparam int FS = 64, SPC = 4, CPF = FS / SPC;
  logic clk = 0, rst = 1, ref10 = 0, arm = 0, capture_req = 0, irig_valid = 0;
  irig_time_t target, irig_time;
  logic [7:0] sync_delay;
  logic armed, running, adc_sync, frame_start, capture_valid;
  logic [5:0] sample_idx, cap_sample;
  logic [47:0] frame_ctr, cap_frame;
  irig_time_t cap_time;
  int checks = 0, failures = 0, cyc = 0, last_ref_rise = -1;

  frame_timing #(.FRAME_SAMPLES(FS), .SAMPLES_PER_CLK(SPC), .CTR_W(48), .DELAY_W(8)) dut (
    .clk, .rst, .ref10, .arm, .target, .sync_delay, .irig_time, .irig_valid, .capture_req,
    .armed, .running, .adc_sync, .frame_start, .sample_idx, .frame_ctr,
    .capture_valid, .cap_time, .cap_frame, .cap_sample
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  // reference: toggles every 10 cycles, on the falling clock edge
  always @(negedge clk) if (cyc % 10 == 0) begin
    ref10 = ~ref10;
    if (ref10) last_ref_rise = cyc;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (cycle %0d)", msg, cyc); end
  endtask

  task automatic report_time(irig_time_t t);
    @(negedge clk); irig_time = t; irig_valid = 1;
    @(negedge clk); irig_valid = 0;
  endtask

  // frame monitor
  int n_fs = 0, last_fs = -1, fs_gap_bad = 0;
  logic [47:0] exp_ctr;
  always @(posedge clk) if (!rst && running) begin
    if (frame_start) begin
      if (last_fs >= 0 && cyc - last_fs != CPF) fs_gap_bad++;
      if (sample_idx != 0) fs_gap_bad++;
      last_fs = cyc;
      n_fs++;
    end
  end

  task automatic sync_run(int delay);
    int r, s;
    irig_time_t other;
    other = target; other.second = target.second + 6'd1;
    sync_delay = 8'(delay);
    @(negedge clk); arm = 1; @(negedge clk); arm = 0;
    check(armed && !running, "armed after arm");
    report_time(other);
    repeat (30) @(posedge clk);
    check(armed && !adc_sync, "no start on a different time");
    report_time(target);
    @(posedge clk iff adc_sync);
    s = cyc;
    r = last_ref_rise;
    check(s - r == 4 + delay, $sformatf("sync %0d cycles after 10 MHz edge, expected %0d", s - r, 4 + delay));
    check(frame_start && frame_ctr == 0 && sample_idx == 0, "framing starts with sync");
    last_fs = -1;
  endtask

  initial begin
    target = '{year: 7'd17, day: 9'd100, hour: 5'd10, minute: 6'd20, second: 6'd30};
    irig_time = '0;
    sync_delay = 0;
    repeat (10) @(posedge clk);
    rst = 0;
    repeat (5) @(posedge clk);
    check(!armed && !running, "idle after reset");
    sync_run(3);
    // run five frames
    repeat (5 * CPF) @(posedge clk);
    check(frame_ctr == 5, $sformatf("frame_ctr %0d after 5 frames", frame_ctr));
    check(fs_gap_bad == 0, "frame_start cadence and sample index");
    // sample index advances by SAMPLES_PER_CLK
    begin
      logic [5:0] a;
      a = sample_idx;
      @(posedge clk);
      check(sample_idx == 6'(a + SPC), "sample index step");
    end
    // capture: request, then a decoded time
    @(negedge clk); capture_req = 1; @(negedge clk); capture_req = 0;
    repeat (7) @(posedge clk);
    check(!capture_valid, "capture waits for a time");
    begin
      irig_time_t ct;
      logic [47:0] fc;
      logic [5:0] si;
      ct = target; ct.minute = 6'd21;
      @(negedge clk); irig_time = ct; irig_valid = 1; fc = frame_ctr; si = sample_idx;
      @(negedge clk); irig_valid = 0;
      check(capture_valid && cap_time == ct && cap_frame == fc && cap_sample == si,
            $sformatf("capture frame %0d/%0d sample %0d/%0d", cap_frame, fc, cap_sample, si));
    end
    // re-arm while running: resynchronise with no delay
    repeat (3 * CPF + 5) @(posedge clk);
    check(frame_ctr >= 8, "counter kept running");
    sync_run(0);
    repeat (2 * CPF) @(posedge clk);
    check(frame_ctr == 2, $sformatf("frame_ctr %0d after resync", frame_ctr));
    check(n_fs >= 12, $sformatf("frame starts seen %0d", n_fs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
