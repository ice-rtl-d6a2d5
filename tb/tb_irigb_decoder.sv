// tb_irigb_decoder: self-checking test of the IRIG-B decoder.
//
// The bench builds IRIG-B frames on its own (BCD encoding written here, not
// taken from the encoder) at 10 clock cycles per millisecond and sends a run
// of frames with different times. The first frame only gives the decoder its
// double marker; every following frame must be reported once with the right
// fields, 1 ms cell timing included. A frame with a misplaced marker must be
// dropped and counted, and the decoder must lock again on the next frames.
module tb_irigb_decoder;
  import ice_pkg::*;

  localparam int CPM = 10;
  logic clk = 0, rst = 1, irig = 0;
  irig_time_t tout;
  logic tvalid, on_time, locked;
  logic [15:0] bad;
  int checks = 0, failures = 0;

  irigb_decoder #(.CLKS_PER_MS(CPM)) dut (
    .clk, .rst, .irig_in(irig), .time_out(tout), .time_valid(tvalid),
    .on_time, .locked, .bad_frames(bad)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [99:0] make_frame(irig_time_t t);
    logic [99:0] b = '0;
    int v;
    v = t.second; b[4:1] = 4'(v % 10); b[8:6] = 3'(v / 10);
    v = t.minute; b[13:10] = 4'(v % 10); b[17:15] = 3'(v / 10);
    v = t.hour;   b[23:20] = 4'(v % 10); b[26:25] = 2'(v / 10);
    v = t.day;    b[33:30] = 4'(v % 10); b[38:35] = 4'((v / 10) % 10); b[41:40] = 2'(v / 100);
    v = t.year;   b[53:50] = 4'(v % 10); b[58:55] = 4'(v / 10);
    return b;
  endfunction

  // send one frame; mark_at_bad puts a marker in a data cell
  task automatic send_frame(irig_time_t t, int mark_at_bad);
    logic [99:0] b = make_frame(t);
    for (int i = 0; i < 100; i++) begin
      int w;
      if (i == 0 || i % 10 == 9 || i == mark_at_bad) w = 8;
      else w = b[i] ? 5 : 2;
      irig = 1;
      repeat (w * CPM) @(posedge clk);
      irig = 0;
      repeat ((10 - w) * CPM) @(posedge clk);
    end
  endtask

  irig_time_t exp_q[$];
  int got = 0;

  always @(posedge clk) begin
    if (tvalid && !rst) begin
      irig_time_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected time_valid");
      end else begin
        e = exp_q.pop_front();
        if (tout !== e) begin
          failures++;
          $display("time mismatch got %0d %0d:%0d:%0d y%0d exp %0d %0d:%0d:%0d y%0d",
                   tout.day, tout.hour, tout.minute, tout.second, tout.year,
                   e.day, e.hour, e.minute, e.second, e.year);
        end
      end
      got++;
    end
  end

  irig_time_t tv[6];
  int t_valid_cycle = 0, t_on_cycle = 0, cyc = 0, n_on = 0;
  always @(posedge clk) begin
    cyc++;
    if (tvalid) t_valid_cycle = cyc;
    if (on_time && !rst) begin
      t_on_cycle = cyc;
      n_on++;
      // the Pr edge comes 2 ms after the end of P0; 3 cycles of synchroniser
      checks++;
      if (t_on_cycle - t_valid_cycle < 2 * CPM || t_on_cycle - t_valid_cycle > 2 * CPM + 4) begin
        failures++; $display("on_time spacing %0d", t_on_cycle - t_valid_cycle);
      end
    end
  end

  initial begin
    tv[0] = '{year: 7'd17, day: 9'd1,   hour: 5'd0,  minute: 6'd0,  second: 6'd0};
    tv[1] = '{year: 7'd17, day: 9'd59,  hour: 5'd23, minute: 6'd59, second: 6'd59};
    tv[2] = '{year: 7'd18, day: 9'd365, hour: 5'd12, minute: 6'd34, second: 6'd56};
    tv[3] = '{year: 7'd99, day: 9'd366, hour: 5'd7,  minute: 6'd8,  second: 6'd9};
    tv[4] = '{year: 7'd0,  day: 9'd200, hour: 5'd19, minute: 6'd41, second: 6'd27};
    tv[5] = '{year: 7'd42, day: 9'd123, hour: 5'd1,  minute: 6'd2,  second: 6'd3};
    repeat (20) @(posedge clk);
    rst = 0;
    repeat (30) @(posedge clk);
    // frame 0 gives only the leading marker pair
    send_frame(tv[0], -1);
    for (int k = 1; k < 4; k++) begin
      exp_q.push_back(tv[k]);
      send_frame(tv[k], -1);
    end
    checks++;
    if (!locked) begin failures++; $display("not locked"); end
    // corrupted frame: a marker at data bit 45
    send_frame(tv[4], 45);
    checks++;
    if (bad != 16'd1 || locked) begin failures++; $display("bad frame not counted: %0d locked %0d", bad, locked); end
    // the P0 of the corrupted frame and the Pr of the next form a double
    // marker again, so the next frame is decoded
    exp_q.push_back(tv[5]);
    send_frame(tv[5], -1);
    exp_q.push_back(tv[1]);
    send_frame(tv[1], -1);
    repeat (50) @(posedge clk);
    checks++;
    if (got != 5) begin failures++; $display("frames decoded %0d, expected 5", got); end
    checks++;
    if (n_on != 4) begin failures++; $display("on_time pulses %0d, expected 4", n_on); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d frames missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
