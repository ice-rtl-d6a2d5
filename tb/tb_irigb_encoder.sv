// tb_irigb_encoder: self-checking test of the IRIG-B encoder.
//
// The bench measures every high pulse of the encoder output (width in
// milliseconds and the spacing of rising edges), classifies it, and checks
// each of the 100 cells of two frames against the cidx pattern it computes
// itself from the time presented: markers at 0, 9, 19, ..., 99, BCD fields
// at their standard positions, all other cells 0. It also checks that
// every cidx lasts exactly 10 ms and that time_in is latched at the frame
// start (the second frame carries the time presented during the first).
module tb_irigb_encoder;
  import ice_pkg::*;

  localparam int CPM = 8;
  logic clk = 0, rst = 1, en = 0, irig, fstart;
  irig_time_t tin;
  int checks = 0, failures = 0;

  irigb_encoder #(.CLKS_PER_MS(CPM)) dut (
    .clk, .rst, .enable(en), .time_in(tin), .irig_out(irig), .frame_start(fstart)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected width in ms of cidx i for time t
  function automatic int exp_width(irig_time_t t, int i);
    logic [99:0] b = '0;
    int v;
    if (i == 0 || i % 10 == 9) return 8;
    v = t.second; b[4:1] = 4'(v % 10); b[8:6] = 3'(v / 10);
    v = t.minute; b[13:10] = 4'(v % 10); b[17:15] = 3'(v / 10);
    v = t.hour;   b[23:20] = 4'(v % 10); b[26:25] = 2'(v / 10);
    v = t.day;    b[33:30] = 4'(v % 10); b[38:35] = 4'((v / 10) % 10); b[41:40] = 2'(v / 100);
    v = t.year;   b[53:50] = 4'(v % 10); b[58:55] = 4'(v / 10);
    return b[i] ? 5 : 2;
  endfunction

  irig_time_t t1, t2;
  int high_cnt = 0, cidx = -1, frame = -1, last_rise = 0, cyc = 0, bad_cells = 0, cells_seen = 0;
  logic prev = 0;

  always @(posedge clk) begin
    cyc++;
    if (!rst && en) begin
      if (irig && !prev) begin
        if (fstart_seen_recent()) begin frame++; cidx = 0; end
        else cidx++;
        if (cidx > 0) begin
          checks++;
          if (cyc - last_rise != 10 * CPM) begin failures++; $display("cidx period %0d", cyc - last_rise); end
        end
        last_rise = cyc;
        high_cnt = 1;
      end else if (irig) begin
        high_cnt++;
      end else if (prev) begin
        // falling edge: the pulse is complete
        if (frame >= 0 && frame < 2) begin
          int e;
          e = exp_width(frame == 0 ? t1 : t2, cidx);
          checks++;
          cells_seen++;
          if (high_cnt != e * CPM) begin
            failures++; bad_cells++;
            if (bad_cells < 5) $display("frame %0d cell %0d width %0d exp %0d", frame, cidx, high_cnt, e * CPM);
          end
        end
      end
      prev = irig;
    end
  end

  int fstart_cyc = -100;
  always @(posedge clk) if (fstart && !rst) fstart_cyc = cyc;
  function automatic bit fstart_seen_recent();
    return (cyc - fstart_cyc) <= 1;
  endfunction

  initial begin
    t1 = '{year: 7'd17, day: 9'd287, hour: 5'd21, minute: 6'd45, second: 6'd38};
    t2 = '{year: 7'd18, day: 9'd9,   hour: 5'd3,  minute: 6'd7,  second: 6'd59};
    tin = t1;
    repeat (10) @(posedge clk);
    rst = 0;
    repeat (5) @(posedge clk);
    en = 1;
    @(posedge clk iff fstart);
    repeat (3) @(posedge clk);
    tin = t2;                     // presented during frame 0, sent in frame 1
    @(posedge clk iff fstart);
    @(posedge clk iff fstart);
    checks++;
    if (cells_seen != 200) begin failures++; $display("cells seen %0d", cells_seen); end
    // frame period: 1000 ms
    checks++;
    begin
      int p0;
      p0 = fstart_cyc;
      @(posedge clk iff fstart);
      if (fstart_cyc - p0 != 1000 * CPM) begin failures++; $display("frame period %0d", fstart_cyc - p0); end
    end
    // disable holds the output low
    en = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (irig !== 1'b0) begin failures++; $display("output not low when disabled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
