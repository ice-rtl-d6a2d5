// tb_ice_regs: self-checking test of the register map.
//
// The bench drives the register bus directly. It checks the identification
// word and reset values, writes and reads back every read/write register,
// checks that the control bits come out as single-cycle pulses, that status
// and capture inputs appear at their documented bit positions (including
// the 48-bit counters split over two words), that the frame-error flag is
// sticky until cleared, and that writes in the gain window reach the gain
// port with the lane and bin decoded from the address.
module tb_ice_regs;
  import ice_pkg::*;

  logic clk = 0, rst = 1;
  reg_req_t req;
  logic [31:0] rdata;
  logic irig_locked = 0, armed_i = 0, running_i = 0, capv = 0, ferr = 0;
  logic [15:0] irig_bad = 16'h0023;
  irig_time_t last_time, cap_time, target, enc_time;
  logic [47:0] cap_frame = 48'hABCD_1234_5678, frame_ctr = 48'h0001_8765_4321;
  logic [10:0] cap_sample = 11'd1500;
  logic [3:0] slot = 4'd11;
  logic arm, capture_req, buck_resync, enc_en, gain_we;
  logic [7:0] sync_delay;
  logic [8:0] buck_en;
  logic [8:0][15:0] buck_div, buck_phase;
  logic [3:0] gain_lane;
  logic [9:0] gain_bin;
  logic [31:0] gain_data;
  int checks = 0, failures = 0;

  ice_regs #(.N_LANES(16), .NB(1024), .NBUCK(9), .CTR_W(48)) dut (
    .clk, .rst, .req, .rdata,
    .irig_locked, .irig_bad, .last_time, .armed(armed_i), .running(running_i),
    .capture_valid(capv), .cap_time, .cap_frame, .cap_sample, .frame_ctr,
    .frame_err(ferr), .slot,
    .arm, .capture_req, .buck_resync, .target, .sync_delay, .buck_en, .buck_div,
    .buck_phase, .enc_en, .enc_time, .gain_we, .gain_lane, .gain_bin, .gain_data
  );

  always #5 clk = ~clk;
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse counters
  int n_arm = 0, n_cap = 0, n_res = 0, n_gain = 0;
  logic [3:0] g_lane; logic [9:0] g_bin; logic [31:0] g_data;
  always @(posedge clk) if (!rst) begin
    if (arm) n_arm++;
    if (capture_req) n_cap++;
    if (buck_resync) n_res++;
    if (gain_we) begin n_gain++; g_lane = gain_lane; g_bin = gain_bin; g_data = gain_data; end
  end

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic wr(input logic [14:0] a, input logic [31:0] d);
    @(negedge clk); req = '{wr: 1'b1, rd: 1'b0, addr: a, wdata: d};
    @(negedge clk); req = '0;
  endtask

  task automatic rd(input logic [14:0] a, output logic [31:0] d);
    @(negedge clk); req = '{wr: 1'b0, rd: 1'b1, addr: a, wdata: 32'h0};
    @(negedge clk); req = '0;
    d = rdata;   // valid the cycle after the strobe
  endtask

  initial begin
    logic [31:0] d;
    req = '0;
    last_time = '{year: 7'd17, day: 9'd33, hour: 5'd4, minute: 6'd5, second: 6'd6};
    cap_time  = '{year: 7'd19, day: 9'd300, hour: 5'd22, minute: 6'd58, second: 6'd57};
    repeat (3) @(posedge clk);
    rst = 0;
    rd(15'h000, d); check(d == 32'h1CE0_0001, $sformatf("ID %h", d));
    check(buck_en == 9'h1FF && sync_delay == 0 && !enc_en, "reset values");
    // read/write registers
    wr(15'h003, 32'h0123_4567 & 32'h03FF_FFFF); rd(15'h003, d);
    check(d == (32'h0123_4567 & 32'h03FF_FFFF), "TARGET_TIME readback");
    wr(15'h004, 32'd21); rd(15'h004, d); check(d == 21, "TARGET_YEAR readback");
    check(target.year == 7'd21 && target.second == 6'h27 && target.minute == 6'h15 &&
          target.hour == 5'h14 && target.day == 9'h091, "target fields");
    wr(15'h005, 32'd77); rd(15'h005, d); check(d == 77 && sync_delay == 77, "SYNC_DELAY");
    wr(15'h00C, 32'h0AA); rd(15'h00C, d); check(d == 32'h0AA && buck_en == 9'h0AA, "BUCK_ENABLE");
    wr(15'h00D, 32'h1); check(enc_en, "ENC_CTRL");
    wr(15'h00E, 32'h0002_1041); wr(15'h00F, 32'd5);
    check(enc_time.second == 1 && enc_time.minute == 1 && enc_time.hour == 1 &&
          enc_time.day == 1 && enc_time.year == 5, "encoder time fields");
    for (int i = 0; i < 9; i++) wr(15'(16 + i), {16'(i * 3), 16'(100 + i)});
    for (int i = 0; i < 9; i++) begin
      rd(15'(16 + i), d);
      check(d == {16'(i * 3), 16'(100 + i)} && buck_div[i] == 16'(100 + i) && buck_phase[i] == 16'(i * 3),
            $sformatf("BUCK_CFG %0d", i));
    end
    // control pulses
    wr(15'h001, 32'h7);
    repeat (3) @(posedge clk);
    check(n_arm == 1 && n_cap == 1 && n_res == 1, "control pulses are single cycles");
    wr(15'h001, 32'h2);
    repeat (2) @(posedge clk);
    check(n_arm == 1 && n_cap == 2, "capture pulse only");
    // status
    irig_locked = 1; running_i = 1; capv = 1;
    rd(15'h002, d); check(d == {16'h0023, 11'd0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b1}, $sformatf("STATUS %h", d));
    @(negedge clk); ferr = 1; @(negedge clk); ferr = 0;
    rd(15'h002, d); check(d[4], "frame error sticky");
    wr(15'h002, 32'h10); rd(15'h002, d); check(!d[4], "frame error cleared");
    rd(15'h006, d); check(d == 32'h1234_5678, "CAP_FRAME low");
    rd(15'h007, d); check(d == 32'h0000_ABCD, "CAP_FRAME high");
    rd(15'h008, d); check(d == {6'd0, 9'd300, 5'd22, 6'd58, 6'd57}, "CAP_TIME");
    rd(15'h009, d); check(d == {5'd0, 11'd1500, 9'd0, 7'd19}, "CAP_YEAR/sample");
    rd(15'h00A, d); check(d == {6'd0, 9'd33, 5'd4, 6'd5, 6'd6}, "LAST_TIME");
    rd(15'h00B, d); check(d == 11, "SLOT");
    rd(15'h020, d); check(d == 32'h8765_4321, "FRAME_CTR low");
    rd(15'h021, d); check(d == 32'h0000_0001, "FRAME_CTR high");
    rd(15'h07F, d); check(d == 0, "unmapped reads 0");
    // gain window
    wr(15'h4000 | 15'(5 * 1024 + 777), 32'hFEDC_0123);
    repeat (2) @(posedge clk);
    check(n_gain == 1 && g_lane == 5 && g_bin == 777 && g_data == 32'hFEDC_0123, "gain write lane 5 bin 777");
    wr(15'h7FFF, 32'h1111_2222);
    repeat (2) @(posedge clk);
    check(n_gain == 2 && g_lane == 15 && g_bin == 1023 && g_data == 32'h1111_2222, "gain write lane 15 bin 1023");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
