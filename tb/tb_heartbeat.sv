// tb_heartbeat: checks the heartbeat LED toggles every HALF_PERIOD cycles
// normally and every HALF_PERIOD/4 cycles while fault is high.
module tb_heartbeat;
  localparam int HP = 40;
  logic clk = 0, rst = 1, fault = 0, led;
  int checks = 0, failures = 0, cyc = 0, last = -1;
  int gaps[$];

  heartbeat #(.HALF_PERIOD(HP)) dut (.clk, .rst, .fault, .led);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic prev = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (led !== prev) begin
        if (last >= 0) gaps.push_back(cyc - last);
        last = cyc;
      end
      prev = led;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    @(posedge clk);
    checks++;
    if (led !== 0) begin failures++; $display("LED not off after reset"); end
    repeat (5 * HP + 5) @(posedge clk);
    checks++;
    if (gaps.size() < 4) begin failures++; $display("too few toggles %0d", gaps.size()); end
    foreach (gaps[i]) begin
      checks++;
      if (gaps[i] != HP) begin failures++; $display("toggle gap %0d", gaps[i]); end
    end
    @(negedge clk); fault = 1;
    repeat (HP) @(posedge clk);   // let the current interval end
    gaps.delete();
    repeat (3 * HP) @(posedge clk);
    checks++;
    if (gaps.size() < 8) begin failures++; $display("too few fast toggles %0d", gaps.size()); end
    foreach (gaps[i]) begin
      checks++;
      if (gaps[i] != HP / 4) begin failures++; $display("fault toggle gap %0d", gaps[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
