// heartbeat: drives the heartbeat LED that lets an operator see at a glance
// that the FPGA is configured and clocked.
//
// A free-running counter toggles the LED every HALF_PERIOD cycles (1 Hz
// blink at 200 MHz by default). When fault is high the LED blinks four times
// faster, so a board whose timing has not locked is visible from the rack.
//
// The paper only says the LED connects directly to the FPGA; the blink
// rates and the fault indication are this design's choice.
module heartbeat #(
  parameter int unsigned HALF_PERIOD = 100_000_000
) (
  input  logic clk,
  input  logic rst,
  input  logic fault,
  output logic led
);

  localparam int unsigned CW = $clog2(HALF_PERIOD);
  logic [CW-1:0] cnt;
  logic [CW-1:0] limit;

  assign limit = fault ? CW'(HALF_PERIOD / 4 - 1) : CW'(HALF_PERIOD - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0;
      led <= 1'b0;
    end else if (cnt >= limit) begin
      cnt <= '0;
      led <= ~led;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
