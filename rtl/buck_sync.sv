// buck_sync: synchronisation clocks for the motherboard's switching
// regulators.
//
// Each of the N_CH buck converters gets its own square wave, derived from
// the processing clock, so that regulator ripple lands at known and stable
// frequencies instead of at free-running oscillator frequencies. Channel i
// has a divider div[i] (period in clock cycles) and a phase[i] (offset in
// cycles): its counter runs from 0 to div[i]-1 and the output is high for
// the half period that starts at count phase[i] (wrapping). All counters are
// cleared together by resync, so the channels keep fixed phase relations to
// each other and to whatever event drives resync. A channel whose enable
// bit is low drives 0. Settings take effect at once; a counter that is
// beyond a newly reduced divider wraps to 0 on the next cycle.
//
// From the paper: nine buck converters whose frequency and phase are each
// synchronised by the FPGA to a clock derived from the system reference,
// typically 1 MHz (default divider 200 at 200 MHz). The counter-and-compare
// structure, 16-bit settings and the resync input are this design's.
module buck_sync #(
  parameter int unsigned N_CH        = 9,
  parameter int unsigned W           = 16,
  parameter int unsigned DEFAULT_DIV = 200   // 200 MHz / 200 = 1 MHz
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   resync,
  input  logic [N_CH-1:0]        enable,
  input  logic [N_CH-1:0][W-1:0] div,      // 0 or 1 selects DEFAULT_DIV
  input  logic [N_CH-1:0][W-1:0] phase,
  output logic [N_CH-1:0]        sync_out
);

  logic [N_CH-1:0][W-1:0] cnt;

  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    logic [W-1:0] period, rel;
    always_comb begin
      period = (div[i] < W'(2)) ? W'(DEFAULT_DIV) : div[i];
      // position relative to the phase offset, modulo the period
      rel = (cnt[i] >= phase[i] % period) ? cnt[i] - phase[i] % period
                                          : cnt[i] + period - phase[i] % period;
    end
    always_ff @(posedge clk) begin
      if (rst || resync) begin
        cnt[i]      <= '0;
        sync_out[i] <= 1'b0;
      end else begin
        cnt[i]      <= (cnt[i] >= period - 1'b1) ? '0 : cnt[i] + 1'b1;
        sync_out[i] <= enable[i] && (rel < (period >> 1));
      end
    end
  end

endmodule
