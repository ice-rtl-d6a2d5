// frame_timing: array-wide synchronisation, framing and time tagging.
//
// Every board of the array starts ADC acquisition and framing at the same
// instant: software arms each board with a target IRIG-B time, and once the
// decoder reports that time, the board waits for the next rising edge of the
// 10 MHz reference clock, then for a programmable number of further cycles
// (to trim the arrival of the sync pulse at the ADC chips), and then pulses
// adc_sync and starts framing. From there on sample_idx counts the samples of
// the current 2048-sample frame (SAMPLES_PER_CLK per cycle), frame_start
// pulses on the first cycle of every frame and the 48-bit frame_ctr counts
// frames since the sync. A capture request latches, at the next decoded
// IRIG-B time, that time together with the frame counter and the sample
// index, so that frame numbers can be related to absolute time.
//
// Interface: ref10 is the 10 MHz reference as seen in the processing clock
// domain (asynchronous, synchronised here). arm and capture_req are
// one-cycle pulses. irig_time/irig_valid come from irigb_decoder. State
// machine IDLE -> ARMED -> WAIT_EDGE -> DELAY -> RUN; arming again while
// running restarts the sequence (a resynchronisation).
// Timing: adc_sync and the first frame_start come sync_delay+1 cycles after
// the 2-flop-synchronised ref10 rising edge is seen.
//
// From the paper: the rule "start on the rising edge of the 10 MHz clock
// following a specified IRIG-B timestamp", the adjustable sync delay, the
// 2048-sample frame, the 48-bit frame counter and the IRIG-B capture. The
// state machine, the synchroniser and treating the moment the decoder
// reports the time as "the timestamp" are this design's choices.
module frame_timing
  import ice_pkg::*;
#(
  parameter int unsigned FRAME_SAMPLES   = 2048,
  parameter int unsigned SAMPLES_PER_CLK = 4,     // 800 MSPS on a 200 MHz clock
  parameter int unsigned CTR_W           = 48,
  parameter int unsigned DELAY_W         = 8
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               ref10,
  input  logic               arm,
  input  irig_time_t         target,
  input  logic [DELAY_W-1:0] sync_delay,
  input  irig_time_t         irig_time,
  input  logic               irig_valid,
  input  logic               capture_req,
  output logic               armed,
  output logic               running,
  output logic               adc_sync,
  output logic               frame_start,
  output logic [$clog2(FRAME_SAMPLES)-1:0] sample_idx,
  output logic [CTR_W-1:0]   frame_ctr,
  output logic               capture_valid,
  output irig_time_t         cap_time,
  output logic [CTR_W-1:0]   cap_frame,
  output logic [$clog2(FRAME_SAMPLES)-1:0] cap_sample
);

  localparam int unsigned IW = $clog2(FRAME_SAMPLES);
  localparam logic [IW-1:0] LAST = IW'(FRAME_SAMPLES - SAMPLES_PER_CLK);

  typedef enum logic [2:0] {IDLE, ARMED, WAIT_EDGE, DELAY, RUN} state_e;
  state_e state;

  logic [2:0]         ref_q;
  logic               ref_rise;
  logic [DELAY_W-1:0] dly;
  logic               cap_pend;

  initial begin
    assert (FRAME_SAMPLES % SAMPLES_PER_CLK == 0);
  end

  always_ff @(posedge clk) begin
    if (rst) ref_q <= '0;
    else     ref_q <= {ref_q[1:0], ref10};
  end
  assign ref_rise = ref_q[1] & ~ref_q[2];

  assign armed   = (state == ARMED) || (state == WAIT_EDGE) || (state == DELAY);
  assign running = (state == RUN);

  always_ff @(posedge clk) begin
    adc_sync    <= 1'b0;
    frame_start <= 1'b0;
    if (rst) begin
      state      <= IDLE;
      dly        <= '0;
      sample_idx <= '0;
      frame_ctr  <= '0;
    end else begin
      if (arm) begin
        state <= ARMED;
      end else begin
        unique case (state)
          IDLE: ;
          ARMED:     if (irig_valid && irig_time == target) state <= WAIT_EDGE;
          WAIT_EDGE: if (ref_rise) begin
                       state <= DELAY;
                       dly   <= sync_delay;
                     end
          DELAY:     if (dly == '0) begin
                       state       <= RUN;
                       adc_sync    <= 1'b1;
                       frame_start <= 1'b1;
                       sample_idx  <= '0;
                       frame_ctr   <= '0;
                     end else begin
                       dly <= dly - 1'b1;
                     end
          RUN:       begin
                       if (sample_idx == LAST) begin
                         sample_idx  <= '0;
                         frame_ctr   <= frame_ctr + 1'b1;
                         frame_start <= 1'b1;
                       end else begin
                         sample_idx <= sample_idx + IW'(SAMPLES_PER_CLK);
                       end
                     end
          default:   state <= IDLE;
        endcase
      end
    end
  end

  // Capture of frame counter and IRIG-B time at the same instant
  always_ff @(posedge clk) begin
    if (rst) begin
      cap_pend      <= 1'b0;
      capture_valid <= 1'b0;
      cap_time      <= '0;
      cap_frame     <= '0;
      cap_sample    <= '0;
    end else begin
      if (capture_req) begin
        cap_pend      <= 1'b1;
        capture_valid <= 1'b0;
      end else if (cap_pend && irig_valid) begin
        cap_pend      <= 1'b0;
        capture_valid <= 1'b1;
        cap_time      <= irig_time;
        cap_frame     <= frame_ctr;
        cap_sample    <= sample_idx;
      end
    end
  end

endmodule
