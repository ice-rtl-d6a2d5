// irigb_decoder: IRIG-B (IRIG Standard 200, format B, DC level shift) time
// code decoder for the TIME signal that the backplane distributes to every
// slot.
//
// IRIG-B sends one 100-bit frame per second, one bit cell every 10 ms. The
// width of the high pulse at the start of each cell carries the symbol:
// 2 ms is a 0, 5 ms a 1 and 8 ms a position marker. Markers sit at bits
// 9, 19, ..., 99 and at bit 0 (the reference marker), so two markers in a
// row mark the start of a frame. The decoder measures each pulse in clock
// cycles, classifies it halfway between the nominal widths (<1 ms or >9.5 ms
// is an error), checks that markers appear where they belong, and on the
// last marker of a frame converts the BCD fields (seconds, minutes, hours,
// day of year, year) into an irig_time_t. Any misplaced marker, bad pulse or
// 12 ms without a rising edge drops it out of frame; it then waits for the
// next double marker.
//
// Interface: irig_in is asynchronous and is synchronised here. time_valid is
// a one-cycle pulse with time_out, issued at the falling edge of the P0
// marker (bit 99), 2 ms before the on-time edge of the following frame.
// on_time pulses on the rising edge of that next reference marker. locked is
// high while frames decode without error. bad_frames counts frames dropped.
//
// The paper names an IRIG-B time decoder among the core firmware blocks and
// says the timestamps arrive in IRIG-B format; everything inside follows the
// public IRIG-B standard, the thresholds and timeouts are this design's.
// The straight-binary-seconds and control fields are not decoded.
module irigb_decoder
  import ice_pkg::*;
#(
  parameter int unsigned CLKS_PER_MS = 200_000   // clock cycles per millisecond (200 MHz)
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       irig_in,
  output irig_time_t time_out,
  output logic       time_valid,
  output logic       on_time,
  output logic       locked,
  output logic [15:0] bad_frames
);

  localparam int unsigned CNT_MAX = 13 * CLKS_PER_MS;
  localparam int unsigned CW      = $clog2(CNT_MAX + 1);
  localparam logic [CW-1:0] T_MIN  = CW'(CLKS_PER_MS);          // 1.0 ms
  localparam logic [CW-1:0] T_01   = CW'((CLKS_PER_MS * 7) / 2);  // 3.5 ms
  localparam logic [CW-1:0] T_1M   = CW'((CLKS_PER_MS * 13) / 2); // 6.5 ms
  localparam logic [CW-1:0] T_MAX  = CW'((CLKS_PER_MS * 19) / 2); // 9.5 ms
  localparam logic [CW-1:0] T_GAP  = CW'(CLKS_PER_MS * 12);       // 12 ms

  logic [2:0]    sync_q;
  logic          rise, fall;
  logic [CW-1:0] width_cnt;   // cycles since the last rising edge
  logic          started;     // a rising edge has been seen
  logic          in_frame;
  logic          prev_mark;
  logic [6:0]    idx;         // index of the next expected bit
  logic [99:0]   bits;
  irig_sym_e     sym;
  logic          sym_valid;

  assign rise = sync_q[1] & ~sync_q[2];
  assign fall = ~sync_q[1] & sync_q[2];

  always_ff @(posedge clk) begin
    if (rst) sync_q <= '0;
    else     sync_q <= {sync_q[1:0], irig_in};
  end

  // Pulse width measurement
  always_ff @(posedge clk) begin
    if (rst) begin
      width_cnt <= '0;
      started   <= 1'b0;
    end else if (rise) begin
      width_cnt <= '0;
      started   <= 1'b1;
    end else if (width_cnt != T_GAP) begin
      width_cnt <= width_cnt + 1'b1;
    end
  end

  always_comb begin
    sym_valid = fall & started;
    if (width_cnt < T_MIN)       sym = SYM_BAD;
    else if (width_cnt < T_01)   sym = SYM_ZERO;
    else if (width_cnt < T_1M)   sym = SYM_ONE;
    else if (width_cnt < T_MAX)  sym = SYM_MARK;
    else                         sym = SYM_BAD;
  end

  function automatic logic [6:0] bcd(input logic [3:0] u, input logic [3:0] t, input logic [1:0] h);
    return 7'(u) + 7'(t) * 7'd10 + 7'(h) * 7'd100;
  endfunction

  logic gap_timeout;
  assign gap_timeout = started & (width_cnt == T_GAP) & in_frame;

  always_ff @(posedge clk) begin
    time_valid <= 1'b0;
    on_time    <= 1'b0;
    if (rst) begin
      in_frame   <= 1'b0;
      prev_mark  <= 1'b0;
      idx        <= '0;
      bits       <= '0;
      locked     <= 1'b0;
      bad_frames <= '0;
      time_out   <= '0;
    end else if (gap_timeout) begin
      in_frame   <= 1'b0;
      locked     <= 1'b0;
      prev_mark  <= 1'b0;
      bad_frames <= bad_frames + 1'b1;
    end else begin
      if (rise && in_frame && idx == 7'd0 && locked) on_time <= 1'b1;
      if (sym_valid) begin
        prev_mark <= (sym == SYM_MARK);
        if (!in_frame) begin
          if (sym == SYM_MARK && prev_mark) begin
            in_frame <= 1'b1;     // this marker is bit 0
            idx      <= 7'd1;
          end
        end else begin
          // a marker is expected at bit 0 and every bit ending in 9
          if (sym == SYM_BAD || ((sym == SYM_MARK) != (idx == 7'd0 || (idx % 7'd10) == 7'd9))) begin
            in_frame   <= 1'b0;
            locked     <= 1'b0;
            bad_frames <= bad_frames + 1'b1;
          end else begin
            bits[idx] <= (sym == SYM_ONE);
            if (idx == 7'd99) begin
              idx        <= 7'd0;
              locked     <= 1'b1;
              time_valid <= 1'b1;
              time_out.second <= 6'(bcd(bits[4:1],  {1'b0, bits[8:6]},   2'b00));
              time_out.minute <= 6'(bcd(bits[13:10], {1'b0, bits[17:15]}, 2'b00));
              time_out.hour   <= 5'(bcd(bits[23:20], {2'b00, bits[26:25]}, 2'b00));
              time_out.day    <= 9'(10'(bcd(bits[33:30], bits[38:35], 2'b00)) + 10'(bits[41:40]) * 10'd100);
              time_out.year   <= bcd(bits[53:50], bits[58:55], 2'b00);
            end else begin
              idx <= idx + 1'b1;
            end
          end
        end
      end
    end
  end

endmodule
