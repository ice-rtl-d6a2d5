// irigb_encoder: IRIG-B (IRIG Standard 200, format B, DC level shift) time
// code generator.
//
// It produces one 100-bit frame per second: each 10 ms bit cell starts with
// a high pulse of 2 ms (0), 5 ms (1) or 8 ms (position marker at bits 0, 9,
// 19, ..., 99). At the start of every frame (the rising edge of the
// reference marker, the "on-time" point) it latches time_in and pulses
// frame_start, so the driver has one full second to present the time of the
// next frame. The seconds, minutes, hours, day-of-year and year fields are
// sent in BCD at their standard bit positions; the control and
// straight-binary-seconds fields are sent as zeros.
//
// Interface: with enable low the output is held low and the bit timing is
// reset; the first frame starts on the cycle after enable rises.
// CLKS_PER_MS sets the time base (200 000 at a 200 MHz clock).
//
// The paper lists an IRIG-B time encoder among the core firmware blocks and
// nothing more; the code format is the public standard, and the latch-at-
// frame-start interface is this design's choice.
module irigb_encoder
  import ice_pkg::*;
#(
  parameter int unsigned CLKS_PER_MS = 200_000
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       enable,
  input  irig_time_t time_in,
  output logic       irig_out,
  output logic       frame_start
);

  localparam int unsigned CW = $clog2(CLKS_PER_MS);

  logic [CW-1:0] cyc;      // cycle within the millisecond
  logic [3:0]    ms;       // millisecond within the bit cell
  logic [6:0]    idx;      // bit index within the frame
  irig_time_t    t;
  logic [99:0]   frame_bits;
  logic          active;

  function automatic logic [7:0] to_bcd(input logic [6:0] v);
    return {4'(v / 7'd10), 4'(v % 7'd10)};
  endfunction

  always_comb begin
    logic [7:0] s, m, h, y, dl;
    logic [3:0] dh;
    s  = to_bcd(7'(t.second));
    m  = to_bcd(7'(t.minute));
    h  = to_bcd(7'(t.hour));
    y  = to_bcd(t.year);
    dl = to_bcd(7'(t.day % 9'd100));
    dh = 4'(t.day / 9'd100);
    frame_bits        = '0;
    frame_bits[4:1]   = s[3:0];
    frame_bits[8:6]   = s[6:4];
    frame_bits[13:10] = m[3:0];
    frame_bits[17:15] = m[6:4];
    frame_bits[23:20] = h[3:0];
    frame_bits[26:25] = h[5:4];
    frame_bits[33:30] = dl[3:0];
    frame_bits[38:35] = dl[7:4];
    frame_bits[41:40] = dh[1:0];
    frame_bits[53:50] = y[3:0];
    frame_bits[58:55] = y[7:4];
  end

  logic       is_mark;
  logic [3:0] width_ms;
  assign is_mark  = (idx == 7'd0) || ((idx % 7'd10) == 7'd9);
  assign width_ms = is_mark ? 4'd8 : (frame_bits[idx] ? 4'd5 : 4'd2);

  always_ff @(posedge clk) begin
    frame_start <= 1'b0;
    if (rst || !enable) begin
      cyc      <= '0;
      ms       <= '0;
      idx      <= '0;
      active   <= 1'b0;
      irig_out <= 1'b0;
      t        <= '0;
    end else begin
      active <= 1'b1;
      if (!active || (cyc == CW'(CLKS_PER_MS - 1) && ms == 4'd9 && idx == 7'd99)) begin
        // start of a new frame
        t           <= time_in;
        frame_start <= 1'b1;
        irig_out    <= 1'b1;
        cyc         <= '0;
        ms          <= '0;
        idx         <= '0;
      end else begin
        if (cyc == CW'(CLKS_PER_MS - 1)) begin
          cyc <= '0;
          if (ms == 4'd9) begin
            ms  <= '0;
            idx <= idx + 1'b1;
          end else begin
            ms <= ms + 1'b1;
          end
        end else begin
          cyc <= cyc + 1'b1;
        end
        // output level for the next cycle
        if (cyc == CW'(CLKS_PER_MS - 1)) begin
          if (ms == 4'd9) irig_out <= 1'b1;                   // next cell starts high
          else            irig_out <= (ms + 4'd1) < width_ms;
        end
      end
    end
  end

endmodule
