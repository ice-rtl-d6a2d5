// ct_packetizer: first stage of the corner-turn network.
//
// After the F-engine, one board holds every frequency bin of its own 16
// inputs, while each downstream correlator node needs a subset of bins for
// all inputs. The first corner-turn stage splits every frame of NB bins x
// N_IN inputs into N_LINKS packets, one per destination board of the crate,
// each packet holding NB/N_LINKS bins for all N_IN inputs; every board then
// ends up with the same bin subset from all boards.
//
// Bin assignment (this design's choice): bin b goes to link b mod N_LINKS,
// so the bins arrive already sorted by destination in round-robin order and
// no frame buffer is needed: each input cycle's word (one bin of all N_IN
// inputs, input 0 in the low byte) belongs to exactly one link. Each link's
// packet is one header word followed by NB/N_LINKS data words, in bin
// order. The header is
//   [127:120] 8'hA5   [119:112] source slot   [111:104] link (= first bin)
//   [103:96]  words in packet (NB/N_LINKS)    [95:48]   48-bit frame counter
//   [47:0]    zero
// (for N_IN = 16; the fields are placed from the top of a word of any width
// of at least 128 bits).
//
// Timing: a bin arriving at cycle t is sent on its link at t+1, except the
// first bin of each link in a frame: then the header goes out at t+1 and
// the data word at t+2 (no other word of that link arrives before t+N_LINKS).
// Each link thus carries 1/N_LINKS of the input words, which is what lets a
// 10 Gbit/s link carry them.
//
// Frame counter: cleared by sync, incremented after the last bin of every
// frame; the header carries the counter of the frame it belongs to. Data is
// accepted only after the first in_sof following reset or sync. An in_sof
// that arrives before the previous frame is complete pulses frame_err and
// restarts the frame (packets of the cut frame stay without their end).
module ct_packetizer
  import ice_pkg::*;
#(
  parameter int unsigned N_IN    = 16,
  parameter int unsigned NB      = 1024,
  parameter int unsigned N_LINKS = 16,
  parameter int unsigned CTR_W   = 48
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic                            sync,
  input  logic [7:0]                      slot,
  input  logic                            in_valid,
  input  logic                            in_sof,
  input  cplx4_t [N_IN-1:0]               in_data,
  output logic [N_LINKS-1:0]              tx_valid,
  output logic [N_LINKS-1:0]              tx_sop,
  output logic [N_LINKS-1:0]              tx_eop,
  output logic [N_LINKS-1:0][N_IN*8-1:0]  tx_data,
  output logic [CTR_W-1:0]                frame_ctr,
  output logic                            frame_err
);

  localparam int unsigned DW  = N_IN * 8;
  localparam int unsigned BW  = $clog2(NB);
  localparam int unsigned LW  = (N_LINKS > 1) ? $clog2(N_LINKS) : 1;
  localparam int unsigned PKT = NB / N_LINKS;

  initial begin
    assert (DW >= 128) else $error("word narrower than the header");
    assert (NB % N_LINKS == 0 && N_LINKS >= 2 && (N_LINKS & (N_LINKS - 1)) == 0)
      else $error("N_LINKS must be a power of two >= 2 dividing NB");
  end

  logic [BW-1:0] bcnt, bin;
  logic          started;
  logic [LW-1:0] link;
  logic          first, last, accept;

  // one word can be waiting: the data word of a link whose header went first
  logic          hold_v, hold_eop;
  logic [LW-1:0] hold_link;
  logic [DW-1:0] hold_data;

  assign bin    = in_sof ? '0 : bcnt;
  assign link   = LW'(bin % BW'(N_LINKS));
  assign first  = bin < BW'(N_LINKS);
  assign last   = bin >= BW'(NB - N_LINKS);
  assign accept = in_valid && (started || in_sof);

  function automatic logic [DW-1:0] header(input logic [7:0] s, input logic [LW-1:0] l,
                                           input logic [CTR_W-1:0] fc);
    logic [127:0] h;
    h = {8'hA5, s, 8'(l), 8'(PKT), 48'(fc), 48'd0};
    return DW'(h) << (DW - 128);
  endfunction

  always_ff @(posedge clk) begin
    tx_valid  <= '0;
    tx_sop    <= '0;
    tx_eop    <= '0;
    frame_err <= 1'b0;
    if (rst || sync) begin
      bcnt      <= '0;
      started   <= 1'b0;
      frame_ctr <= '0;
      hold_v    <= 1'b0;
      hold_eop  <= 1'b0;
      hold_link <= '0;
      hold_data <= '0;
      tx_data   <= '0;
    end else begin
      // the waiting data word goes out first
      if (hold_v) begin
        tx_valid[hold_link] <= 1'b1;
        tx_eop[hold_link]   <= hold_eop;
        tx_data[hold_link]  <= hold_data;
        hold_v              <= 1'b0;
      end
      if (accept) begin
        started <= 1'b1;
        if (in_sof && bcnt != '0) frame_err <= 1'b1;
        if (first) begin
          // header now, data next cycle
          tx_valid[link] <= 1'b1;
          tx_sop[link]   <= 1'b1;
          tx_data[link]  <= header(slot, link, frame_ctr);
          hold_v         <= 1'b1;
          hold_eop       <= last;
          hold_link      <= link;
          hold_data      <= in_data;
        end else begin
          tx_valid[link] <= 1'b1;
          tx_eop[link]   <= last;
          tx_data[link]  <= in_data;
        end
        if (bin == BW'(NB - 1)) begin
          bcnt      <= '0;
          frame_ctr <= frame_ctr + 1'b1;
        end else begin
          bcnt <= bin + 1'b1;
        end
      end
    end
  end

  // the waiting word never belongs to the link that receives a new word
  a_no_collide: assert property (@(posedge clk) disable iff (rst || sync)
                                 hold_v && accept |-> hold_link != link);

endmodule
