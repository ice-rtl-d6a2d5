// tb_ct_packetizer: self-checking test of the first corner-turn stage.
//
// With 64 bins, 16 inputs and 8 links, the bench streams frames of random
// 4+4 bit data (with gaps in in_valid) and reassembles what each link sends.
// Every link must send, per frame, one header (sop, magic A5, source slot,
// link number, 8 words, the frame counter of that frame) followed by the 8
// bins b = link, link+8, ... in order, with eop on the last one, each word
// equal to the input word of that bin. Each data word must leave one cycle
// after its bin arrived (two for the first bin of a link). It also checks
// that sync restarts the frame counter and that an early in_sof raises
// frame_err and starts a new frame.
module tb_ct_packetizer;
  import ice_pkg::*;

  localparam int N_IN = 16, NB = 64, NL = 8, PKT = NB / NL;
  logic clk = 0, rst = 1, sync = 0, in_valid = 0, in_sof = 0;
  cplx4_t [N_IN-1:0] in_data;
  logic [NL-1:0] tx_valid, tx_sop, tx_eop;
  logic [NL-1:0][127:0] tx_data;
  logic [47:0] frame_ctr;
  logic frame_err;
  int checks = 0, failures = 0, cyc = 0;

  ct_packetizer #(.N_IN(N_IN), .NB(NB), .N_LINKS(NL), .CTR_W(48)) dut (
    .clk, .rst, .sync, .slot(8'd9), .in_valid, .in_sof, .in_data,
    .tx_valid, .tx_sop, .tx_eop, .tx_data, .frame_ctr, .frame_err
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // what each link should send next: header marker or data word
  typedef struct { bit hdr; logic [127:0] w; bit eop; int t; } item_t;
  item_t expq [NL][$];
  int n_err = 0, n_words = 0, n_hdr = 0, bad = 0;

  always @(posedge clk) if (!rst) begin
    if (frame_err) n_err++;
    for (int l = 0; l < NL; l++) if (tx_valid[l]) begin
      item_t e;
      checks++;
      if (expq[l].size() == 0) begin failures++; bad++; $display("link %0d: unexpected word", l); end
      else begin
        e = expq[l].pop_front();
        if (tx_sop[l] != e.hdr || tx_eop[l] != e.eop || tx_data[l] != e.w || cyc - e.t > 2 || cyc - e.t < 1) begin
          failures++; bad++;
          if (bad < 6) $display("link %0d: sop %0d eop %0d data %h lat %0d / exp sop %0d eop %0d data %h",
                                l, tx_sop[l], tx_eop[l], tx_data[l], cyc - e.t, e.hdr, e.eop, e.w);
        end
        if (e.hdr) n_hdr++; else n_words++;
      end
    end
  end

  task automatic send_frame(int nbins, longint fc);
    int b;
    b = 0;
    while (b < nbins) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0; in_sof = 0;
      end else begin
        item_t h, d;
        for (int i = 0; i < N_IN; i++) in_data[i] = 8'($urandom);
        in_valid = 1; in_sof = (b == 0);
        if (b < NL) begin
          h.hdr = 1; h.eop = 0; h.t = cyc + 1;
          h.w = {8'hA5, 8'd9, 8'(b), 8'(PKT), 48'(fc), 48'd0};
          expq[b % NL].push_back(h);
        end
        d.hdr = 0; d.eop = (b >= NB - NL); d.w = in_data; d.t = cyc + 1;
        expq[b % NL].push_back(d);
        b++;
      end
    end
    @(negedge clk); in_valid = 0; in_sof = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    // data before the first sof is ignored
    @(negedge clk); in_valid = 1; in_sof = 0; in_data = '0;
    @(negedge clk); in_valid = 0;
    send_frame(NB, 0);
    send_frame(NB, 1);
    send_frame(NB, 2);
    repeat (5) @(posedge clk);
    checks++;
    if (frame_ctr != 3) begin failures++; $display("frame_ctr %0d", frame_ctr); end
    // sync: counter restarts
    @(negedge clk); sync = 1; @(negedge clk); sync = 0;
    send_frame(NB, 0);
    // a frame cut short: its packets stay open, frame_err on the next sof
    send_frame(20, 1);
    repeat (3) @(posedge clk);
    for (int l = 0; l < NL; l++) expq[l].delete();   // partial packets are not checked further
    send_frame(NB, 1);
    repeat (5) @(posedge clk);
    checks++;
    if (n_err != 1) begin failures++; $display("frame_err pulses %0d", n_err); end
    checks++;
    if (n_hdr != 6 * NL || n_words < 5 * NB) begin failures++; $display("headers %0d words %0d", n_hdr, n_words); end
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (expq[l].size() != 0) begin failures++; $display("link %0d: %0d words missing", l, expq[l].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
