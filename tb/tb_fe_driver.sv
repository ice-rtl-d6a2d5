// tb_fe_driver: stimulus and checking for end-to-end tests of
// ice_fengine_top. It is connected to the top's ports by a test module and
// takes the same sizes as parameters.
//
// What it does, in order:
//  1. Reads the ID word over SPI and loads a random complex gain for every
//     input and bin through the gain window.
//  2. Programs sync target, sync delay, a switcher phase and the IRIG-B
//     encoder, and arms the sync.
//  3. Sends an IRIG-B code of its own making: a lone marker, then frames for
//     T1, T2, ... one per second. The decoder locks on the marker pair, the
//     T1 frame matches the target and adc_sync must follow the next 10 MHz
//     edge after exactly 4 + delay cycles.
//  4. Feeds channelized frames (mostly small values, some large enough to
//     clip) and checks every packet on every link against a reference:
//     header fields, frame counter, bin order, per-input 4+4 bit values.
//  5. Cuts one frame short and checks the sticky frame-error flag over SPI.
//  6. (DO_CAPTURE) Requests a capture and checks that the captured time is T2 and the
//     captured frame counter and sample index match the cycle at which the
//     T2 frame ended.
//  7. Counts, and requires at least once: IRIG-B lock, sync, capture,
//     clipping, frame error, heartbeat toggles, switcher clock edges at the
//     right period, encoder pulses, packets on every link.
module tb_fe_driver
  import ice_pkg::*;
#(
  parameter int unsigned N_IN = 16, NB = 1024, N_LINKS = 16, IN_W = 18, SHIFT = 24,
  parameter int unsigned FRAME_SAMPLES = 2048, SPC = 4,
  parameter int unsigned CLK_HZ = 200_000_000, BUCK_HZ = 1_000_000,
  parameter int unsigned REF_HALF = 10,     // half period of the 10 MHz reference, cycles (> 3)
  parameter int unsigned N_FRAMES = 3,      // channelized frames checked
  parameter longint      WATCHDOG = 64'd700_000_000,
  parameter bit          DO_CAPTURE = 1       // send a second IRIG-B frame and test the capture
) (
  input  logic clk,
  output logic rst,
  output logic ref10,
  output logic irig_in,
  input  logic irig_out,
  output logic [3:0] slot,
  output logic spi_sclk, spi_cs_n, spi_mosi,
  input  logic spi_miso,
  input  logic adc_sync, frame_start,
  output logic fft_valid, fft_sof,
  output logic signed [N_IN-1:0][IN_W-1:0] fft_re, fft_im,
  input  logic [N_LINKS-1:0] tx_valid, tx_sop, tx_eop,
  input  logic [N_LINKS-1:0][N_IN*8-1:0] tx_data,
  input  logic [N_BUCK-1:0] buck_sync_out,
  input  logic led, pps, sat_any
);

  localparam int CPM  = CLK_HZ / 1000;       // cycles per ms
  localparam int PKT  = NB / N_LINKS;
  localparam int FCYC = FRAME_SAMPLES / SPC;  // cycles per ADC frame
  localparam int BDIV = CLK_HZ / BUCK_HZ;
  localparam int DLY  = 2;
  localparam int SPI_HALF = 3;                // fabric cycles per SCLK half period

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s (cycle %0d)", m, cyc); end
  endtask

  // the clock period is 10 time units; waiting on time rather than on
  // clock edges keeps long runs fast
  initial begin
    #(WATCHDOG * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- 10 MHz reference -----------------
  longint last_ref_rise = -1;
  initial begin
    ref10 = 0;
    forever begin
      repeat (REF_HALF) @(negedge clk);
      ref10 = ~ref10;
      if (ref10) last_ref_rise = cyc;
    end
  end

  // ---------------- SPI master ------------------------
  task automatic spi(input bit wr, input logic [14:0] addr, input logic [31:0] wd,
                     output logic [31:0] rd);
    logic [55:0] o;
    o = {wr, addr, 8'h00, wd};
    rd = '0;
    @(negedge clk); spi_cs_n = 0;
    repeat (SPI_HALF) @(negedge clk);
    for (int i = 0; i < 56; i++) begin
      spi_mosi = o[55 - i];
      repeat (SPI_HALF) @(negedge clk);
      spi_sclk = 1;
      if (i >= 24) rd = {rd[30:0], spi_miso};
      repeat (SPI_HALF) @(negedge clk);
      spi_sclk = 0;
    end
    repeat (SPI_HALF) @(negedge clk);
    spi_cs_n = 1;
    repeat (2 * SPI_HALF) @(negedge clk);
  endtask
  task automatic wr(input logic [14:0] a, input logic [31:0] d);
    logic [31:0] r;
    spi(1, a, d, r);
  endtask
  task automatic rd(input logic [14:0] a, output logic [31:0] d);
    spi(0, a, 32'h0, d);
  endtask

  // ---------------- IRIG-B generator ------------------
  function automatic logic [99:0] irig_bits(irig_time_t t);
    logic [99:0] b = '0;
    int v;
    v = t.second; b[4:1] = 4'(v % 10); b[8:6] = 3'(v / 10);
    v = t.minute; b[13:10] = 4'(v % 10); b[17:15] = 3'(v / 10);
    v = t.hour;   b[23:20] = 4'(v % 10); b[26:25] = 2'(v / 10);
    v = t.day;    b[33:30] = 4'(v % 10); b[38:35] = 4'((v / 10) % 10); b[41:40] = 2'(v / 100);
    v = t.year;   b[53:50] = 4'(v % 10); b[58:55] = 4'(v / 10);
    return b;
  endfunction
  task automatic irig_cell(int w);
    irig_in = 1; #(longint'(w) * CPM * 10);
    irig_in = 0; #(longint'(10 - w) * CPM * 10);
  endtask
  longint frame_end[8];           // cycle at which the P0 pulse of frame k fell
  task automatic irig_frame(irig_time_t t, int k);
    logic [99:0] b;
    b = irig_bits(t);
    for (int i = 0; i < 100; i++) begin
      if (i == 0 || i % 10 == 9) begin
        if (i == 99) begin
          irig_in = 1; #(longint'(8) * CPM * 10);
          irig_in = 0; frame_end[k] = cyc;
          #(longint'(2) * CPM * 10);
        end else irig_cell(8);
      end else irig_cell(b[i] ? 5 : 2);
    end
  endtask

  irig_time_t t1, t2, t3;

  // ---------------- monitors --------------------------
  int n_sync = 0, n_sat = 0, n_led = 0, n_buck = 0, buck_bad = 0, n_enc = 0, n_pps = 0;
  longint t_sync = -1, last_buck = -1;
  logic led_q = 0, buck_q = 0, enc_q = 0;
  always @(posedge clk) if (!rst) begin
    if (adc_sync) begin n_sync++; t_sync = cyc; last_buck = -1; end   // switcher clocks restart at sync
    if (sat_any) n_sat++;
    if (pps) n_pps++;
    if (led != led_q) n_led++;
    led_q = led;
    if (irig_out && !enc_q) n_enc++;
    enc_q = irig_out;
    if (buck_sync_out[0] && !buck_q) begin
      if (last_buck >= 0 && cyc - last_buck != BDIV) buck_bad++;
      last_buck = cyc; n_buck++;
    end
    buck_q = buck_sync_out[0];
  end

  // reference model of the link packets
  typedef struct { bit hdr; logic [N_IN*8-1:0] w; bit eop; } item_t;
  item_t expq [N_LINKS][$];
  int n_words [N_LINKS];
  int bad_words = 0;
  bit ignore_links = 0;   // set while deliberately malformed frames are sent
  always @(posedge clk) if (!rst) begin
    for (int l = 0; l < N_LINKS; l++) if (tx_valid[l] && !ignore_links) begin
      item_t e;
      if (expq[l].size() == 0) begin
        bad_words++;
        if (bad_words < 5) $display("link %0d: unexpected word", l);
      end else begin
        e = expq[l].pop_front();
        if (tx_sop[l] != e.hdr || tx_eop[l] != e.eop || tx_data[l] != e.w) begin
          bad_words++;
          if (bad_words < 5) $display("link %0d: got %h sop %0d eop %0d, expected %h sop %0d eop %0d",
                                      l, tx_data[l], tx_sop[l], tx_eop[l], e.w, e.hdr, e.eop);
        end
        n_words[l]++;
      end
    end
  end

  logic signed [15:0] gr [N_IN][NB], gi [N_IN][NB];

  function automatic logic [3:0] q4(longint p);
    longint r;
    r = (p + (64'sd1 <<< (SHIFT - 1))) >>> SHIFT;
    if (r > 7) r = 7;
    if (r < -7) r = -7;
    return 4'(r);
  endfunction

  // one channelized frame; nb bins, record: whether to build expectations
  task automatic fft_frame(int nb, longint fc, bit record);
    for (int b = 0; b < nb; b++) begin
      logic [N_IN*8-1:0] w;
      item_t it;
      @(negedge clk);
      while ($urandom_range(0, 7) == 0) begin fft_valid = 0; fft_sof = 0; @(negedge clk); end
      for (int i = 0; i < N_IN; i++) begin
        longint xr, xi;
        int amp;
        // bins divisible by 5 of input 3 are full scale and clip
        amp = (i == 3 && b % 5 == 0) ? (1 << (IN_W - 1)) - 1 : (1 << (SHIFT - 9));
        fft_re[i] = IN_W'($signed($urandom_range(0, 2 * amp)) - amp);
        fft_im[i] = IN_W'($signed($urandom_range(0, 2 * amp)) - amp);
        xr = longint'($signed(fft_re[i])); xi = longint'($signed(fft_im[i]));
        w[i*8 +: 8] = {q4(xr * gr[i][b] - xi * gi[i][b]), q4(xr * gi[i][b] + xi * gr[i][b])};
      end
      fft_valid = 1; fft_sof = (b == 0);
      if (record) begin
        if (b < N_LINKS) begin
          it.hdr = 1; it.eop = 0;
          it.w = (N_IN*8)'({8'hA5, 8'd6, 8'(b), 8'(PKT), 48'(fc), 48'd0}) << (N_IN*8 - 128);
          expq[b % N_LINKS].push_back(it);
        end
        it.hdr = 0; it.eop = (b >= NB - N_LINKS); it.w = w;
        expq[b % N_LINKS].push_back(it);
      end
    end
    @(negedge clk); fft_valid = 0; fft_sof = 0;
  endtask

  // ---------------- main sequence ---------------------
  initial begin
    logic [31:0] d;
    rst = 1; irig_in = 0; slot = 4'd6;
    spi_sclk = 0; spi_cs_n = 1; spi_mosi = 0;
    fft_valid = 0; fft_sof = 0; fft_re = '0; fft_im = '0;
    t1 = '{year: 7'd17, day: 9'd250, hour: 5'd23, minute: 6'd59, second: 6'd58};
    t2 = t1; t2.second = 6'd59;
    t3 = '{year: 7'd17, day: 9'd251, hour: 5'd0, minute: 6'd0, second: 6'd0};
    repeat (10) @(negedge clk);
    rst = 0;
    repeat (10) @(negedge clk);
    rd(15'h000, d);
    check(d == 32'h1CE0_0001, $sformatf("ID word %h", d));
    for (int i = 0; i < N_IN; i++)
      for (int b = 0; b < NB; b++) begin
        gr[i][b] = 16'($signed($urandom_range(0, 1000)) - 500);
        gi[i][b] = 16'($signed($urandom_range(0, 1000)) - 500);
        if (i == 3 && b % 5 == 0) gr[i][b] = 16'sd30000;   // large gain: these bins clip
        wr(15'h4000 | 15'(i * NB + b), {gi[i][b], gr[i][b]});
      end
    wr(15'h003, time_to_reg(t1));
    wr(15'h004, 32'(t1.year));
    wr(15'h005, DLY);
    wr(15'h011, {16'd3, 16'd0});       // channel 1: default divider, phase 3
    wr(15'h00E, time_to_reg(t3));
    wr(15'h00F, 32'(t3.year));
    wr(15'h00D, 32'h1);                // IRIG-B encoder on
    wr(15'h001, 32'h1);                // arm
    rd(15'h002, d);
    check(d[1] && !d[2], "armed, not running");
    fork
      begin : irig_gen
        irig_cell(8);                  // lone P0 marker
        irig_frame(t1, 1);
        if (DO_CAPTURE) irig_frame(t2, 2);
        else irig_cell(8);             // reference marker of the next frame: on-time pulse
      end
      begin : data
        @(posedge clk iff adc_sync);
        check(cyc - last_ref_rise == 4 + DLY,
              $sformatf("adc_sync %0d cycles after the 10 MHz edge, expected %0d", cyc - last_ref_rise, 4 + DLY));
        check(cyc > frame_end[1], "sync after the target frame");
        rd(15'h002, d);
        check(d[0] && d[2], $sformatf("locked and running, status %h", d));
        wr(15'h001, 32'h2);            // capture at the next decoded time
        repeat (20) @(negedge clk);
        for (int f = 0; f < int'(N_FRAMES); f++) fft_frame(NB, f, 1);
        repeat (10) @(negedge clk);
        // a frame cut short, then a full one
        repeat (5) @(negedge clk);
        ignore_links = 1;
        fft_frame(NB / 2, N_FRAMES, 0);
        fft_frame(NB, 0, 0);
        repeat (10) @(negedge clk);
        for (int l = 0; l < N_LINKS; l++) expq[l].delete();
        rd(15'h002, d);
        check(d[4], "frame-length error flagged");
        n_ferr = d[4];
        wr(15'h002, 32'h10);
        rd(15'h002, d);
        check(!d[4], "frame-length error cleared");
      end
    join
    // capture: the T2 frame ended at frame_end[2]
    repeat (20) @(negedge clk);
    rd(15'h002, d);
    check(d[3] == DO_CAPTURE, "capture valid");
    n_cap = d[3];
    if (DO_CAPTURE) begin
      logic [31:0] flo, fhi, ct, cy;
      longint pos, dt;
      rd(15'h006, flo); rd(15'h007, fhi); rd(15'h008, ct); rd(15'h009, cy);
      check(ct == time_to_reg(t2) && cy[6:0] == t2.year, $sformatf("captured time %h", ct));
      pos = longint'({fhi[15:0], flo}) * FCYC + longint'(cy[26:16]) / SPC;
      dt = frame_end[2] - t_sync;
      check(pos >= dt && pos <= dt + 6,
            $sformatf("captured position %0d cycles after sync, T2 ended %0d after", pos, dt));
    end
    // mechanisms
    for (int l = 0; l < N_LINKS; l++)
      check(n_words[l] >= int'(N_FRAMES) * (PKT + 1), $sformatf("link %0d words %0d", l, n_words[l]));
    check(bad_words == 0, $sformatf("%0d link words wrong", bad_words));
    check(n_sync == 1, $sformatf("sync pulses %0d", n_sync));
    check(n_sat > 0, "clipping seen");
    check(n_led > 0, "heartbeat toggled");
    check(n_buck > 3 && buck_bad == 0, $sformatf("switcher clock edges %0d, bad periods %0d", n_buck, buck_bad));
    check(n_enc > 50, $sformatf("encoder pulses %0d", n_enc));
    check(n_pps > 0, "on-time pulse");
    check(n_ferr > 0 && (n_cap > 0 || !DO_CAPTURE), "frame error and capture");
    $display("mechanisms: sync %0d capture %0d clip %0d frame_err %0d led toggles %0d buck edges %0d enc pulses %0d pps %0d",
             n_sync, n_cap, n_sat, n_ferr, n_led, n_buck, n_enc, n_pps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int n_ferr = 0, n_cap = 0;

endmodule
