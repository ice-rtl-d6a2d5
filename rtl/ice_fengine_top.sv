// ice_fengine_top: FPGA firmware of one ICE motherboard configured as a
// CHIME F-engine and first corner-turn stage.
//
// Data path: the channelizer (polyphase filter bank and 2048-point FFT, an
// external library block, reached through the fft_* ports) delivers one
// frequency bin per cycle for each of the N_IN digitizer inputs. Each input
// has a gain_quant lane that applies its per-bin complex gain and reduces
// the bin to 4+4 bits. ct_packetizer then cuts each frame into N_LINKS
// packets, one per board of the crate (tx_* ports, to the backplane
// transceivers; the packet for this board's own slot is the local one).
//
// Timing and control: irigb_decoder reads the backplane TIME line;
// frame_timing waits for the armed target time, then for the next 10 MHz
// reference edge and the programmed delay, and pulses adc_sync (to the ADC
// chips and the channelizer, which start framing on it) and clears the
// packetizer's 48-bit frame counter; it also counts ADC frames and captures
// frame counter plus IRIG-B time on request. irigb_encoder can send a time
// code out of the board. buck_sync drives the nine switching-regulator sync
// clocks, re-aligned at every array sync. heartbeat blinks the LED, fast
// while IRIG-B is not locked. All settings go through ice_regs, reached by
// the ARM over spi_slave.
//
// One clock domain (clk, 200 MHz by default, derived from the 10 MHz
// reference by an external PLL); ref10, irig_in and the SPI pins are
// asynchronous inputs synchronised inside the blocks. rst is synchronous,
// active high.
//
// Which parts follow the paper and which are this design's is stated in
// each block; the main choices here are the one-bin-per-cycle channelizer
// interface and feeding the packetizer's frame counter from the array sync.
module ice_fengine_top
  import ice_pkg::*;
#(
  parameter int unsigned N_IN            = 16,
  parameter int unsigned NB              = 1024,
  parameter int unsigned N_LINKS         = 16,
  parameter int unsigned IN_W            = 18,
  parameter int unsigned SHIFT           = 24,
  parameter int unsigned FRAME_SAMPLES   = 2048,
  parameter int unsigned SAMPLES_PER_CLK = 4,
  parameter int unsigned CLK_HZ          = 200_000_000,
  parameter int unsigned BUCK_HZ         = 1_000_000     // default switcher sync frequency
) (
  input  logic                           clk,
  input  logic                           rst,
  // backplane timing
  input  logic                           ref10,
  input  logic                           irig_in,
  output logic                           irig_out,
  input  logic [3:0]                     slot,
  // ARM SPI
  input  logic                           spi_sclk,
  input  logic                           spi_cs_n,
  input  logic                           spi_mosi,
  output logic                           spi_miso,
  // ADC / channelizer side
  output logic                           adc_sync,
  output logic                           frame_start,
  output logic [$clog2(FRAME_SAMPLES)-1:0] sample_idx,
  input  logic                           fft_valid,
  input  logic                           fft_sof,
  input  logic signed [N_IN-1:0][IN_W-1:0] fft_re,
  input  logic signed [N_IN-1:0][IN_W-1:0] fft_im,
  // corner-turn links
  output logic [N_LINKS-1:0]             tx_valid,
  output logic [N_LINKS-1:0]             tx_sop,
  output logic [N_LINKS-1:0]             tx_eop,
  output logic [N_LINKS-1:0][N_IN*8-1:0] tx_data,
  // housekeeping
  output logic [N_BUCK-1:0]              buck_sync_out,
  output logic                           led,
  output logic                           pps,              // on-time pulse of each IRIG-B frame
  output logic [FRAME_CTR_W-1:0]         link_frame_ctr,   // frame counter the packets carry
  output logic                           sat_any
);

  localparam int unsigned IW = $clog2(FRAME_SAMPLES);

  reg_req_t   req;
  logic [31:0] rdata;

  irig_time_t dec_time, target, cap_time, enc_time;
  logic       dec_valid, dec_locked;
  logic [15:0] dec_bad;
  logic       arm, capture_req, buck_resync, enc_en;
  logic       enc_frame;   // frame-start strobe of the encoder; the time comes from a register
  logic [7:0] sync_delay;
  logic       armed, running, capture_valid;
  logic [FRAME_CTR_W-1:0] adc_frame_ctr, cap_frame;
  logic [IW-1:0] cap_sample;
  logic [N_BUCK-1:0] buck_en;
  logic [N_BUCK-1:0][15:0] buck_div, buck_phase;
  logic       gain_we;
  logic [$clog2(N_IN)-1:0] gain_lane;
  logic [$clog2(NB)-1:0]   gain_bin;
  logic [31:0]             gain_data;
  logic       frame_err;

  spi_slave u_spi (
    .clk, .rst, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .req, .rdata
  );

  ice_regs #(.N_LANES(N_IN), .NB(NB), .NBUCK(N_BUCK), .CTR_W(FRAME_CTR_W)) u_regs (
    .clk, .rst, .req, .rdata,
    .irig_locked(dec_locked), .irig_bad(dec_bad), .last_time(dec_time),
    .armed, .running, .capture_valid, .cap_time, .cap_frame,
    .cap_sample(11'(cap_sample)), .frame_ctr(adc_frame_ctr), .frame_err, .slot,
    .arm, .capture_req, .buck_resync, .target, .sync_delay,
    .buck_en, .buck_div, .buck_phase, .enc_en, .enc_time,
    .gain_we, .gain_lane, .gain_bin, .gain_data
  );

  irigb_decoder #(.CLKS_PER_MS(CLK_HZ / 1000)) u_irig_dec (
    .clk, .rst, .irig_in, .time_out(dec_time), .time_valid(dec_valid),
    .on_time(pps), .locked(dec_locked), .bad_frames(dec_bad)
  );

  irigb_encoder #(.CLKS_PER_MS(CLK_HZ / 1000)) u_irig_enc (
    .clk, .rst, .enable(enc_en), .time_in(enc_time), .irig_out, .frame_start(enc_frame)
  );

  frame_timing #(.FRAME_SAMPLES(FRAME_SAMPLES), .SAMPLES_PER_CLK(SAMPLES_PER_CLK),
                 .CTR_W(FRAME_CTR_W), .DELAY_W(8)) u_timing (
    .clk, .rst, .ref10, .arm, .target, .sync_delay,
    .irig_time(dec_time), .irig_valid(dec_valid), .capture_req,
    .armed, .running, .adc_sync, .frame_start, .sample_idx,
    .frame_ctr(adc_frame_ctr), .capture_valid, .cap_time, .cap_frame, .cap_sample
  );

  buck_sync #(.N_CH(N_BUCK), .W(16), .DEFAULT_DIV(CLK_HZ / BUCK_HZ)) u_buck (
    .clk, .rst, .resync(buck_resync | adc_sync), .enable(buck_en),
    .div(buck_div), .phase(buck_phase), .sync_out(buck_sync_out)
  );

  heartbeat #(.HALF_PERIOD(CLK_HZ / 2)) u_hb (
    .clk, .rst, .fault(~dec_locked), .led
  );

  // Per-input gain correction and requantization
  logic [N_IN-1:0] q_valid, q_sof, q_sat;
  cplx4_t [N_IN-1:0] q_data;

  for (genvar i = 0; i < N_IN; i++) begin : g_lane
    gain_quant #(.NB(NB), .IN_W(IN_W), .SHIFT(SHIFT)) u_gq (
      .clk, .rst,
      .in_valid(fft_valid), .in_sof(fft_sof), .in_re(fft_re[i]), .in_im(fft_im[i]),
      .gain_we(gain_we && gain_lane == $clog2(N_IN)'(i)), .gain_addr(gain_bin),
      .gain_data,
      .out_valid(q_valid[i]), .out_sof(q_sof[i]), .out_data(q_data[i]), .sat(q_sat[i])
    );
  end

  assign sat_any = |q_sat;

  ct_packetizer #(.N_IN(N_IN), .NB(NB), .N_LINKS(N_LINKS), .CTR_W(FRAME_CTR_W)) u_ct (
    .clk, .rst, .sync(adc_sync), .slot({4'd0, slot}),
    .in_valid(q_valid[0]), .in_sof(q_sof[0]), .in_data(q_data),
    .tx_valid, .tx_sop, .tx_eop, .tx_data, .frame_ctr(link_frame_ctr), .frame_err
  );

endmodule
