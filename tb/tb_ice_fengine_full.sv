// tb_ice_fengine_full: end-to-end test of the motherboard firmware with
// every parameter at its default: 16 inputs, 1024 bins, 16 links, 200 MHz
// clock (200 000 cycles per IRIG-B millisecond), 2048-sample frames. One
// complete operation: gain loading over SPI, IRIG-B lock, sync on the
// target time, three channelized frames checked packet by packet on all
// 16 links, frame-error detection. The IRIG-B capture, which needs one more
// IRIG-B second, is left to the reduced-size test. Stimulus and checks are
// in tb_fe_driver.
module tb_ice_fengine_full;
  import ice_pkg::*;
  localparam int N_IN = 16, NB = 1024, NL = 16, IN_W = 18, SHIFT = 24;
  localparam int FS = 2048, SPC = 4, CLK_HZ = 200_000_000, BUCK_HZ = 1_000_000;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst, ref10, irig_in, irig_out, spi_sclk, spi_cs_n, spi_mosi, spi_miso;
  logic [3:0] slot;
  logic adc_sync, frame_start, fft_valid, fft_sof, led, pps, sat_any;
  logic [$clog2(FS)-1:0] sample_idx;
  logic signed [N_IN-1:0][IN_W-1:0] fft_re, fft_im;
  logic [NL-1:0] tx_valid, tx_sop, tx_eop;
  logic [NL-1:0][N_IN*8-1:0] tx_data;
  logic [N_BUCK-1:0] buck_sync_out;
  logic [47:0] link_frame_ctr;

  ice_fengine_top dut (
    .clk, .rst, .ref10, .irig_in, .irig_out, .slot, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .adc_sync, .frame_start, .sample_idx, .fft_valid, .fft_sof, .fft_re, .fft_im,
    .tx_valid, .tx_sop, .tx_eop, .tx_data, .buck_sync_out, .led, .pps, .link_frame_ctr, .sat_any
  );

  tb_fe_driver #(.N_IN(N_IN), .NB(NB), .N_LINKS(NL), .IN_W(IN_W), .SHIFT(SHIFT),
                 .FRAME_SAMPLES(FS), .SPC(SPC), .CLK_HZ(CLK_HZ), .BUCK_HZ(BUCK_HZ),
                 .REF_HALF(10), .N_FRAMES(3), .WATCHDOG(400_000_000), .DO_CAPTURE(0)) drv (
    .clk, .rst, .ref10, .irig_in, .irig_out, .slot, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .adc_sync, .frame_start, .fft_valid, .fft_sof, .fft_re, .fft_im,
    .tx_valid, .tx_sop, .tx_eop, .tx_data, .buck_sync_out, .led, .pps, .sat_any
  );
endmodule
