// tb_ice_fengine_top: end-to-end test of the motherboard firmware at reduced
// sizes: 64 bins, 16 links, a 20 kHz "clock" (20 cycles per IRIG-B
// millisecond, a 20-cycle switcher period) and 256-sample frames. The
// stimulus and checks are in tb_fe_driver.
module tb_ice_fengine_top;
  import ice_pkg::*;
  localparam int N_IN = 16, NB = 64, NL = 16, IN_W = 18, SHIFT = 16;
  localparam int FS = 256, SPC = 4, CLK_HZ = 20_000, BUCK_HZ = 1_000;

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

  ice_fengine_top #(.N_IN(N_IN), .NB(NB), .N_LINKS(NL), .IN_W(IN_W), .SHIFT(SHIFT),
                    .FRAME_SAMPLES(FS), .SAMPLES_PER_CLK(SPC), .CLK_HZ(CLK_HZ), .BUCK_HZ(BUCK_HZ)) dut (
    .clk, .rst, .ref10, .irig_in, .irig_out, .slot, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .adc_sync, .frame_start, .sample_idx, .fft_valid, .fft_sof, .fft_re, .fft_im,
    .tx_valid, .tx_sop, .tx_eop, .tx_data, .buck_sync_out, .led, .pps, .link_frame_ctr, .sat_any
  );

  tb_fe_driver #(.N_IN(N_IN), .NB(NB), .N_LINKS(NL), .IN_W(IN_W), .SHIFT(SHIFT),
                 .FRAME_SAMPLES(FS), .SPC(SPC), .CLK_HZ(CLK_HZ), .BUCK_HZ(BUCK_HZ),
                 .REF_HALF(5), .N_FRAMES(3), .WATCHDOG(2_000_000)) drv (
    .clk, .rst, .ref10, .irig_in, .irig_out, .slot, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .adc_sync, .frame_start, .fft_valid, .fft_sof, .fft_re, .fft_im,
    .tx_valid, .tx_sop, .tx_eop, .tx_data, .buck_sync_out, .led, .pps, .sat_any
  );
endmodule
