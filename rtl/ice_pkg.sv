// ice_pkg: types and constants shared by the ICE motherboard FPGA firmware.
//
// The IRIG-B time type carries the BCD fields of an IRIG-B frame as plain
// binary numbers. The register-bus type is the word interface between the
// SPI slave and the register map. The constants are the sizes of the CHIME
// F-engine configuration: 16 digitizer inputs per board, 2048-sample frames
// reduced to 1024 frequency bins of 4+4 bit, 16 boards per crate, 48-bit
// frame counter. Widths that the paper does not give (FFT output width, gain
// format) are this design's choice and are marked as such below.
package ice_pkg;

  // Sizes given by the paper (CHIME configuration, Sec. 4.2)
  localparam int unsigned N_INPUTS    = 16;    // digitizer inputs per motherboard
  localparam int unsigned FRAME_LEN   = 2048;  // samples per frame
  localparam int unsigned N_BINS      = 1024;  // frequency bins kept per frame
  localparam int unsigned N_SLOTS     = 16;    // motherboards per crate / corner-turn packets
  localparam int unsigned FRAME_CTR_W = 48;    // frame counter width
  localparam int unsigned N_BUCK      = 9;     // buck converters on the motherboard

  // Choices of this design
  localparam int unsigned FFT_W  = 18;  // FFT output width per real/imag part
  localparam int unsigned GAIN_W = 16;  // gain width per real/imag part
  localparam int unsigned ADDR_W = 15;  // register-bus word address width

  // Decoded IRIG-B time (IRIG Standard 200, format B, BCD fields)
  typedef struct packed {
    logic [6:0] year;     // 0..99
    logic [8:0] day;      // 1..366
    logic [4:0] hour;     // 0..23
    logic [5:0] minute;   // 0..59
    logic [5:0] second;   // 0..59
  } irig_time_t;

  // Position of a time value in a 32-bit register: {day, hour, minute, second}
  function automatic logic [31:0] time_to_reg(irig_time_t t);
    return {6'd0, t.day, t.hour, t.minute, t.second};
  endfunction

  function automatic irig_time_t reg_to_time(logic [31:0] r, logic [6:0] year);
    irig_time_t t;
    t.year   = year;
    t.day    = r[25:17];
    t.hour   = r[16:12];
    t.minute = r[11:6];
    t.second = r[5:0];
    return t;
  endfunction

  // Register-bus request from the serial interface
  typedef struct packed {
    logic              wr;     // one-cycle write strobe
    logic              rd;     // one-cycle read strobe
    logic [ADDR_W-1:0] addr;   // word address
    logic [31:0]       wdata;
  } reg_req_t;

  // Complex 4+4 bit sample: {real[3:0], imag[3:0]}, two's complement
  typedef logic [7:0] cplx4_t;

  // Kind of pulse in an IRIG-B bit cell
  typedef enum logic [1:0] {SYM_ZERO = 2'd0, SYM_ONE = 2'd1, SYM_MARK = 2'd2, SYM_BAD = 2'd3} irig_sym_e;

endpackage
