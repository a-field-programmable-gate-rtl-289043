// spectro_pkg: constants and types shared by the FPGA spectrometer.
//
// The numbers that come from the published instrument are the 14-bit ADC
// samples, the 1024-point FFT, its 27-bit signed output and the 64-bit
// output bus towards the board FIFOs. The complex sample width inside the
// channel (16 bits), the window coefficient format and the control-bus
// register map are this design's own choices.
package spectro_pkg;

  localparam int ADC_W   = 14;   // ADC sample width
  localparam int SAMP_W  = 16;   // complex I/Q width between DHBF/DDC and the FFT
  localparam int FFT_N   = 1024; // FFT length (spectral channels)
  localparam int FFT_OW  = 27;   // FFT output width, real and imaginary
  localparam int WIN_W   = 16;   // window coefficient, unsigned, 1.0 = 2**(WIN_W-1)
  localparam int POW_W   = 2*FFT_OW + 1; // width of re^2 + im^2
  localparam int ACC_W   = 64;   // accumulator and output word width
  localparam int NINT_W  = 24;   // integration count register width

  // Control-bus register addresses (8-bit data bus, 4-bit address).
  typedef enum logic [3:0] {
    REG_CMD     = 4'h0,  // write: bit0 start, bit1 stop, bit2 clear flags
    REG_MODE    = 4'h1,  // bit0: 0 full band (DHBF), 1 narrow band (DDC)
    REG_NINT0   = 4'h2,  // integration count, bits 7:0
    REG_NINT1   = 4'h3,  // bits 15:8
    REG_NINT2   = 4'h4,  // bits 23:16
    REG_WADDR0  = 4'h5,  // window pointer, bits 7:0
    REG_WADDR1  = 4'h6,  // window pointer, upper bits
    REG_WDATA0  = 4'h7,  // window coefficient low byte (held)
    REG_WDATA1  = 4'h8,  // window coefficient high byte, commits and increments pointer
    REG_STATUS  = 4'h9,  // read: see status bits below
    REG_ERRORS  = 4'hA   // read: sticky error flags
  } reg_addr_e;

  // One complex sample between the front end and the FFT.
  typedef struct packed {
    logic signed [SAMP_W-1:0] re;
    logic signed [SAMP_W-1:0] im;
  } cplx_t;

  typedef enum logic {
    MODE_FULL_BAND   = 1'b0,
    MODE_NARROW_BAND = 1'b1
  } band_mode_e;

endpackage
