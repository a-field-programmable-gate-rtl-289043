// fpga_spectrometer: two-channel 1024-point FFT spectrometer for the FPGA
// of a PCI data acquisition card.
//
// Two IF signals, sampled directly at 100 MS/s by 14-bit ADCs, each pass
// through their own spectrometer channel (spectro_channel): a Full Band
// path that turns the real 0-50 MHz band into complex baseband (dhbf) or,
// in Narrow Band mode, complex data from an external digital down
// converter buffered into whole frames (ddc_frame_fifo); then window, FFT,
// power and integration. Integrated 1024-bin spectra leave as 64-bit words
// towards the card's two hardware FIFOs and its 64-bit PCI interface. The
// PC controls everything through an 8-bit register bus (ctrl_regs).
//
// The ADCs, the down converter chips, the hardware FIFOs and the PCI
// interfaces are parts of the card, not of the FPGA, and connect through
// this module's ports. One clock, the 100 MHz sample clock, runs all of
// it; the DDC outputs and the FIFO write sides are taken to be synchronous
// to it. Both channels share the window table, mode and integration time,
// and are started together.
module fpga_spectrometer
  import spectro_pkg::*;
#(
  parameter int N          = FFT_N,
  parameter int FIFO_DEPTH = 2 * FFT_N
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // slow 8-bit control bus from the PC
  input  logic [3:0]             bus_addr,
  input  logic [7:0]             bus_wdata,
  input  logic                   bus_we,
  input  logic                   bus_re,
  output logic [7:0]             bus_rdata,
  // ADC samples, one per clock per channel
  input  logic signed [ADC_W-1:0] adc [2],
  // DDC outputs
  input  logic [1:0]             ddc_valid,
  input  cplx_t                  ddc_data [2],
  // write side of the two board FIFOs
  output logic [1:0]             fifo_wen,
  output logic [ACC_W-1:0]       fifo_wdata [2],
  input  logic [1:0]             fifo_full
);

  logic                 start, stop, clear_flags;
  band_mode_e           mode;
  logic [NINT_W-1:0]    nint;
  logic                 win_we;
  logic [$clog2(N)-1:0] win_addr;
  logic [WIN_W-1:0]     win_data;
  logic [1:0]           running, data_ready, dumping, avg_overflow, ddc_overflow;

  ctrl_regs #(.WAW($clog2(N))) u_regs (
    .clk          (clk),
    .rst_n        (rst_n),
    .bus_addr     (bus_addr),
    .bus_wdata    (bus_wdata),
    .bus_we       (bus_we),
    .bus_re       (bus_re),
    .bus_rdata    (bus_rdata),
    .start        (start),
    .stop         (stop),
    .clear_flags  (clear_flags),
    .mode         (mode),
    .nint         (nint),
    .win_we       (win_we),
    .win_addr     (win_addr),
    .win_data     (win_data),
    .running      (running[0]),
    .data_ready   (data_ready),
    .dumping      (dumping),
    .avg_overflow (avg_overflow),
    .ddc_overflow (ddc_overflow)
  );

  for (genvar c = 0; c < 2; c++) begin : g_ch
    spectro_channel #(.N(N), .FIFO_DEPTH(FIFO_DEPTH)) u_ch (
      .clk          (clk),
      .rst_n        (rst_n),
      .start        (start),
      .stop         (stop),
      .clear_flags  (clear_flags),
      .mode         (mode),
      .nint         (nint),
      .win_we       (win_we),
      .win_addr     (win_addr),
      .win_data     (win_data),
      .adc          (adc[c]),
      .ddc_valid    (ddc_valid[c]),
      .ddc_data     (ddc_data[c]),
      .fifo_wen     (fifo_wen[c]),
      .fifo_wdata   (fifo_wdata[c]),
      .fifo_full    (fifo_full[c]),
      .running      (running[c]),
      .data_ready   (data_ready[c]),
      .dumping      (dumping[c]),
      .avg_overflow (avg_overflow[c]),
      .ddc_overflow (ddc_overflow[c])
    );
  end

endmodule
