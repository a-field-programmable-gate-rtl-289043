// spectro_channel: one complete spectrometer channel.
//
// The chain of one input: the full-band front end (dhbf) and the DDC frame
// FIFO (ddc_frame_fifo) feed the virtual switch (band_select); the selected
// complex stream is windowed (window_lut), transformed (fft_r2sdf), turned
// into power (power_calc) and integrated (averager), which writes finished
// spectra to the board FIFO. The instrument has two such channels, one per
// ADC, sharing the control registers.
//
// The order of the blocks is the published one. Pipeline latency from the
// switch to the averager is 2 (window) + N + log2(N) - 2 input beats (FFT)
// + 1 (power) clocks; the averager adds two more before a result is stored.
module spectro_channel
  import spectro_pkg::*;
#(
  parameter int N    = FFT_N,
  parameter int FIFO_DEPTH = 2 * FFT_N
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // control
  input  logic                  start,
  input  logic                  stop,
  input  logic                  clear_flags,
  input  band_mode_e            mode,
  input  logic [NINT_W-1:0]     nint,
  input  logic                  win_we,
  input  logic [$clog2(N)-1:0]  win_addr,
  input  logic [WIN_W-1:0]      win_data,
  // inputs
  input  logic signed [ADC_W-1:0] adc,
  input  logic                  ddc_valid,
  input  cplx_t                 ddc_data,
  // board FIFO write side
  output logic                  fifo_wen,
  output logic [ACC_W-1:0]      fifo_wdata,
  input  logic                  fifo_full,
  // status
  output logic                  running,
  output logic                  data_ready,
  output logic                  dumping,
  output logic                  avg_overflow,
  output logic                  ddc_overflow
);

  localparam int LG   = $clog2(N);
  localparam int FOW  = SAMP_W + 1 + LG;

  logic       front_clear;
  band_mode_e active_mode;

  // full band front end
  logic  full_valid;
  cplx_t full_data;
  dhbf u_dhbf (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (front_clear),
    .in_valid  (1'b1),
    .adc       (adc),
    .out_valid (full_valid),
    .out_re    (full_data.re),
    .out_im    (full_data.im)
  );

  // narrow band input buffer
  logic  narrow_valid;
  cplx_t narrow_data;
  ddc_frame_fifo #(.FRAME(N), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (front_clear),
    .in_valid  (ddc_valid && running && active_mode == MODE_NARROW_BAND),
    .in_data   (ddc_data),
    .out_valid (narrow_valid),
    .out_data  (narrow_data),
    .overflow  (ddc_overflow)
  );

  // virtual switch
  logic  sw_valid, sw_sync;
  cplx_t sw_data;
  band_select u_switch (
    .clk          (clk),
    .rst_n        (rst_n),
    .mode         (mode),
    .start        (start),
    .stop         (stop),
    .front_clear  (front_clear),
    .running      (running),
    .active_mode  (active_mode),
    .full_valid   (full_valid),
    .full_data    (full_data),
    .narrow_valid (narrow_valid),
    .narrow_data  (narrow_data),
    .out_valid    (sw_valid),
    .out_data     (sw_data),
    .out_sync     (sw_sync)
  );

  // window
  logic                     w_valid, w_sync;
  logic signed [SAMP_W-1:0] w_re, w_im;
  window_lut #(.N(N)) u_window (
    .clk       (clk),
    .rst_n     (rst_n),
    .coef_we   (win_we),
    .coef_addr (win_addr),
    .coef_data (win_data),
    .in_valid  (sw_valid),
    .in_sync   (sw_sync),
    .in_re     (sw_data.re),
    .in_im     (sw_data.im),
    .out_valid (w_valid),
    .out_sync  (w_sync),
    .out_re    (w_re),
    .out_im    (w_im)
  );

  // FFT
  logic                  f_valid, f_first, f_sync;
  logic [LG-1:0]         f_bin;
  logic signed [FOW-1:0] f_re, f_im;
  fft_r2sdf #(.N(N), .IN_W(SAMP_W)) u_fft (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (w_valid),
    .in_sync   (w_sync),
    .in_re     (w_re),
    .in_im     (w_im),
    .out_valid (f_valid),
    .out_first (f_first),
    .out_sync  (f_sync),
    .out_bin   (f_bin),
    .out_re    (f_re),
    .out_im    (f_im)
  );

  // power
  logic            p_valid, p_first, p_sync;
  logic [LG-1:0]   p_bin;
  logic [2*FOW:0]  p_pow;
  power_calc #(.W(FOW), .BW(LG)) u_power (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (f_valid),
    .in_first  (f_first),
    .in_sync   (f_sync),
    .in_bin    (f_bin),
    .in_re     (f_re),
    .in_im     (f_im),
    .out_valid (p_valid),
    .out_first (p_first),
    .out_sync  (p_sync),
    .out_bin   (p_bin),
    .out_pow   (p_pow)
  );

  // averager
  averager #(.N(N), .PW(2*FOW+1)) u_avg (
    .clk          (clk),
    .rst_n        (rst_n),
    .nint         (nint),
    .clear_flags  (clear_flags),
    .in_valid     (p_valid),
    .in_first     (p_first),
    .in_sync      (p_sync),
    .in_bin       (p_bin),
    .in_pow       (p_pow),
    .fifo_wen     (fifo_wen),
    .fifo_wdata   (fifo_wdata),
    .fifo_full    (fifo_full),
    .data_ready   (data_ready),
    .overflow     (avg_overflow),
    .dumping      (dumping)
  );

endmodule
