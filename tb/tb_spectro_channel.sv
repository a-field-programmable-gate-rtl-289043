// tb_spectro_channel: one spectrometer channel end to end, 64 bins.
//
// Loads a rectangular window (all coefficients 1.0) and integrates two
// spectra per output. Full Band: a real ADC tone at fs/4 + 5 * fs/(2N)
// must appear in bin +5 of the complex spectrum, with the power expected
// from its amplitude (2 * (N*A)**2 within 10 %) and at least 30 dB above
// every other bin. Narrow Band: a complex tone in bin 9 delivered
// irregularly by the DDC must appear in bin 9 with power 2 * (N*A)**2
// within 1 %. The spectra are read from a model of the board FIFO that is
// full at random.
module tb_spectro_channel;
  import spectro_pkg::*;

  localparam int N = 64;
  logic        clk = 0, rst_n = 1;
  logic        start = 0, stop = 0, clear_flags = 0;
  band_mode_e  mode = MODE_FULL_BAND;
  logic [23:0] nint = 24'd2;
  logic        win_we = 0;
  logic [5:0]  win_addr = '0;
  logic [15:0] win_data = '0;
  logic signed [13:0] adc = '0;
  logic        ddc_valid = 0;
  cplx_t       ddc_data = '0;
  logic        fifo_wen, fifo_full = 0;
  logic [63:0] fifo_wdata;
  logic        running, data_ready, dumping, avg_overflow, ddc_overflow;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spectro_channel #(.N(N), .FIFO_DEPTH(2*N)) dut (.*);

  real spec [$];
  always @(posedge clk) if (fifo_wen) spec.push_back(real'(fifo_wdata));
  always @(negedge clk) fifo_full = ($urandom_range(0, 9) < 2);

  // stimulus generators
  int  n_adc = 0, n_ddc = 0;
  bit  ddc_on = 0;
  always @(negedge clk) begin
    adc = 14'($rtoi($floor(6000.0 * $cos(2.0 * 3.14159265358979 * (0.25 + 5.0 / (2.0 * N)) * n_adc) + 0.5)));
    n_adc++;
    ddc_valid = ddc_on && ($urandom_range(0, 2) == 0);
    if (ddc_valid) begin
      ddc_data.re = 16'($rtoi($floor(10000.0 * $cos(2.0 * 3.14159265358979 * 9.0 * n_ddc / N) + 0.5)));
      ddc_data.im = 16'($rtoi($floor(10000.0 * $sin(2.0 * 3.14159265358979 * 9.0 * n_ddc / N) + 0.5)));
      n_ddc++;
    end
  end

  task automatic check_spectrum(int s, int bin, real amp, real tol);
    real pk, other, want;
    pk = spec[s*N + bin];
    other = 0.0;
    for (int k = 0; k < N; k++) if (k != bin && spec[s*N + k] > other) other = spec[s*N + k];
    want = 2.0 * (N * amp) * (N * amp);
    checks++;
    if (pk < want * (1.0 - tol) || pk > want * (1.0 + tol) || other * 1000.0 > pk) begin
      failures++;
      $display("spectrum %0d: bin %0d power %e (want %e), largest other %e", s, bin, pk, want, other);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      win_we = 1; win_addr = 6'(i); win_data = 16'h8000;
    end
    @(negedge clk);
    win_we = 0;
    // Full Band
    mode  = MODE_FULL_BAND;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (spec.size() >= 3 * N);
    stop = 1;
    @(negedge clk);
    stop = 0;
    for (int s = 1; s < 3; s++) check_spectrum(s, 5, 6000.0, 0.10);
    // Narrow Band
    repeat (400) @(negedge clk);
    spec.delete();
    ddc_on = 1;
    mode   = MODE_NARROW_BAND;
    start  = 1;
    @(negedge clk);
    start  = 0;
    n_ddc  = 0;
    wait (spec.size() >= 2 * N);
    for (int s = 0; s < 2; s++) check_spectrum(s, 9, 10000.0, 0.01);
    checks++;
    if (avg_overflow || ddc_overflow || !data_ready) begin
      failures++;
      $display("flags: avg_ovf %0d ddc_ovf %0d ready %0d", avg_overflow, ddc_overflow, data_ready);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
