// tb_fpga_spectrometer: the whole two-channel spectrometer at full size.
//
// Everything is controlled as the PC would do it, through the 8-bit
// register bus: a Hann window is loaded coefficient by coefficient, the
// integration time set to 4 spectra, the mode chosen and the measurement
// started; data ready is polled in STATUS and the spectra are taken from
// models of the two board FIFOs.
//
//  1. Full Band: channel 0 gets an ADC tone at +100 bins from the band
//     centre, channel 1 one at -200 bins (bin 824). Each integrated
//     spectrum must peak there with 4 * (N*A/2)**2 (Hann window, 10 %
//     tolerance) and be 40 dB down beyond the neighbouring bins. FIFO 0
//     is full at random, so its writes stall.
//  2. Still in Full Band, FIFO 1 is held full for longer than an
//     integration: channel 1 must drop a spectrum and report it in
//     ERRORS; CMD bit 2 clears the flag.
//  3. Stop, switch to Narrow Band, start again: DDC tones at bins 37 and
//     600, one sample in three clocks, must come through the frame FIFOs
//     and appear in their bins with 4 * (N*A/2)**2 within 2 %.
// Each mechanism (both modes, the mode switch, DDC frame bursts, FIFO
// stalls, a dropped spectrum, data ready) is counted and must occur.
module tb_fpga_spectrometer;
  import spectro_pkg::*;

  localparam int N = FFT_N;
  localparam real PI = 3.14159265358979323846;

  logic        clk = 0, rst_n = 1;
  logic [3:0]  bus_addr = '0;
  logic [7:0]  bus_wdata = '0;
  logic        bus_we = 0, bus_re = 0;
  logic [7:0]  bus_rdata;
  logic signed [ADC_W-1:0] adc [2];
  logic [1:0]  ddc_valid = '0;
  cplx_t       ddc_data [2];
  logic [1:0]  fifo_wen;
  logic [ACC_W-1:0] fifo_wdata [2];
  logic [1:0]  fifo_full = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fpga_spectrometer dut (.*);

  // ---------------- stimulus ----------------
  real adc_bin [2] = '{100.0, -200.0};
  real ddc_bin [2] = '{37.0, 600.0};
  real adc_amp = 6000.0, ddc_amp = 12000.0;
  int  n_adc = 0;
  int  n_ddc [2] = '{0, 0};
  bit  ddc_on = 0, ff0_random = 1, ff1_hold = 0;

  always @(negedge clk) begin
    for (int c = 0; c < 2; c++) begin
      adc[c] = ADC_W'($rtoi($floor(adc_amp *
               $cos(2.0 * PI * (0.25 + adc_bin[c] / (2.0 * N)) * n_adc) + 0.5)));
      ddc_valid[c] = ddc_on && ($urandom_range(0, 2) == 0);
      if (ddc_valid[c]) begin
        ddc_data[c].re = SAMP_W'($rtoi($floor(ddc_amp * $cos(2.0 * PI * ddc_bin[c] * n_ddc[c] / N) + 0.5)));
        ddc_data[c].im = SAMP_W'($rtoi($floor(ddc_amp * $sin(2.0 * PI * ddc_bin[c] * n_ddc[c] / N) + 0.5)));
        n_ddc[c]++;
      end
    end
    n_adc++;
    fifo_full[0] = ff0_random && ($urandom_range(0, 9) < 3);
    fifo_full[1] = ff1_hold;
  end

  // ---------------- board FIFO models ----------------
  real spec [2][$];
  int  stalls = 0;
  always @(posedge clk) begin
    for (int c = 0; c < 2; c++)
      if (fifo_wen[c]) spec[c].push_back(real'(fifo_wdata[c]));
    if (fifo_full[0] && dut.dumping[0]) stalls++;
  end

  // DDC frame bursts seen at the frame FIFO outputs
  int bursts = 0;
  logic prev_burst = 0;
  always @(posedge clk) begin
    if (dut.g_ch[0].u_ch.narrow_valid && !prev_burst) bursts++;
    prev_burst = dut.g_ch[0].u_ch.narrow_valid;
  end

  // ---------------- bus access ----------------
  task automatic wr(logic [3:0] a, logic [7:0] d);
    @(negedge clk);
    bus_addr = a; bus_wdata = d; bus_we = 1;
    @(negedge clk);
    bus_we = 0;
  endtask

  task automatic rd(logic [3:0] a, output logic [7:0] d);
    @(negedge clk);
    bus_addr = a; bus_re = 1;
    @(negedge clk);
    bus_re = 0;
    d = bus_rdata;
  endtask

  int ready_polls = 0;
  task automatic wait_ready(logic [1:0] mask);
    logic [7:0] d;
    do begin
      repeat (50) @(negedge clk);
      rd(REG_STATUS, d);
    end while ((d[1:0] & mask) != mask);
    ready_polls++;
    wr(REG_CMD, 8'h04);   // clear data ready
  endtask

  task automatic check_spectrum(int c, int s, int bin, real amp, real tol);
    real pk, other, want;
    int  base;
    base  = s * N;
    pk    = spec[c][base + bin];
    other = 0.0;
    for (int k = 0; k < N; k++) begin
      int d;
      d = (k - bin + N) % N;
      if (d > 1 && d < N - 1 && spec[c][base + k] > other) other = spec[c][base + k];
    end
    want = 4.0 * (N * amp / 2.0) * (N * amp / 2.0);
    checks++;
    if (pk < want * (1.0 - tol) || pk > want * (1.0 + tol) || other * 1.0e4 > pk) begin
      failures++;
      $display("ch%0d spectrum %0d: bin %0d power %e (want %e), largest far bin %e",
               c, s, bin, pk, want, other);
    end
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int full_runs = 0, narrow_runs = 0, mode_switches = 0, drops = 0;

  initial begin
    logic [7:0] d;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Hann window, w[n] = 0.5 - 0.5 cos(2 pi n / N), 1.0 = 32768
    wr(REG_WADDR0, 8'h00);
    wr(REG_WADDR1, 8'h00);
    for (int n = 0; n < N; n++) begin
      int w;
      w = $rtoi($floor(32768.0 * (0.5 - 0.5 * $cos(2.0 * PI * n / N)) + 0.5));
      wr(REG_WDATA0, 8'(w));
      wr(REG_WDATA1, 8'(w >> 8));
    end
    wr(REG_NINT0, 8'd4);
    wr(REG_NINT1, 8'd0);
    wr(REG_NINT2, 8'd0);

    // 1. Full Band
    wr(REG_MODE, 8'h00);
    wr(REG_CMD, 8'h01);
    full_runs++;
    wait_ready(2'b11);
    wait_ready(2'b11);
    wait (spec[0].size() >= 2 * N && spec[1].size() >= 2 * N);
    for (int s = 0; s < 2; s++) begin
      check_spectrum(0, s, 100, adc_amp, 0.10);
      check_spectrum(1, s, N - 200, adc_amp, 0.10);
    end

    // 2. hold FIFO 1 full over more than one integration
    ff1_hold = 1;
    repeat (4 * 2 * N * 2 + 3000) @(negedge clk);
    rd(REG_ERRORS, d);
    checks++;
    if (d[1] != 1'b1 || d[0] != 1'b0) begin
      failures++;
      $display("ERRORS after holding FIFO 1 full: %b", d);
    end else drops++;
    ff1_hold = 0;
    wr(REG_CMD, 8'h02);   // stop
    repeat (3 * N) @(negedge clk);
    wr(REG_CMD, 8'h04);   // clear flags
    rd(REG_ERRORS, d);
    checks++;
    if (d != 8'h00) begin
      failures++;
      $display("ERRORS not cleared: %b", d);
    end

    // 3. Narrow Band
    repeat (3 * N) @(negedge clk);
    spec[0].delete();
    spec[1].delete();
    ddc_on = 1;
    wr(REG_MODE, 8'h01);
    mode_switches++;
    rd(REG_MODE, d);
    wr(REG_CMD, 8'h05);   // start, clear flags
    narrow_runs++;
    wait_ready(2'b11);
    wait_ready(2'b11);
    wait (spec[0].size() >= 2 * N && spec[1].size() >= 2 * N);
    for (int s = 0; s < 2; s++) begin
      check_spectrum(0, s, 37, ddc_amp, 0.02);
      check_spectrum(1, s, 600, ddc_amp, 0.02);
    end
    rd(REG_ERRORS, d);
    checks++;
    if (d != 8'h00) begin
      failures++;
      $display("errors in narrow band: %b", d);
    end

    $display("mechanisms: full band runs %0d, narrow band runs %0d, mode switches %0d, DDC frame bursts %0d, FIFO stall clocks %0d, dropped-spectrum reports %0d, data ready %0d",
             full_runs, narrow_runs, mode_switches, bursts, stalls, drops, ready_polls);
    checks++;
    if (full_runs == 0 || narrow_runs == 0 || mode_switches == 0 || bursts == 0 ||
        stalls == 0 || drops == 0 || ready_polls == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
