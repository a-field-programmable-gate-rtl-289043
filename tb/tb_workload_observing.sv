// tb_workload_observing: the two observing procedures of the instrument,
// run on the full-size design with short integrations.
//
// A Kaiser window (beta = 6) is loaded over the register bus, as the
// published observations used a Kaiser window.
//
//  1. Frequency switching in Full Band, as used for the HI line: channel 0
//     sees Gaussian receiver noise (sigma = 200 LSB) plus a line at bin 300.
//     An ON spectrum is integrated; then the receiver is retuned by 6 MHz
//     (the line moves by 6 MHz / 48.828 kHz = 122.88 bins, to 177.12) and
//     an OFF spectrum is integrated. ON - OFF must show the line positive
//     at bin 300 and negative at bin 177, while the noise baseline cancels
//     (RMS away from the lines below 2 % of the line).
//  2. Dynamic range in Narrow Band, as used for the OH maser: the DDC
//     delivers two lines whose intensities differ by a factor of 10
//     (amplitudes 20000 and 6325, near full scale) plus noise. Both must
//     appear at their bins, with a power ratio of 10 within 5 %, without
//     any change of gain.
//  3. Sensitivity: channel 1 sees noise only. Its two Full Band spectra,
//     taken with the ON and OFF measurements, are independent. For
//     Gaussian noise each bin of an NINT-spectrum integration is Gamma
//     distributed with shape NINT, so D = (S_on - S_off)/(S_on + S_off) has
//     variance 1/(2 NINT + 1) if the spectrometer adds no noise of its own
//     (radiometer constant C = 1). The measured C = sqrt(var(D) * (2 NINT +
//     1)) must lie within 0.9 .. 1.1.
module tb_workload_observing;
  import spectro_pkg::*;

  localparam int N = FFT_N;
  localparam real PI = 3.14159265358979323846;
  localparam int NINT = 8;

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

  // approximately Gaussian noise: sum of 12 uniforms
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom_range(0, 65535)) / 65536.0;
    return s - 6.0;
  endfunction

  real line_bin = 300.0;
  bit  ddc_on = 0;
  int  n_adc = 0, n_ddc = 0;
  always @(negedge clk) begin
    real x;
    x = 200.0 * gauss() + 120.0 * $cos(2.0 * PI * (0.25 + line_bin / (2.0 * N)) * n_adc);
    adc[0] = ADC_W'($rtoi($floor(x + 0.5)));
    adc[1] = ADC_W'($rtoi($floor(200.0 * gauss() + 0.5)));
    n_adc++;
    ddc_valid = {1'b0, ddc_on && ($urandom_range(0, 3) == 0)};
    if (ddc_valid[0]) begin
      real re, im;
      re = 20000.0 * $cos(2.0 * PI * 100.0 * n_ddc / N) + 6325.0 * $cos(2.0 * PI * 900.0 * n_ddc / N) + 150.0 * gauss();
      im = 20000.0 * $sin(2.0 * PI * 100.0 * n_ddc / N) + 6325.0 * $sin(2.0 * PI * 900.0 * n_ddc / N) + 150.0 * gauss();
      ddc_data[0].re = SAMP_W'($rtoi($floor(re + 0.5)));
      ddc_data[0].im = SAMP_W'($rtoi($floor(im + 0.5)));
      n_ddc++;
    end
  end
  assign ddc_data[1] = '0;

  real spec [$], spec1 [$];
  always @(posedge clk) begin
    if (fifo_wen[0]) spec.push_back(real'(fifo_wdata[0]));
    if (fifo_wen[1]) spec1.push_back(real'(fifo_wdata[1]));
  end

  task automatic wr(logic [3:0] a, logic [7:0] d);
    @(negedge clk);
    bus_addr = a; bus_wdata = d; bus_we = 1;
    @(negedge clk);
    bus_we = 0;
  endtask

  // modified Bessel function of the first kind, order 0
  function automatic real bessel_i0(real x);
    real term, sum;
    term = 1.0; sum = 1.0;
    for (int k = 1; k < 40; k++) begin
      term = term * (x / (2.0 * k)) * (x / (2.0 * k));
      sum += term;
    end
    return sum;
  endfunction

  // integrate one spectrum: start, take the second integrated spectrum
  // (the first holds the start-up of the front end), stop
  task automatic measure(output real s [N], output real s1 [N]);
    spec.delete();
    spec1.delete();
    wr(REG_CMD, 8'h01);
    wait (spec.size() >= 2 * N && (ddc_on || spec1.size() >= 2 * N));
    wr(REG_CMD, 8'h02);
    for (int k = 0; k < N; k++) begin
      s[k]  = spec[N + k];
      s1[k] = ddc_on ? 0.0 : spec1[N + k];
    end
    repeat (5000) @(negedge clk);
  endtask

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real on_s [N], off_s [N], nb [N], on1 [N], off1 [N], nb1 [N];

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Kaiser window, beta = 6, 1.0 = 32768
    wr(REG_WADDR0, 8'h00);
    wr(REG_WADDR1, 8'h00);
    for (int n = 0; n < N; n++) begin
      real r;
      int  w;
      r = 2.0 * n / (N - 1) - 1.0;
      w = $rtoi($floor(32768.0 * bessel_i0(6.0 * $sqrt(1.0 - r * r)) / bessel_i0(6.0) + 0.5));
      wr(REG_WDATA0, 8'(w));
      wr(REG_WDATA1, 8'(w >> 8));
    end
    wr(REG_NINT0, 8'(NINT));

    // 1. frequency switching, Full Band
    wr(REG_MODE, 8'h00);
    line_bin = 300.0;
    measure(on_s, on1);
    line_bin = 300.0 - 6.0e6 / (50.0e6 / N);
    measure(off_s, off1);
    begin
      real d [N];
      real pk, lo, rms;
      int  pk_bin, lo_bin, cnt;
      pk = -1.0e30; lo = 1.0e30; rms = 0.0; cnt = 0;
      for (int k = 0; k < N; k++) begin
        d[k] = on_s[k] - off_s[k];
        if (d[k] > pk) begin pk = d[k]; pk_bin = k; end
        if (d[k] < lo) begin lo = d[k]; lo_bin = k; end
      end
      for (int k = 0; k < N; k++)
        if ((k < 290 || k > 310) && (k < 167 || k > 187)) begin
          rms += d[k] * d[k];
          cnt++;
        end
      rms = $sqrt(rms / cnt);
      $display("ON-OFF: peak %e at bin %0d, dip %e at bin %0d, baseline rms %e", pk, pk_bin, lo, lo_bin, rms);
      checks++;
      if (pk_bin != 300 || (lo_bin != 177 && lo_bin != 178) || lo > -0.3 * pk || rms > 0.02 * pk) begin
        failures++;
        $display("frequency-switched spectrum wrong");
      end
    end

    // 3. radiometer constant from the noise-only channel
    begin
      real sum2, c;
      sum2 = 0.0;
      for (int k = 0; k < N; k++) sum2 += ((on1[k] - off1[k]) / (on1[k] + off1[k])) ** 2;
      c = $sqrt(sum2 / N * (2.0 * NINT + 1.0));
      $display("noise channel: radiometer constant C = %f", c);
      checks++;
      if (c < 0.9 || c > 1.1) begin
        failures++;
        $display("noise does not integrate down as 1/sqrt(NINT)");
      end
    end

    // 2. two lines a factor 10 apart in intensity, Narrow Band
    ddc_on = 1;
    wr(REG_MODE, 8'h01);
    measure(nb, nb1);
    begin
      real ratio, other;
      other = 0.0;
      for (int k = 0; k < N; k++)
        if ((k < 95 || k > 105) && (k < 895 || k > 905) && nb[k] > other) other = nb[k];
      ratio = nb[100] / nb[900];
      $display("narrow band: lines %e and %e, ratio %f, largest other bin %e", nb[100], nb[900], ratio, other);
      checks++;
      if (ratio < 9.5 || ratio > 10.5 || other * 100.0 > nb[900]) begin
        failures++;
        $display("dynamic range test failed");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
