// tb_window_lut: self-checking test of the programmable window.
//
// Loads random coefficients (including 0, 1.0 and the largest value) into
// a 64-entry table, sends three frames of random samples (with gaps in
// in_valid) and compares each output with round(x * w / 2**15), saturated
// to 16 bits, computed here in real arithmetic. Checks the two-clock latency
// and that the frame position restarts at the sync sample (five samples
// precede it).
module tb_window_lut;
  import spectro_pkg::*;

  localparam int N = 64;
  logic clk = 0, rst_n = 1;
  logic coef_we = 0;
  logic [5:0] coef_addr = '0;
  logic [15:0] coef_data = '0;
  logic in_valid = 0, in_sync = 0;
  logic signed [15:0] in_re = '0, in_im = '0;
  logic out_valid, out_sync;
  logic signed [15:0] out_re, out_im;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  window_lut #(.N(N)) dut (.*);

  int coef [N];
  int exp_re [$], exp_im [$], exp_t [$];
  int cyc = 0, exp_syncs = 0, syncs = 0;

  always @(posedge clk) cyc++;

  function automatic int ref_scale(int x, int w);
    real r;
    int  v;
    r = $floor(real'(x) * real'(w) / 32768.0 + 0.5);
    v = $rtoi(r);
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  always @(posedge clk) begin
    if (out_valid) begin
      int er, ei, et;
      checks++;
      if (exp_re.size() == 0) begin
        failures++;
      end else begin
        er = exp_re.pop_front();
        ei = exp_im.pop_front();
        et = exp_t.pop_front();
        if (out_re != er || out_im != ei || cyc != et + 3) begin
          failures++;
          if (failures < 6) $display("got %0d,%0d at %0d exp %0d,%0d at %0d", out_re, out_im, cyc, er, ei, et + 3);
        end
      end
    end
    if (out_sync) syncs++;
  end

  initial begin
    repeat (50000) @(posedge clk);
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
      coef[i] = (i == 0) ? 0 : (i == 1) ? 32768 : (i == 2) ? 65535 : $urandom_range(0, 65535);
      @(negedge clk);
      coef_we = 1; coef_addr = 6'(i); coef_data = 16'(coef[i]);
    end
    @(negedge clk);
    coef_we = 0;
    // five samples before the first sync (positions 0..4 after reset),
    // then three frames from the sync sample on
    for (int n = 0; n < 5; n++) begin
      @(negedge clk);
      in_valid = 1;
      in_sync  = 0;
      in_re    = 16'(1000 * (n + 1));
      in_im    = 16'(-1000 * (n + 1));
      exp_re.push_back(ref_scale(1000 * (n + 1), coef[n]));
      exp_im.push_back(ref_scale(-1000 * (n + 1), coef[n]));
      exp_t.push_back(cyc);
    end
    for (int f = 0; f < 3; f++) begin
      for (int n = 0; n < N; n++) begin
        int xr, xi;
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          in_valid = 0;
          in_sync  = 0;
        end
        @(negedge clk);
        xr = (n == 2) ? -32768 : $urandom_range(0, 65535) - 32768;
        xi = (n == 2) ? 32767  : $urandom_range(0, 65535) - 32768;
        in_valid = 1;
        in_sync  = (f == 0 && n == 0);
        in_re    = 16'(xr);
        in_im    = 16'(xi);
        exp_re.push_back(ref_scale(xr, coef[n]));
        exp_im.push_back(ref_scale(xi, coef[n]));
        exp_t.push_back(cyc);
      end
    end
    @(negedge clk);
    in_valid = 0;
    in_sync  = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_re.size() != 0 || syncs != 1) begin
      failures++;
      $display("left %0d, syncs %0d", exp_re.size(), syncs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
