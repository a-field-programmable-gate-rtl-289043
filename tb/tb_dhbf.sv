// tb_dhbf: self-checking test of the full-band front end.
//
// Part 1 drives random 14-bit samples and compares every output with a
// reference computed here: mixing by cos/sin of pi*n/2 (evaluated with
// real arithmetic), the 11-tap halfband sum, rounding by 2**8 and
// decimation after each odd-numbered input. It also checks the output rate
// (one complex sample per two inputs). Part 2 feeds a tone 25 MHz + 1.5625
// MHz above the band centre and checks that the output is a complex
// exponential rotating forward (positive frequency) with the input
// amplitude.
module tb_dhbf;
  import spectro_pkg::*;

  logic clk = 0, rst_n = 1, clear = 0, in_valid = 0;
  logic signed [13:0] adc = '0;
  logic out_valid;
  logic signed [15:0] out_re, out_im;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dhbf dut (.*);

  localparam int H [11] = '{3, 0, -25, 0, 150, 256, 150, 0, -25, 0, 3};
  int xs [$];
  int mi [$], mq [$];
  int exp_re [$], exp_im [$];
  int n_out = 0;

  function automatic int rnd_shift(longint a);
    return int'((a + 128) >>> 8);
  endfunction

  task automatic push(int x);
    int n, ci, si;
    longint ai, aq;
    n = xs.size();
    xs.push_back(x);
    ci = $rtoi($floor($cos(3.14159265358979 * n / 2.0) + 0.5));
    si = $rtoi($floor($sin(3.14159265358979 * n / 2.0) + 0.5));
    mi.push_back(x * ci);
    mq.push_back(-x * si);
    if (n % 2 == 1) begin
      ai = 0; aq = 0;
      for (int k = 0; k < 11; k++)
        if (n - k >= 0) begin
          ai += longint'(H[k]) * mi[n-k];
          aq += longint'(H[k]) * mq[n-k];
        end
      exp_re.push_back(rnd_shift(ai));
      exp_im.push_back(rnd_shift(aq));
    end
    @(negedge clk);
    adc      = 14'(x);
    in_valid = 1'b1;
  endtask

  // compare outputs as they appear
  always @(posedge clk) begin
    if (out_valid) begin
      if (exp_re.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        int er, ei;
        er = exp_re.pop_front();
        ei = exp_im.pop_front();
        checks++;
        if (out_re != er || out_im != ei) begin
          failures++;
          if (failures < 10) $display("mismatch out %0d: got %0d,%0d exp %0d,%0d", n_out, out_re, out_im, er, ei);
        end
      end
      n_out++;
    end
  end

  real tone_re [$], tone_im [$];
  always @(posedge clk) if (out_valid && xs.size() > 400) begin
    tone_re.push_back(real'(out_re));
    tone_im.push_back(real'(out_im));
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // random samples, including both extremes
    push(-8192);
    push(8191);
    for (int i = 2; i < 400; i++) push($urandom_range(0, 16383) - 8192);
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (n_out != 200 || exp_re.size() != 0) begin
      failures++;
      $display("rate: %0d outputs for 400 inputs", n_out);
    end
    // tone at fs/4 + fs/64: expect exp(+j*2*pi*n_out/32) at the 50 MS/s output
    for (int i = 400; i < 800; i++)
      push($rtoi($floor(6000.0 * $cos(2.0 * 3.14159265358979 * (0.25 + 1.0/64.0) * i) + 0.5)));
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    begin
      int bad = 0;
      for (int m = 20; m + 1 < tone_re.size(); m++) begin
        real mag, turn;
        mag   = $sqrt(tone_re[m]*tone_re[m] + tone_im[m]*tone_im[m]);
        // sign of the rotation from one output to the next
        turn = tone_re[m]*tone_im[m+1] - tone_im[m]*tone_re[m+1];
        if (mag < 5700.0 || mag > 6300.0 || turn <= 0.0) bad++;
      end
      checks++;
      if (bad != 0) begin
        failures++;
        $display("tone test: %0d bad outputs", bad);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
