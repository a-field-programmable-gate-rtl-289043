// tb_power_calc: self-checking test of the power calculation.
//
// Sends random 27-bit real and imaginary values, including the most
// negative ones, and compares each output with re^2 + im^2 computed here
// in 64-bit arithmetic; bin number and frame markers must follow with the
// same one-clock latency.
module tb_power_calc;
  import spectro_pkg::*;

  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_first = 0, in_sync = 0;
  logic [9:0] in_bin = '0;
  logic signed [26:0] in_re = '0, in_im = '0;
  logic out_valid, out_first, out_sync;
  logic [9:0] out_bin;
  logic [54:0] out_pow;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  power_calc dut (.*);

  longint unsigned exp_pow [$];
  int exp_bin [$];
  logic exp_fs [$];

  always @(posedge clk) begin
    if (out_valid) begin
      longint unsigned ep;
      int eb;
      logic efs;
      checks++;
      ep  = exp_pow.pop_front();
      eb  = exp_bin.pop_front();
      efs = exp_fs.pop_front();
      if (64'(out_pow) != ep || out_bin != 10'(eb) || out_first != efs || out_sync != efs) begin
        failures++;
        if (failures < 10) $display("got %0d bin %0d exp %0d bin %0d", out_pow, out_bin, ep, eb);
      end
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      longint r, m;
      @(negedge clk);
      if (i == 0)      begin r = -(64'sd1 <<< 26); m = -(64'sd1 <<< 26); end
      else if (i == 1) begin r = (64'sd1 <<< 26) - 1; m = 0; end
      else begin
        r = longint'($urandom_range(0, 32'h07FF_FFFF)) - (64'sd1 <<< 26);
        m = longint'($urandom_range(0, 32'h07FF_FFFF)) - (64'sd1 <<< 26);
      end
      in_valid = ($urandom_range(0, 3) != 0);
      in_first = (i % 7 == 0);
      in_sync  = in_first;
      in_bin   = 10'(i);
      in_re    = 27'(r);
      in_im    = 27'(m);
      if (in_valid) begin
        exp_pow.push_back(64'(r * r + m * m));
        exp_bin.push_back(i);
        exp_fs.push_back(in_first);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_pow.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_pow.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
