// tb_ddc_frame_fifo: self-checking test of the DDC frame buffer.
//
// Writes numbered samples at random, sparse times (as a down converter
// delivers them) and checks that: every sample comes out, in order; output
// comes only in bursts of exactly FRAME consecutive clocks; a burst starts
// only once a whole frame is stored. A second instance, as deep as one
// frame and fed every clock, must report overflow and drop samples.
module tb_ddc_frame_fifo;
  import spectro_pkg::*;

  localparam int FRAME = 16;
  logic  clk = 0, rst_n = 1, clear = 0;
  logic  in_valid = 0;
  cplx_t in_data = '0;
  logic  out_valid, overflow;
  cplx_t out_data;
  int    checks = 0, failures = 0;

  always #5 clk = ~clk;

  ddc_frame_fifo #(.FRAME(FRAME), .DEPTH(2*FRAME)) dut (.*);

  // overflow instance
  logic  o_valid_b, ovf_b;
  cplx_t o_data_b;
  logic  in_valid_b = 0;
  ddc_frame_fifo #(.FRAME(FRAME), .DEPTH(FRAME)) dut_b (
    .clk(clk), .rst_n(rst_n), .clear(clear), .in_valid(in_valid_b), .in_data(in_data),
    .out_valid(o_valid_b), .out_data(o_data_b), .overflow(ovf_b));

  int written = 0, read_n = 0, run = 0, stored = 0, bursts = 0, ovf_seen = 0;
  logic prev_valid = 0;

  always @(posedge clk) begin
    if (out_valid) begin
      checks++;
      if (out_data.re != 16'(read_n) || out_data.im != 16'(~read_n)) begin
        failures++;
        $display("order: got %0d expected %0d", out_data.re, read_n);
      end
      if (!prev_valid) begin
        bursts++;
        checks++;
        if (stored < FRAME) begin
          failures++;
          $display("burst started with %0d stored", stored);
        end
      end
      read_n++;
      run++;
    end else if (prev_valid) begin
      checks++;
      if (run != FRAME) begin
        failures++;
        $display("burst of %0d", run);
      end
      run = 0;
    end
    prev_valid = out_valid;
    if (ovf_b) ovf_seen++;
  end

  // samples written minus samples read, as seen at the output
  always @(posedge clk) stored = written - read_n;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6 * FRAME; i++) begin
      repeat ($urandom_range(1, 6)) @(negedge clk);
      in_data.re = 16'(i);
      in_data.im = 16'(~i);
      in_valid   = 1'b1;
      @(negedge clk);
      in_valid   = 1'b0;
      written    = i + 1;
    end
    repeat (40) @(posedge clk);
    checks++;
    if (read_n != 6 * FRAME || bursts != 6) begin
      failures++;
      $display("read %0d in %0d bursts", read_n, bursts);
    end
    // overflow: one-frame FIFO fed every clock
    @(negedge clk);
    in_valid_b = 1'b1;
    repeat (5 * FRAME) @(negedge clk);
    in_valid_b = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (ovf_seen == 0) begin
      failures++;
      $display("no overflow reported");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
