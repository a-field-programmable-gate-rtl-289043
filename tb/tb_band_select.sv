// tb_band_select: self-checking test of the Full/Narrow Band switch.
//
// Drives a full-band stream (every second clock) and a sparse narrow-band
// stream with distinct data. Checks that before start nothing passes; that
// after a start in each mode exactly the selected stream passes, one clock
// later; that the first sample after start carries sync and no other does;
// that start pulses front_clear; that a mode change while running has no
// effect until the next start; and that stop ends the output.
module tb_band_select;
  import spectro_pkg::*;

  logic       clk = 0, rst_n = 1, start = 0, stop = 0;
  band_mode_e mode = MODE_FULL_BAND;
  logic       front_clear, running;
  band_mode_e active_mode;
  logic       full_valid = 0, narrow_valid = 0;
  cplx_t      full_data = '0, narrow_data = '0;
  logic       out_valid, out_sync;
  cplx_t      out_data;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  band_select dut (.*);

  int cyc = 0;
  // sources: full band on even cycles with tag 1, narrow band sparse with tag 2
  always @(negedge clk) begin
    cyc++;
    full_valid     = (cyc % 2 == 0);
    full_data.re   = 16'h1000 + 16'(cyc);
    full_data.im   = 16'h0100;
    narrow_valid   = ($urandom_range(0, 4) == 0);
    narrow_data.re = 16'h2000 + 16'(cyc);
    narrow_data.im = 16'h0200;
  end

  // expectation: output equals the selected input of the previous clock
  logic       exp_on = 0;
  band_mode_e exp_mode = MODE_FULL_BAND;
  logic       p_fv, p_nv, first_exp;
  cplx_t      p_fd, p_nd;
  int         syncs = 0, outs = 0, clears = 0;

  always @(posedge clk) begin
    if (out_valid || out_sync) begin
      logic  ev;
      cplx_t ed;
      ev = (exp_mode == MODE_NARROW_BAND) ? p_nv : p_fv;
      ed = (exp_mode == MODE_NARROW_BAND) ? p_nd : p_fd;
      checks++;
      if (!exp_on || !ev || out_data != ed) begin
        failures++;
        $display("unexpected output %h (exp_on=%0d)", out_data, exp_on);
      end
      if (out_sync) begin
        syncs++;
        checks++;
        if (!first_exp) begin
          failures++;
          $display("sync on a sample that is not the first");
        end
      end
      first_exp = 0;
      outs++;
    end else if (exp_on) begin
      logic ev;
      ev = (exp_mode == MODE_NARROW_BAND) ? p_nv : p_fv;
      checks++;
      if (ev) begin
        failures++;
        $display("missing output");
      end
    end
    if (front_clear) clears++;
    p_fv = full_valid; p_fd = full_data;
    p_nv = narrow_valid; p_nd = narrow_data;
  end

  task automatic run_mode(band_mode_e m);
    int s0;
    s0 = syncs;
    @(negedge clk);
    mode  = m;
    start = 1;
    @(negedge clk);
    start = 0;
    // the first clock after start discards in-flight samples
    repeat (2) @(negedge clk);
    exp_mode  = m;
    exp_on    = 1;
    first_exp = 1;
    // change the mode register: must not switch
    repeat (20) @(negedge clk);
    mode = (m == MODE_FULL_BAND) ? MODE_NARROW_BAND : MODE_FULL_BAND;
    repeat (100) @(negedge clk);
    checks++;
    if (syncs != s0 + 1 || active_mode != m || !running) begin
      failures++;
      $display("mode %0d: syncs %0d", m, syncs - s0);
    end
    stop = 1;
    @(negedge clk);
    stop   = 0;
    exp_on = 0;
    repeat (20) @(negedge clk);
  endtask

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
    repeat (20) @(negedge clk);   // not started: nothing may pass
    run_mode(MODE_FULL_BAND);
    run_mode(MODE_NARROW_BAND);
    run_mode(MODE_FULL_BAND);
    checks++;
    if (clears != 3 || outs < 100) begin
      failures++;
      $display("clears %0d outputs %0d", clears, outs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
