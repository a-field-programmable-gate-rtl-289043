// tb_fft_r2sdf: self-checking test of the 1024-point pipelined FFT.
//
// Four frames go in back to back: random full-scale noise with a sample on
// every clock, a complex tone in bin 100 with random gaps in in_valid,
// random noise with a DC offset, and a flush frame. Every output bin of the
// first three frames is compared with a double-precision DFT computed here,
// with a tolerance for the 14-bit twiddle factors and rounding. The test
// also checks that the results carry the right bin numbers, that each
// frame has exactly N results, that out_sync comes once, and that the
// first result leaves exactly N + log2(N) - 2 input beats after the sync
// sample.
module tb_fft_r2sdf;

  localparam int N  = 1024;
  localparam int LG = 10;
  localparam int OW = 27;

  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_sync = 0;
  logic signed [15:0] in_re = '0, in_im = '0;
  logic out_valid, out_first, out_sync;
  logic [LG-1:0] out_bin;
  logic signed [OW-1:0] out_re, out_im;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fft_r2sdf #(.N(N), .IN_W(16)) dut (.*);

  real xr [4][N], xi [4][N];
  real gr [4][N], gi [4][N];     // results from the FFT, by bin
  int  seen [4];
  int  frame_out = -1, beats = 0, first_result_beat = -1, syncs = 0, bad_bins = 0;

  always @(posedge clk) begin
    if (in_valid) beats++;
    if (out_valid) begin
      if (first_result_beat < 0) first_result_beat = beats;
      if (out_first) frame_out++;
      if (out_sync) syncs++;
      if (frame_out >= 0 && frame_out < 4) begin
        gr[frame_out][out_bin] = real'(out_re);
        gi[frame_out][out_bin] = real'(out_im);
        seen[frame_out]++;
      end
    end
  end

  initial begin
    repeat (10000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real er [N], ei [N];
  task automatic compare(int f, real tol_rel);
    real pk, err, maxerr;
    pk = 0.0; maxerr = 0.0;
    for (int k = 0; k < N; k++) begin
      real sr, si;
      sr = 0.0; si = 0.0;
      for (int n = 0; n < N; n++) begin
        real a;
        a  = -2.0 * 3.14159265358979323846 * real'((k * n) % N) / real'(N);
        sr += xr[f][n] * $cos(a) - xi[f][n] * $sin(a);
        si += xr[f][n] * $sin(a) + xi[f][n] * $cos(a);
      end
      er[k] = sr;
      ei[k] = si;
      if ($sqrt(sr*sr + si*si) > pk) pk = $sqrt(sr*sr + si*si);
    end
    // tolerance: twiddle quantisation spreads a fraction of the peak
    for (int k = 0; k < N; k++) begin
      real sr, si;
      sr = er[k];
      si = ei[k];
      err = $sqrt((sr - gr[f][k]) ** 2 + (si - gi[f][k]) ** 2);
      if (err > maxerr) maxerr = err;
      checks++;
      if (err > tol_rel * pk + 16.0) begin
        failures++;
        if (bad_bins++ < 5) $display("frame %0d bin %0d: got %f,%f exp %f,%f", f, k, gr[f][k], gi[f][k], sr, si);
      end
    end
    $display("frame %0d: peak %f, largest error %f", f, pk, maxerr);
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++)
      for (int n = 0; n < N; n++) begin
        case (f)
          0: begin
            xr[f][n] = real'($urandom_range(0, 65535)) - 32768.0;
            xi[f][n] = real'($urandom_range(0, 65535)) - 32768.0;
          end
          1: begin
            xr[f][n] = $floor(30000.0 * $cos(2.0 * 3.14159265358979323846 * 100.0 * n / N) + 0.5);
            xi[f][n] = $floor(30000.0 * $sin(2.0 * 3.14159265358979323846 * 100.0 * n / N) + 0.5);
          end
          2: begin
            xr[f][n] = real'($urandom_range(0, 20000)) + 5000.0;
            xi[f][n] = real'($urandom_range(0, 20000)) - 10000.0;
          end
          default: begin
            xr[f][n] = 0.0;
            xi[f][n] = 0.0;
          end
        endcase
        if (f == 1)
          while ($urandom_range(0, 2) == 0) begin
            @(negedge clk);
            in_valid = 0;
            in_sync  = 0;
          end
        @(negedge clk);
        in_valid = 1;
        in_sync  = (f == 0 && n == 0);
        in_re    = 16'($rtoi(xr[f][n]));
        in_im    = 16'($rtoi(xi[f][n]));
      end
    // a frame's last results leave only as later samples enter
    repeat (2 * LG) begin
      @(negedge clk);
      in_re = '0;
      in_im = '0;
    end
    @(negedge clk);
    in_valid = 0;
    in_sync  = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (first_result_beat != N + LG) begin  // LAT beats, +1 for the sync beat, +1 for the beat counted with the result
      failures++;
      $display("first result after %0d beats", first_result_beat - 2);
    end
    checks++;
    if (seen[0] != N || seen[1] != N || seen[2] != N || syncs != 1) begin
      failures++;
      $display("results per frame %0d %0d %0d, syncs %0d", seen[0], seen[1], seen[2], syncs);
    end
    for (int f = 0; f < 3; f++) compare(f, 1.0e-4);
    // the tone frame: all energy in bin 100
    checks++;
    if (gr[1][100] < 0.999 * 30000.0 * N || gr[1][100] > 1.001 * 30000.0 * N) begin
      failures++;
      $display("tone bin %f", gr[1][100]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
