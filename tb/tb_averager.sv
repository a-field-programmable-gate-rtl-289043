// tb_averager: self-checking test of the spectrum integrator.
//
// A 16-bin averager is fed power frames in bit-reversed bin order, as the
// FFT delivers them. A model of the board FIFO collects the output words,
// asserting fifo_full at random. The test checks:
//  A. four integrations of 3 spectra each: every output word equals the sum
//     computed here, bins in natural order; data_ready is set; no overflow.
//  B. with the FIFO held full, a second one-spectrum integration ends while
//     the first is still waiting to be written: it must be dropped, the
//     overflow flag set, and clear_flags must reset both flags.
//  C. 600 spectra of the largest power saturate at 2**64 - 1.
module tb_averager;
  import spectro_pkg::*;

  localparam int N  = 16;
  localparam int LG = 4;
  logic clk = 0, rst_n = 1;
  logic [23:0] nint = 24'd3;
  logic clear_flags = 0;
  logic in_valid = 0, in_first = 0, in_sync = 0;
  logic [LG-1:0] in_bin = '0;
  logic [54:0] in_pow = '0;
  logic fifo_wen, fifo_full = 0;
  logic [63:0] fifo_wdata;
  logic data_ready, overflow, dumping;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  averager #(.N(N)) dut (.*);

  logic [63:0] expq [$];      // expected output words, in order
  int words = 0;
  bit random_full = 1;

  always @(posedge clk) begin
    if (fifo_wen) begin
      logic [63:0] e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected word %h", fifo_wdata);
      end else begin
        e = expq.pop_front();
        if (fifo_wdata !== e) begin
          failures++;
          if (failures < 8) $display("word %0d: got %h exp %h", words, fifo_wdata, e);
        end
      end
      words++;
    end
  end
  always @(negedge clk) if (random_full) fifo_full = ($urandom_range(0, 9) < 3);

  function automatic logic [LG-1:0] bitrev(logic [LG-1:0] v);
    for (int i = 0; i < LG; i++) bitrev[i] = v[LG-1-i];
  endfunction

  logic [63:0] acc [N];

  // one frame of results; pows indexed by bin
  task automatic frame(logic [54:0] pows [N], bit sync, bit gaps);
    for (int m = 0; m < N; m++) begin
      if (gaps)
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          in_valid = 0; in_first = 0; in_sync = 0;
        end
      @(negedge clk);
      in_valid = 1;
      in_first = (m == 0);
      in_sync  = sync && (m == 0);
      in_bin   = bitrev(LG'(m));
      in_pow   = pows[bitrev(LG'(m))];
    end
    @(negedge clk);
    in_valid = 0; in_first = 0; in_sync = 0;
  endtask

  task automatic integration(int nf, bit sync, bit gaps, bit expect_out, bit maxpow);
    logic [54:0] p [N];
    for (int k = 0; k < N; k++) acc[k] = '0;
    for (int f = 0; f < nf; f++) begin
      for (int k = 0; k < N; k++) begin
        p[k] = maxpow ? '1 : 55'({$urandom(), $urandom()});
        if (acc[k] + 64'(p[k]) < acc[k]) acc[k] = '1;
        else acc[k] = acc[k] + 64'(p[k]);
      end
      frame(p, sync && f == 0, gaps);
    end
    if (expect_out) for (int k = 0; k < N; k++) expq.push_back(acc[k]);
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // results before any sync are ignored
    begin
      logic [54:0] p [N];
      for (int k = 0; k < N; k++) p[k] = 55'(k);
      frame(p, 0, 0);
    end
    // A
    for (int i = 0; i < 4; i++) integration(3, i == 0, 1, 1, 0);
    repeat (60) @(posedge clk);
    checks++;
    if (expq.size() != 0 || words != 4 * N || !data_ready || overflow) begin
      failures++;
      $display("A: words %0d left %0d ready %0d ovf %0d", words, expq.size(), data_ready, overflow);
    end
    @(negedge clk);
    clear_flags = 1;
    @(negedge clk);
    clear_flags = 0;
    // B
    random_full = 0;
    fifo_full   = 1;
    nint        = 24'd1;
    integration(1, 1, 0, 1, 0);
    integration(1, 0, 0, 0, 0);     // ends while the first waits: dropped
    repeat (5) @(posedge clk);
    checks++;
    if (!overflow || data_ready) begin
      failures++;
      $display("B: ovf %0d ready %0d", overflow, data_ready);
    end
    @(negedge clk);
    fifo_full = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (expq.size() != 0 || words != 5 * N || !data_ready) begin
      failures++;
      $display("B: words %0d left %0d", words, expq.size());
    end
    @(negedge clk);
    clear_flags = 1;
    @(negedge clk);
    clear_flags = 0;
    checks++;
    if (overflow || data_ready) begin
      failures++;
      $display("B: flags not cleared");
    end
    // C
    nint = 24'd600;
    integration(600, 0, 0, 1, 1);
    repeat (40) @(posedge clk);
    checks++;
    if (expq.size() != 0 || words != 6 * N || acc[0] != '1) begin
      failures++;
      $display("C: words %0d left %0d", words, expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
