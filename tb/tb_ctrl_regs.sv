// tb_ctrl_regs: self-checking test of the control register file.
//
// Uses bus write and read tasks to check: command bits become one-clock
// pulses; MODE and NINT are stored and read back; window coefficients are
// assembled from two bytes and written at an auto-incrementing pointer;
// STATUS and ERRORS report the datapath inputs, with the DDC overflow flag
// sticky until cleared.
module tb_ctrl_regs;
  import spectro_pkg::*;

  logic        clk = 0, rst_n = 1;
  logic [3:0]  bus_addr = '0;
  logic [7:0]  bus_wdata = '0;
  logic        bus_we = 0, bus_re = 0;
  logic [7:0]  bus_rdata;
  logic        start, stop, clear_flags;
  band_mode_e  mode;
  logic [23:0] nint;
  logic        win_we;
  logic [9:0]  win_addr;
  logic [15:0] win_data;
  logic        running = 0;
  logic [1:0]  data_ready = 0, dumping = 0, avg_overflow = 0, ddc_overflow = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  ctrl_regs dut (.*);

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

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

  int starts = 0, stops = 0, clears = 0, wins = 0;
  logic [15:0] win_img [1024];
  always @(posedge clk) begin
    if (start) starts++;
    if (stop) stops++;
    if (clear_flags) clears++;
    if (win_we) begin
      wins++;
      win_img[win_addr] = win_data;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] d;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(nint == 24'd1 && mode == MODE_FULL_BAND, "reset values");
    wr(REG_CMD, 8'h01);
    @(negedge clk);
    check(starts == 1 && stops == 0 && clears == 0, "start pulse");
    wr(REG_CMD, 8'h06);
    @(negedge clk);
    check(starts == 1 && stops == 1 && clears == 1, "stop and clear pulses");
    wr(REG_MODE, 8'h01);
    check(mode == MODE_NARROW_BAND, "mode narrow");
    rd(REG_MODE, d);
    check(d == 8'h01, "mode read");
    wr(REG_NINT0, 8'h34); wr(REG_NINT1, 8'h12); wr(REG_NINT2, 8'hAB);
    check(nint == 24'hAB1234, "nint value");
    rd(REG_NINT2, d);
    check(d == 8'hAB, "nint read");
    // window: pointer 1000, three coefficients
    wr(REG_WADDR0, 8'hE8); wr(REG_WADDR1, 8'h03);
    for (int i = 0; i < 3; i++) begin
      wr(REG_WDATA0, 8'(16'h1234 * (i + 1)));
      wr(REG_WDATA1, 8'((16'h1234 * (i + 1)) >> 8));
    end
    @(negedge clk);
    check(wins == 3, "three window writes");
    for (int i = 0; i < 3; i++)
      check(win_img[1000 + i] == 16'(16'h1234 * (i + 1)), "window coefficient");
    rd(REG_WADDR0, d);
    check(d == 8'hEB, "pointer incremented");
    // status and errors
    running = 1; data_ready = 2'b10; dumping = 2'b01; avg_overflow = 2'b10;
    rd(REG_STATUS, d);
    check(d == 8'b0000_1110, "status");
    @(negedge clk);
    ddc_overflow = 2'b01;
    @(negedge clk);
    ddc_overflow = 2'b00;
    rd(REG_ERRORS, d);
    check(d == 8'b0000_0110, "errors, sticky ddc overflow");
    wr(REG_CMD, 8'h04);
    @(negedge clk);
    avg_overflow = 2'b00;
    rd(REG_ERRORS, d);
    check(d == 8'h00, "errors cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
