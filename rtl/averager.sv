// averager: integrates power spectra and hands them to the output FIFO.
//
// Power values arrive bin by bin, N per FFT frame, with their natural bin
// number (the FFT's bit-reversed order is undone by addressing). The
// averager adds NINT consecutive spectra into a bank of N accumulators of
// ACC_W bits; the first frame of an integration overwrites instead of
// adding, and sums saturate at the largest ACC_W-bit value. There are two
// banks: when an integration is complete the banks swap, the next
// integration starts at once in the other bank, and the finished spectrum
// is written word by word, bin 0 to N-1, to the board FIFO (fifo_wen/
// fifo_wdata, held off by fifo_full). When the whole spectrum is out,
// data_ready is set; the PC clears it with clear_flags. If an integration
// ends while the previous spectrum is still being written out, the new
// spectrum is discarded and the sticky overflow flag is set.
//
// The averager, its programmable integration time (number of spectra),
// the data ready signal and the FIFO output follow the published design.
// The double bank, the overwrite-first-frame rule, saturation and the
// overflow flag are this design's choices.
//
// Timing: an accumulate takes a read clock and a write clock; consecutive
// results always address different bins, so there is no read-after-write
// hazard. in_sync (first result of the first frame after a start) begins a
// new integration. The FIFO word of the current address is presented in
// the same clock as fifo_wen (combinational read of the idle bank), so
// the dump runs at one word per clock while fifo_full is low.
module averager
  import spectro_pkg::*;
#(
  parameter int N      = FFT_N,
  parameter int PW     = POW_W,
  parameter int AW     = ACC_W,
  parameter int NW     = NINT_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NW-1:0]          nint,          // spectra per integration, 0 counts as 1
  input  logic                   clear_flags,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_sync,
  input  logic [$clog2(N)-1:0]   in_bin,
  input  logic [PW-1:0]          in_pow,
  output logic                   fifo_wen,
  output logic [AW-1:0]          fifo_wdata,
  input  logic                   fifo_full,
  output logic                   data_ready,
  output logic                   overflow,
  output logic                   dumping
);

  localparam int BW = $clog2(N);

  logic [AW-1:0]  mem [2*N];
  logic           armed;         // a start has been seen
  logic           acc_bank;      // bank being integrated into
  logic [NW-1:0]  fcnt;          // frames completed in this integration
  logic [BW-1:0]  rcnt;          // results seen in this frame
  logic [NW-1:0]  fcnt_cur;
  logic [BW-1:0]  rpos;
  logic           last_result, int_done;
  logic [NW-1:0]  nint_eff;

  assign nint_eff    = (nint == '0) ? NW'(1) : nint;
  assign fcnt_cur    = in_sync ? '0 : fcnt;
  assign rpos        = in_first ? '0 : rcnt;
  assign last_result = (rpos == BW'(N - 1));
  assign int_done    = in_valid && (armed || in_sync) && last_result &&
                       (fcnt_cur + NW'(1) >= nint_eff);

  // dump state
  logic           dump_bank;
  logic [BW-1:0]  daddr;

  // ---- accumulate pipeline: read stage ----
  logic           v1, ow1, bank1;
  logic [BW-1:0]  bin1;
  logic [PW-1:0]  pow1;
  logic [AW-1:0]  old1;

  always_ff @(posedge clk) begin
    if (in_valid) old1 <= mem[{acc_bank, in_bin}];
    if (v1) mem[{bank1, bin1}] <= ow1 ? AW'(pow1) : sat_add(old1, pow1);
  end

  function automatic logic [AW-1:0] sat_add(input logic [AW-1:0] a, input logic [PW-1:0] b);
    logic [AW:0] s;
    s = {1'b0, a} + (AW+1)'(b);
    return s[AW] ? '1 : s[AW-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed        <= 1'b0;
      acc_bank     <= 1'b0;
      fcnt         <= '0;
      rcnt         <= '0;
      v1           <= 1'b0;
      ow1          <= 1'b0;
      bank1        <= 1'b0;
      bin1         <= '0;
      pow1         <= '0;
      dumping      <= 1'b0;
      dump_bank    <= 1'b0;
      daddr        <= '0;
      data_ready   <= 1'b0;
      overflow     <= 1'b0;
    end else begin
      // accumulate
      v1 <= in_valid && (armed || in_sync);
      if (in_valid) begin
        ow1   <= (fcnt_cur == '0);
        bank1 <= acc_bank;
        bin1  <= in_bin;
        pow1  <= in_pow;
        rcnt  <= rpos + BW'(1);
        if (in_sync) armed <= 1'b1;
      end
      if (in_valid && (armed || in_sync) && last_result) begin
        if (int_done) fcnt <= '0;
        else          fcnt <= fcnt_cur + NW'(1);
      end else if (in_valid && in_sync) begin
        fcnt <= '0;
      end

      // dump, one word per clock the FIFO accepts
      if (fifo_wen) begin
        daddr <= daddr + BW'(1);
        if (daddr == BW'(N - 1)) begin
          dumping      <= 1'b0;
          data_ready   <= 1'b1;
        end
      end

      // end of an integration: swap banks or drop the spectrum
      if (int_done) begin
        if (!dumping || (fifo_wen && daddr == BW'(N - 1))) begin
          acc_bank  <= ~acc_bank;
          dump_bank <= acc_bank;
          dumping   <= 1'b1;
          daddr     <= '0;
        end else begin
          overflow  <= 1'b1;
        end
      end

      if (clear_flags) begin
        data_ready <= 1'b0;
        overflow   <= 1'b0;
      end
    end
  end

  assign fifo_wen   = dumping && !fifo_full;
  assign fifo_wdata = mem[{dump_bank, daddr}];

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n) fifo_full |-> !fifo_wen);

endmodule
