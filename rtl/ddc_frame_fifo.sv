// ddc_frame_fifo: frame buffer between the DDC chip and the FFT pipeline.
//
// The down converter delivers complex samples irregularly and at a low
// rate, while the FFT pipeline must see each transform's samples as one
// uninterrupted block. This FIFO collects DDC samples and, once it holds a
// whole frame (FRAME samples), reads that frame out back to back, one
// sample per clock. The need for this FIFO, and the frame of 1024 complex
// (2048 real) values, follow the published design; the depth of two frames,
// the one-sample-per-clock burst and the overflow flag are this design's own.
//
// Interface: in_valid/in_data are written whenever in_valid is high. A
// sample that arrives while the FIFO is full is dropped and overflow pulses
// for one clock. clear empties the FIFO and aborts a burst. out_valid/
// out_data come one clock after the read, FRAME consecutive clocks per
// frame.
module ddc_frame_fifo
  import spectro_pkg::*;
#(
  parameter int FRAME = FFT_N,
  parameter int DEPTH = 2 * FFT_N
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  out_valid,
  output cplx_t out_data,
  output logic  overflow
);

  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH + 1);
  localparam int FW = $clog2(FRAME + 1);

  cplx_t           mem [DEPTH];
  logic [AW-1:0]   wptr, rptr;
  logic [CW-1:0]   count;
  logic [FW-1:0]   burst_left;   // samples still to read in this frame
  logic            wr, rd;

  assign wr = in_valid && (count < CW'(DEPTH));
  assign rd = (burst_left != '0);

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (wr) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      burst_left <= '0;
      overflow   <= 1'b0;
      out_valid  <= 1'b0;
      out_data   <= '0;
    end else if (clear) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      burst_left <= '0;
      overflow   <= 1'b0;
      out_valid  <= 1'b0;
    end else begin
      overflow  <= in_valid && !wr;
      out_valid <= rd;
      if (wr) wptr <= inc(wptr);
      if (rd) begin
        rptr     <= inc(rptr);
        out_data <= mem[rptr];
      end
      count <= count + CW'(wr) - CW'(rd);
      // A new burst starts only when a whole frame is stored
      if (rd)                                burst_left <= burst_left - FW'(1);
      else if (count >= CW'(FRAME))          burst_left <= FW'(FRAME);
    end
  end

  // A burst never reads more than the FIFO holds
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || clear)
                                   rd |-> count != '0);

endmodule
