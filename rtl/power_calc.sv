// power_calc: power of each FFT bin, re^2 + im^2.
//
// Takes the signed real and imaginary FFT outputs and forms the exact,
// unsigned sum of squares (2*W + 1 bits, 55 bits for 27-bit inputs), with
// the bin number and frame markers carried alongside. That this block
// computes the power spectrum follows the published design; keeping the
// full precision is this design's choice.
//
// Timing: one clock from in_valid to out_valid.
module power_calc
  import spectro_pkg::*;
#(
  parameter int W  = FFT_OW,
  parameter int BW = $clog2(FFT_N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_first,
  input  logic                  in_sync,
  input  logic [BW-1:0]         in_bin,
  input  logic signed [W-1:0]   in_re,
  input  logic signed [W-1:0]   in_im,
  output logic                  out_valid,
  output logic                  out_first,
  output logic                  out_sync,
  output logic [BW-1:0]         out_bin,
  output logic [2*W:0]          out_pow
);

  logic signed [2*W-1:0] sq_re, sq_im;
  assign sq_re = (2*W)'(in_re) * (2*W)'(in_re);
  assign sq_im = (2*W)'(in_im) * (2*W)'(in_im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_sync  <= 1'b0;
      out_bin   <= '0;
      out_pow   <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_valid && in_first;
      out_sync  <= in_valid && in_sync;
      if (in_valid) begin
        out_bin <= in_bin;
        // both squares are non-negative, so the sum is unsigned
        out_pow <= {1'b0, $unsigned(sq_re)} + {1'b0, $unsigned(sq_im)};
      end
    end
  end

endmodule
