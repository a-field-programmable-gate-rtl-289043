// window_lut: programmable window function applied before the FFT.
//
// Each complex sample is multiplied by w[n], where n is its position in the
// FFT frame. The N coefficients sit in a look-up RAM that the PC writes
// over the slow control bus (coef_we/coef_addr/coef_data), so the window
// can be changed without reloading the FPGA; the published instrument used
// a Kaiser window. Coefficients are unsigned with 1.0 = 2**(WIN_W-1), so a
// window may reach just under 2.0; the product is rounded back to the
// sample width and saturated. The frame position restarts at 0 on in_sync
// and then counts valid samples modulo N.
//
// The programmable look-up table is the published design; the coefficient
// format, rounding and saturation are this design's choices. The RAM has no
// reset: the PC must load it before a measurement.
//
// Timing: two clocks from in_valid to out_valid (RAM read, then multiply).
// A coefficient write and a read of the same address in one clock return
// the old coefficient.
module window_lut
  import spectro_pkg::*;
#(
  parameter int N     = FFT_N,
  parameter int W     = SAMP_W,
  parameter int CW    = WIN_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  coef_we,
  input  logic [$clog2(N)-1:0]  coef_addr,
  input  logic [CW-1:0]         coef_data,
  input  logic                  in_valid,
  input  logic                  in_sync,
  input  logic signed [W-1:0]   in_re,
  input  logic signed [W-1:0]   in_im,
  output logic                  out_valid,
  output logic                  out_sync,
  output logic signed [W-1:0]   out_re,
  output logic signed [W-1:0]   out_im
);

  localparam int AW = $clog2(N);
  localparam int PW = W + CW + 1;   // signed sample x unsigned coefficient

  logic [CW-1:0] coef_ram [N];
  logic [AW-1:0] cnt, idx;

  assign idx = in_sync ? '0 : cnt;

  always_ff @(posedge clk) begin
    if (coef_we) coef_ram[coef_addr] <= coef_data;
  end

  // stage 1: read the coefficient for this sample
  logic                v1, s1;
  logic signed [W-1:0] re1, im1;
  logic [CW-1:0]       w1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      v1  <= 1'b0;
      s1  <= 1'b0;
      re1 <= '0;
      im1 <= '0;
      w1  <= '0;
    end else begin
      v1 <= in_valid;
      s1 <= in_valid && in_sync;
      if (in_valid) begin
        cnt <= idx + AW'(1);
        re1 <= in_re;
        im1 <= in_im;
        w1  <= coef_ram[idx];
      end
    end
  end

  function automatic logic signed [W-1:0] scale(input logic signed [W-1:0] x,
                                                input logic [CW-1:0] w);
    logic signed [PW-1:0] p, xs, ws;
    xs = PW'(x);
    ws = PW'({1'b0, w});
    p  = (xs * ws + PW'(1 <<< (CW-2))) >>> (CW-1);
    if (p > PW'(2**(W-1) - 1))    return W'(2**(W-1) - 1);
    else if (p < -PW'(2**(W-1)))  return W'(-(2**(W-1)));
    else                          return W'(p);
  endfunction

  // stage 2: multiply
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sync  <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= v1;
      out_sync  <= s1;
      if (v1) begin
        out_re <= scale(re1, w1);
        out_im <= scale(im1, w1);
      end
    end
  end

endmodule
