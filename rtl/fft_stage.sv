// fft_stage: one radix-2 decimation-in-frequency stage of the pipelined FFT.
//
// Single-path delay-feedback structure. With D = N / 2**(STAGE+1), the
// stage sees its input as blocks of 2D samples. During the first half of a
// block (bit log2(D) of the sample index is 0) each input sample is parked
// in a D-entry delay line, and the stage outputs what the delay line held:
// the differences of the previous block, multiplied by the twiddle factor
// W_2D^j = exp(-2*pi*i*j/(2D)), j being the position in the half block.
// During the second half the parked sample a and the input b form the
// butterfly: a + b goes out at once, a - b goes into the delay line. So the
// output lags the input by D samples, and the stage grows the word by one
// bit (IW in, IW+1 out).
//
// Twiddle factors are signed TW_W-bit numbers with 1.0 = 2**(TW_W-2),
// computed at elaboration time from $cos/$sin; products are rounded.
// The stage advances only on clocks where in_valid is high, and idx must
// give the position (mod N) of the current input sample in its frame.
// Timing: the output register is written on every in_valid clock.
module fft_stage #(
  parameter int N     = 1024,
  parameter int STAGE = 0,
  parameter int IW    = 17,
  parameter int TW_W  = 16
) (
  input  logic                   clk,
  input  logic                   in_valid,
  input  logic [$clog2(N)-1:0]   idx,
  input  logic signed [IW-1:0]   in_re,
  input  logic signed [IW-1:0]   in_im,
  output logic signed [IW:0]     out_re,
  output logic signed [IW:0]     out_im
);

  localparam int LG   = $clog2(N);
  localparam int D    = N >> (STAGE + 1);
  localparam int DA   = $clog2(D);             // 0 for the last stage
  localparam int AWD  = (DA == 0) ? 1 : DA;
  localparam int OW   = IW + 1;
  localparam int FRAC = TW_W - 2;
  localparam int MW   = OW + TW_W + 1;

  typedef logic signed [TW_W-1:0] tw_tab_t [D];

  function automatic tw_tab_t make_cos();
    tw_tab_t t;
    for (int j = 0; j < D; j++)
      t[j] = TW_W'($rtoi($floor($cos(3.14159265358979323846 * j / D) * (2.0 ** FRAC) + 0.5)));
    return t;
  endfunction

  function automatic tw_tab_t make_sin();
    tw_tab_t t;
    for (int j = 0; j < D; j++)
      t[j] = TW_W'($rtoi($floor($sin(3.14159265358979323846 * j / D) * (2.0 ** FRAC) + 0.5)));
    return t;
  endfunction

  localparam tw_tab_t TW_COS = make_cos();
  localparam tw_tab_t TW_SIN = make_sin();

  logic signed [OW-1:0] dl_re [D];
  logic signed [OW-1:0] dl_im [D];

  logic [AWD-1:0] addr;
  logic           second_half;
  assign addr        = AWD'(idx & LG'(D - 1));
  assign second_half = idx[DA];

  logic signed [OW-1:0] a_re, a_im, b_re, b_im;
  assign a_re = dl_re[addr];
  assign a_im = dl_im[addr];
  assign b_re = OW'(in_re);
  assign b_im = OW'(in_im);

  // (x + iy) * (c - is) = (xc + ys) + i(yc - xs)
  logic signed [MW-1:0] rot_re, rot_im;
  always_comb begin
    logic signed [MW-1:0] c, s;
    c = MW'(TW_COS[addr]);
    s = MW'(TW_SIN[addr]);
    rot_re = (MW'(a_re) * c + MW'(a_im) * s + MW'(1 <<< (FRAC - 1))) >>> FRAC;
    rot_im = (MW'(a_im) * c - MW'(a_re) * s + MW'(1 <<< (FRAC - 1))) >>> FRAC;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (second_half) begin
        out_re      <= a_re + b_re;
        out_im      <= a_im + b_im;
        dl_re[addr] <= a_re - b_re;
        dl_im[addr] <= a_im - b_im;
      end else begin
        out_re      <= OW'(rot_re);
        out_im      <= OW'(rot_im);
        dl_re[addr] <= b_re;
        dl_im[addr] <= b_im;
      end
    end
  end

endmodule
