// dhbf: full-band front end, real ADC stream to complex baseband.
//
// The ADC samples the 150-200 MHz IF at 100 MS/s, which folds the band to
// 0-50 MHz with its centre at fs/4 = 25 MHz. This block mixes the real
// stream with a complex fs/4 oscillator, cos(pi*n/2) - j*sin(pi*n/2), whose
// samples are only 0, +1 and -1, so the mixer is a sign change and a
// selection. I and Q then pass an 11-tap halfband low-pass filter and are
// decimated by 2, giving one complex sample every second clock (50 MS/s
// complex, the full 50 MHz band centred on 0 Hz).
//
// The mixing frequency and the decimation by 2 follow from the published
// sampling plan (100 MHz sampling, 50 MHz band centred at 25 MHz, complex
// output). The filter is this design's choice: the maximally flat 11-tap
// halfband [3 0 -25 0 150 256 150 0 -25 0 3]/512. The output is scaled by 2
// (shift by 8 instead of 9) to make up for the factor 1/2 of the real-to-
// complex mixing, so a full-scale tone gives a full-scale complex exponential.
//
// Interface: adc (14-bit two's complement) is taken on every clock where
// in_valid is high; out_valid pulses after every second input sample, one
// clock after that sample. clear restarts the oscillator phase and the
// decimation phase and empties the filter.
module dhbf
  import spectro_pkg::*;
#(
  parameter int IN_W  = ADC_W,
  parameter int OUT_W = SAMP_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] adc,
  output logic                   out_valid,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);

  localparam int TAPS = 11;
  localparam int H [TAPS] = '{3, 0, -25, 0, 150, 256, 150, 0, -25, 0, 3};
  localparam int MW   = IN_W + 1;       // mixer output, holds -(-2**(IN_W-1))
  localparam int AW   = MW + 11;        // accumulator: sum |h| = 612 < 2**10
  localparam int SHIFT = 8;

  logic [1:0] phase;                    // n mod 4 of the next input sample
  logic signed [MW-1:0] mix_i, mix_q;
  logic signed [MW-1:0] dl_i [TAPS];    // dl[0] is the newest sample
  logic signed [MW-1:0] dl_q [TAPS];

  // fs/4 complex mixer: I = x*cos(pi n/2), Q = -x*sin(pi n/2)
  always_comb begin
    logic signed [MW-1:0] x;
    x = MW'(adc);
    unique case (phase)
      2'd0: begin mix_i = x;  mix_q = '0; end
      2'd1: begin mix_i = '0; mix_q = -x; end
      2'd2: begin mix_i = -x; mix_q = '0; end
      default: begin mix_i = '0; mix_q = x; end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= '0;
      for (int k = 0; k < TAPS; k++) begin
        dl_i[k] <= '0;
        dl_q[k] <= '0;
      end
    end else if (clear) begin
      phase <= '0;
      for (int k = 0; k < TAPS; k++) begin
        dl_i[k] <= '0;
        dl_q[k] <= '0;
      end
    end else if (in_valid) begin
      phase   <= phase + 2'd1;
      dl_i[0] <= mix_i;
      dl_q[0] <= mix_q;
      for (int k = 1; k < TAPS; k++) begin
        dl_i[k] <= dl_i[k-1];
        dl_q[k] <= dl_q[k-1];
      end
    end
  end

  // FIR sums over the delay line; evaluated once per output sample
  logic signed [AW-1:0] acc_i, acc_q;
  always_comb begin
    acc_i = '0;
    acc_q = '0;
    for (int k = 0; k < TAPS; k++) begin
      acc_i += AW'(dl_i[k]) * AW'(H[k]);
      acc_q += AW'(dl_q[k]) * AW'(H[k]);
    end
  end

  function automatic logic signed [OUT_W-1:0] round_sat(input logic signed [AW-1:0] a);
    logic signed [AW-1:0] r;
    r = (a + AW'(1 <<< (SHIFT-1))) >>> SHIFT;
    if (r > AW'(2**(OUT_W-1) - 1))       return OUT_W'(2**(OUT_W-1) - 1);
    else if (r < -AW'(2**(OUT_W-1)))     return OUT_W'(-(2**(OUT_W-1)));
    else                                 return OUT_W'(r);
  endfunction

  // Decimate by 2: an output after each input sample with odd index
  logic take;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      take <= 1'b0;
    else if (clear)  take <= 1'b0;
    else             take <= in_valid && phase[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= take && !clear;
      if (take) begin
        out_re <= round_sat(acc_i);
        out_im <= round_sat(acc_q);
      end
    end
  end

endmodule
