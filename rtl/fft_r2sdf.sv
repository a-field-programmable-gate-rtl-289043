// fft_r2sdf: N-point pipelined complex FFT (radix 2, decimation in frequency).
//
// The spectrometer's central element: a streaming 1024-point FFT that
// accepts one complex sample per clock at most, so at 100 MHz it transforms
// the 50 MS/s full-band stream without gaps. It is a chain of log2(N)
// single-path delay-feedback stages (fft_stage). Each stage adds one bit,
// and one guard bit is added at the input for the growth of the twiddle
// rotation, so a 16-bit input gives 16 + 1 + 10 = 27-bit outputs, the
// output width of the published instrument. No scaling is applied.
//
// The published instrument used a purchased 1024-point radix-2 pipelined
// FFT core of that output width; its insides are not published. This is a
// functionally equivalent implementation of this design's own.
//
// Interface and timing: the pipeline advances only on clocks with in_valid
// high (the input may arrive every clock or with gaps). in_sync marks sample
// 0 of the first frame; frames follow back to back, N valid samples each.
// Results leave in bit-reversed order: out_valid pulses one clock after an
// input beat, out_bin is the natural frequency index (0 = DC, N/2..N-1 the
// negative frequencies), out_first marks the first result of each frame and
// out_sync the first result of the first frame after in_sync. The first
// result comes N + log2(N) - 2 input beats after the sync sample (1032 beats
// for N = 1024); a frame's last results therefore leave only as the next
// frame's samples enter.
module fft_r2sdf #(
  parameter int N    = 1024,
  parameter int IN_W = 16,
  parameter int TW_W = 16,
  localparam int LG    = $clog2(N),
  localparam int OUT_W = IN_W + 1 + LG
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_sync,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    out_valid,
  output logic                    out_first,
  output logic                    out_sync,
  output logic [LG-1:0]           out_bin,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im
);

  localparam int LAT = N + LG - 2;           // input beats to the first result
  localparam int TCW = $clog2(LAT + 1);

  // position of the current input sample in its frame
  logic [LG-1:0]  gcnt, idx0;
  logic [TCW-1:0] tcnt, tcur;
  logic           started, sync_seen;

  assign idx0 = in_sync ? '0 : gcnt;
  assign tcur = in_sync ? '0 : tcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcnt      <= '0;
      tcnt      <= '0;
      started   <= 1'b0;
      sync_seen <= 1'b0;
    end else if (in_valid) begin
      gcnt <= idx0 + LG'(1);
      if (in_sync) started <= 1'b1;
      if (tcur != TCW'(LAT)) tcnt <= tcur + TCW'(1);
      // out_sync goes with the first result after the latest sync
      if (in_sync)                         sync_seen <= 1'b0;
      else if (tcur == TCW'(LAT))          sync_seen <= 1'b1;
    end
  end

  // stage chain: stage s input width IN_W + 1 + s
  logic signed [IN_W+LG:0] sre [LG+1];
  logic signed [IN_W+LG:0] sim [LG+1];

  assign sre[0] = (IN_W+LG+1)'(in_re);
  assign sim[0] = (IN_W+LG+1)'(in_im);

  for (genvar s = 0; s < LG; s++) begin : g_stage
    localparam int IW    = IN_W + 1 + s;
    localparam int LAT_S = N - (N >> s) + s;   // beats from stage 0 input
    logic [LG-1:0]        idx_s;
    logic signed [IW:0]   o_re, o_im;
    assign idx_s = idx0 - LG'(LAT_S);
    fft_stage #(.N(N), .STAGE(s), .IW(IW), .TW_W(TW_W)) u_stage (
      .clk      (clk),
      .in_valid (in_valid),
      .idx      (idx_s),
      .in_re    (IW'(sre[s])),
      .in_im    (IW'(sim[s])),
      .out_re   (o_re),
      .out_im   (o_im)
    );
    assign sre[s+1] = (IN_W+LG+1)'(o_re);
    assign sim[s+1] = (IN_W+LG+1)'(o_im);
  end

  assign out_re = OUT_W'(sre[LG]);
  assign out_im = OUT_W'(sim[LG]);

  function automatic logic [LG-1:0] bitrev(input logic [LG-1:0] v);
    for (int i = 0; i < LG; i++) bitrev[i] = v[LG-1-i];
  endfunction

  logic [LG-1:0] m;
  assign m = idx0 - LG'(LAT);   // output element leaving the last stage

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_sync  <= 1'b0;
      out_bin   <= '0;
    end else begin
      out_valid <= in_valid && started && !in_sync && (tcur == TCW'(LAT));
      out_first <= in_valid && started && !in_sync && (tcur == TCW'(LAT)) && (m == '0);
      out_sync  <= in_valid && started && !in_sync && (tcur == TCW'(LAT)) && !sync_seen;
      if (in_valid) out_bin <= bitrev(m);
    end
  end

endmodule
