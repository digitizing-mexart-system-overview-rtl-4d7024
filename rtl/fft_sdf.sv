// fft_sdf -- streaming N-point complex FFT for N_IN parallel streams.
//
// log2(N) radix-2 single-path delay-feedback stages (fft_sdf_stage) in a row.
// Samples enter in natural order, one per input per valid cycle, and bins
// leave in bit-reversed order: the j-th output of a frame is bin
// bitrev(j). The word grows from IW to W = IW + log2(N) + 1 bits at the input so
// that no stage needs scaling; the result is the unnormalised DFT
//   X[k] = sum_n x[n] exp(-j 2 pi n k / N).
//
// Interface: valid-gated stream with in_sof on the first sample of a frame;
// out_sof on the first output of a frame. Latency: N-1 valid samples plus one
// cycle per stage. Since the pipeline only advances on valid input, a frame's
// last outputs leave while the next frame enters.
// The paper gives the channel count (2048 from 4096-sample frames); the SDF
// architecture and word widths are this design's choice.
module fft_sdf #(
  parameter int unsigned N_IN = 16,
  parameter int unsigned N    = 4096,
  parameter int unsigned IW   = 18,
  parameter int unsigned TW_W = 18,
  parameter int unsigned W    = IW + $clog2(N) + 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic signed [IW-1:0] in_re [N_IN],
  input  logic signed [IW-1:0] in_im [N_IN],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic signed [W-1:0]  out_re [N_IN],
  output logic signed [W-1:0]  out_im [N_IN]
);
  localparam int unsigned L = $clog2(N);

  logic                v   [L+1];
  logic                sof [L+1];
  logic signed [W-1:0] re  [L+1][N_IN];
  logic signed [W-1:0] im  [L+1][N_IN];

  assign v[0]   = in_valid;
  assign sof[0] = in_sof;
  always_comb
    for (int l = 0; l < N_IN; l++) begin
      re[0][l] = W'(in_re[l]);
      im[0][l] = W'(in_im[l]);
    end

  for (genvar s = 0; s < L; s++) begin : g_stage
    fft_sdf_stage #(.N_IN(N_IN), .N(N), .S(s), .W(W), .TW_W(TW_W)) u_stage (
      .clk, .rst,
      .in_valid(v[s]), .in_sof(sof[s]), .in_re(re[s]), .in_im(im[s]),
      .out_valid(v[s+1]), .out_sof(sof[s+1]), .out_re(re[s+1]), .out_im(im[s+1])
    );
  end

  assign out_valid = v[L];
  assign out_sof   = sof[L];
  assign out_re    = re[L];
  assign out_im    = im[L];
endmodule
