// fft_sdf_stage -- one radix-2 decimation-in-frequency stage of a streaming
// single-path delay-feedback (SDF) FFT, applied to N_IN independent streams.
//
// With D = N >> (S+1), the stage splits every block of 2*D samples into halves
// a[k] and b[k] (k < D) and produces a[k]+b[k] followed by (a[k]-b[k])*W^(k*2^S),
// W = exp(-j*2*pi/N). While the first half arrives it is written into a D-deep
// feedback memory and the memory's previous contents, the differences of the
// previous block, leave through the twiddle multiplier; while the second half
// arrives the sums leave directly and the differences go into the memory.
// Outputs appear in natural order within the stage, D samples late.
// No scaling: the data word W is wide enough for the full growth of the
// transform. Twiddles are Q2.(TW_W-2) values computed when the ROM is built.
//
// Interface: valid-gated stream, in_sof on frame position 0; out_sof marks the
// first output of a frame. The stage only moves when in_valid is high, so the
// last D outputs of a frame leave as the next frame arrives.
// Helper of the channeliser; the SDF structure is this design's choice.
module fft_sdf_stage
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN = 16,
  parameter int unsigned N    = 4096,
  parameter int unsigned S    = 0,
  parameter int unsigned W    = 31,
  parameter int unsigned TW_W = 18
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic                in_sof,
  input  logic signed [W-1:0] in_re [N_IN],
  input  logic signed [W-1:0] in_im [N_IN],
  output logic                out_valid,
  output logic                out_sof,
  output logic signed [W-1:0] out_re [N_IN],
  output logic signed [W-1:0] out_im [N_IN]
);
  localparam int unsigned NW = $clog2(N);
  localparam int unsigned D  = N >> (S + 1);
  localparam int unsigned KW = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned PW = W + TW_W;

  logic signed [TW_W-1:0] tw_re [D];
  logic signed [TW_W-1:0] tw_im [D];
  logic [2*W*N_IN-1:0]    mem [D];
  logic [NW-1:0]          pos, p;
  logic [KW-1:0]          k;
  logic                   phase, primed;

  // W^(i*2^S) = cos(a) - j sin(a), a = 2 pi i 2^S / N, in Q2.(TW_W-2),
  // rounded to nearest (integer Q30 evaluation, see mexart_pkg)
  initial begin : twiddle_rom
    for (int i = 0; i < int'(D); i++) begin
      tw_re[i] = TW_W'(( cos2pi_q30(longint'(i) <<< S, longint'(N)) * (64'sd1 <<< (TW_W - 2))
                         + (Q30_ONE >>> 1)) >>> 30);
      tw_im[i] = TW_W'((-sin2pi_q30(longint'(i) <<< S, longint'(N)) * (64'sd1 <<< (TW_W - 2))
                         + (Q30_ONE >>> 1)) >>> 30);
    end
  end

  assign p     = in_sof ? '0 : pos;
  assign k     = (D > 1) ? KW'(p % NW'(D)) : '0;
  assign phase = ((p / NW'(D)) % 2) == 1;

  always_ff @(posedge clk) begin
    if (rst) begin
      pos <= '0; primed <= 1'b0; out_valid <= 1'b0; out_sof <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid) begin
        pos <= p + 1'b1;
        if (phase && p == NW'(D)) begin
          primed  <= 1'b1;
          out_sof <= 1'b1;
        end
        out_valid <= primed | (phase && p == NW'(D));
        for (int l = 0; l < N_IN; l++) begin
          logic signed [W-1:0]  a_re, a_im;
          logic signed [PW-1:0] pr, pi_;
          a_re = $signed(mem[k][(2*l)*W +: W]);
          a_im = $signed(mem[k][(2*l+1)*W +: W]);
          if (!phase) begin
            pr  = PW'(a_re) * PW'(tw_re[k]) - PW'(a_im) * PW'(tw_im[k]);
            pi_ = PW'(a_re) * PW'(tw_im[k]) + PW'(a_im) * PW'(tw_re[k]);
            pr  += PW'(1) <<< (TW_W - 3);
            pi_ += PW'(1) <<< (TW_W - 3);
            out_re[l] <= W'(pr  >>> (TW_W - 2));
            out_im[l] <= W'(pi_ >>> (TW_W - 2));
            mem[k][(2*l)*W +: W]   <= in_re[l];
            mem[k][(2*l+1)*W +: W] <= in_im[l];
          end else begin
            out_re[l] <= a_re + in_re[l];
            out_im[l] <= a_im + in_im[l];
            mem[k][(2*l)*W +: W]   <= a_re - in_re[l];
            mem[k][(2*l+1)*W +: W] <= a_im - in_im[l];
          end
        end
      end
    end
  end
endmodule
