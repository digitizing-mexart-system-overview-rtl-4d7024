// pfb_fir -- polyphase FIR front end of the channeliser.
//
// A polyphase filter bank weights every sample of the current frame together
// with the samples at the same position in the TAPS-1 previous frames, so
// that the FFT that follows sees a windowed, overlapped block and its channels
// have flat tops and steep sides. For frame position n the output is
//   y[n] = sum_{t=0}^{TAPS-1} h[(TAPS-1-t)*N + n] * x_t[n]
// where x_t is the frame t frames back (t = 0 is the current one) and h is a
// Hamming-windowed sinc of TAPS*N points with one zero crossing per N samples:
//   h[i] = sinc((i - TAPS*N/2 + 0.5)/N) * (0.54 - 0.46 cos(2 pi i/(TAPS*N-1)))
// quantised to COEF_W signed bits with a peak of 2**(COEF_W-1)-1. The result is
// shifted down by COEF_W-1 (rounded) so that a branch gain of about one keeps
// the sample scale. All inputs share one coefficient ROM and one position
// counter; each keeps its own TAPS-1 frames of history.
//
// Interface: the framed sample stream of the timing unit (in_sof marks frame
// position 0). Timing: one output per input sample, one cycle of latency.
// The paper names a polyphase filter bank of 2048 channels over 4096-sample
// frames; the number of taps, the window and all widths are this design's
// choice.
module pfb_fir
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN   = NUM_INPUTS,
  parameter int unsigned N      = FRAME_LEN,
  parameter int unsigned TAPS   = 4,
  parameter int unsigned SW     = SAMPLE_W,
  parameter int unsigned COEF_W = 18,
  parameter int unsigned OW     = SW + 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic signed [SW-1:0] in_data [N_IN],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic signed [OW-1:0] out_data [N_IN]
);
  localparam int unsigned NW = $clog2(N);
  localparam int unsigned AW = SW + COEF_W + $clog2(TAPS) + 1;

  logic signed [COEF_W-1:0] coef [TAPS][N];
  logic [N_IN*SW-1:0]       hist [TAPS-1][N];   // hist[0] = previous frame
  logic [NW-1:0]            pos, p;

  // h[i] = sinc(x) * (0.54 - 0.46 cos(2 pi i / (TAPS*N-1))),
  // x = (i - TAPS*N/2 + 0.5) / N = (2i - TAPS*N + 1) / (2N), so that
  // sin(pi x) = sin(2 pi (2i - TAPS*N + 1) / (4N)); x is never 0.
  // Evaluated with Q30 integers, scaled to (2**(COEF_W-1) - 1) and rounded
  // half away from zero.
  initial begin : coef_rom
    longint m, sx, pix, h, w, hw;
    for (int i = 0; i < TAPS * N; i++) begin
      m   = 2 * longint'(i) - longint'(TAPS * N) + 1;
      sx  = sin2pi_q30(m, 4 * longint'(N));
      pix = (2 * HALF_PI_Q30 * m) / (2 * longint'(N));
      h   = (sx <<< 30) / pix;
      w   = 64'sd579820585 - ((64'sd493921239 * cos2pi_q30(longint'(i), longint'(TAPS * N - 1))) >>> 30);
      hw  = ((h * w) >>> 16) * ((longint'(1) <<< (COEF_W - 1)) - 1);   // Q44
      coef[i / N][i % N] = COEF_W'((hw >= 0) ? ((hw + (64'sd1 <<< 43)) >>> 44)
                                             : -((-hw + (64'sd1 <<< 43)) >>> 44));
    end
  end

  assign p = in_sof ? '0 : pos;

  always_ff @(posedge clk) begin
    if (rst) begin
      pos <= '0; out_valid <= 1'b0; out_sof <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid & in_sof;
      if (in_valid) begin
        pos <= p + 1'b1;
        for (int l = 0; l < N_IN; l++) begin
          logic signed [AW-1:0] acc;
          acc = AW'(in_data[l]) * AW'(coef[TAPS-1][p]);
          for (int t = 1; t < TAPS; t++)
            acc += AW'($signed(hist[t-1][p][l*SW +: SW])) * AW'(coef[TAPS-1-t][p]);
          acc += AW'(1) <<< (COEF_W - 2);        // round
          out_data[l] <= OW'(acc >>> (COEF_W - 1));
        end
        // shift this position's history by one frame
        for (int t = TAPS - 2; t > 0; t--) hist[t][p] <= hist[t-1][p];
        for (int l = 0; l < N_IN; l++) hist[0][p][l*SW +: SW] <= in_data[l];
      end
    end
  end
endmodule
