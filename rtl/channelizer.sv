// channelizer -- polyphase filter bank producing NCH = N/2 channels per frame.
//
// Each frame of N real samples per input goes through the polyphase FIR
// (pfb_fir) and an N-point streaming FFT (fft_sdf) with the imaginary input
// at zero. For a real input the upper half of the spectrum mirrors the lower
// half, so only bins 0..N/2-1 are kept: with N = 4096 at 100 MSPS that is 2048
// channels of 24.4 kHz. The FFT delivers bins in bit-reversed order; a
// double-buffered reorder memory stores the kept bins of one frame
// (the even output positions) and reads them out in natural order during the
// next frame, one channel every second sample, so the output is evenly
// spread and never bursts. A small FIFO carries each frame's timestamp from
// the input to the matching output frame.
//
// Interface: framed sample stream in (in_sof on frame position 0, in_ts valid
// with it); channel stream out: out_chan counts 0..NCH-1, out_sof marks
// channel 0, out_ts is that frame's timestamp, out_re/out_im hold the
// unnormalised bin of every input. Timing: a frame's channels leave during the
// second frame after it; the pipeline advances only on valid input.
// The channel count, frame length and the real-to-2048-channel arithmetic
// follow the paper; tap count, widths and the reorder scheme are this design's.
module channelizer
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN   = NUM_INPUTS,
  parameter int unsigned N      = FRAME_LEN,
  parameter int unsigned TAPS   = 4,
  parameter int unsigned SW     = SAMPLE_W,
  parameter int unsigned FIR_W  = SW + 2,
  parameter int unsigned W      = FIR_W + $clog2(N) + 1,
  parameter int unsigned NCH    = N / 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  frame_ts_t            in_ts,
  input  logic signed [SW-1:0] in_data [N_IN],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic [$clog2(NCH)-1:0] out_chan,
  output frame_ts_t            out_ts,
  output logic signed [W-1:0]  out_re [N_IN],
  output logic signed [W-1:0]  out_im [N_IN]
);
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned CW = $clog2(NCH);

  // ---- PFB FIR and FFT ----
  logic                    fir_valid, fir_sof;
  logic signed [FIR_W-1:0] fir_data [N_IN];
  logic signed [FIR_W-1:0] fir_zero [N_IN];
  logic                    fft_valid, fft_sof;
  logic signed [W-1:0]     fft_re [N_IN], fft_im [N_IN];

  pfb_fir #(.N_IN(N_IN), .N(N), .TAPS(TAPS), .SW(SW), .OW(FIR_W)) u_fir (
    .clk, .rst, .in_valid, .in_sof, .in_data,
    .out_valid(fir_valid), .out_sof(fir_sof), .out_data(fir_data)
  );

  always_comb for (int l = 0; l < N_IN; l++) fir_zero[l] = '0;

  fft_sdf #(.N_IN(N_IN), .N(N), .IW(FIR_W), .W(W)) u_fft (
    .clk, .rst,
    .in_valid(fir_valid), .in_sof(fir_sof), .in_re(fir_data), .in_im(fir_zero),
    .out_valid(fft_valid), .out_sof(fft_sof), .out_re(fft_re), .out_im(fft_im)
  );

  // ---- reorder: bit-reversed -> natural, keep bins < N/2 ----
  logic [2*W*N_IN-1:0] rbuf [2][NCH];
  logic [L-1:0]        j, jj;
  logic                wsel, have_frame;
  // bin = bit reversal of j; only even j (bins below N/2) are written, so
  // the reversed MSB, j[0], is always 0 and is left out.
  logic [CW-1:0]       bin;

  assign jj = fft_sof ? '0 : j;
  always_comb begin
    bin = '0;
    for (int b = 0; b < CW; b++) bin[CW-1-b] = jj[b+1];
  end

  // ---- timestamp FIFO ----
  frame_ts_t ts_q [4];
  logic [1:0] ts_wp, ts_rp;

  always_ff @(posedge clk) begin
    if (rst) begin
      j <= '0; wsel <= 1'b0; have_frame <= 1'b0;
      out_valid <= 1'b0; out_sof <= 1'b0; out_chan <= '0;
      ts_wp <= '0; ts_rp <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid && in_sof) begin
        ts_q[ts_wp] <= in_ts;
        ts_wp <= ts_wp + 1'b1;
      end
      if (fft_valid) begin
        j <= jj + 1'b1;
        if (!jj[0]) begin
          for (int l = 0; l < N_IN; l++) begin
            rbuf[wsel][bin][(2*l)*W +: W]   <= fft_re[l];
            rbuf[wsel][bin][(2*l+1)*W +: W] <= fft_im[l];
          end
        end else if (have_frame) begin
          out_valid <= 1'b1;
          out_chan  <= jj[L-1:1];
          out_sof   <= (jj[L-1:1] == '0);
          if (jj[L-1:1] == '0) begin
            out_ts <= ts_q[ts_rp];
            ts_rp  <= ts_rp + 1'b1;
          end
          for (int l = 0; l < N_IN; l++) begin
            out_re[l] <= $signed(rbuf[~wsel][jj[L-1:1]][(2*l)*W +: W]);
            out_im[l] <= $signed(rbuf[~wsel][jj[L-1:1]][(2*l+1)*W +: W]);
          end
        end
        if (jj == '1) begin
          wsel <= ~wsel;
          have_frame <= 1'b1;
        end
      end
    end
  end
endmodule
