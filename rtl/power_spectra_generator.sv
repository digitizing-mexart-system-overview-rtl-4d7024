// power_spectra_generator -- integrated power spectrum of every input.
//
// For every selected channel and input the block adds re*re + im*im over
// int_frames consecutive frames (a host register; 0 counts as 1). The running
// sums live in one memory word per channel holding all inputs. In the first
// frame of an integration the memory is overwritten, in the following frames
// it is accumulated, and in the last frame the finished sum is sent out
// instead of being written back, so integrations follow each other without a
// gap and without a separate clear pass. The integration length is latched at
// the start of each integration.
//
// Interface: the channel stream of channel_select in; a channel stream of
// PW-bit powers out, one word per channel during the last frame of each
// integration, with the timestamp of the integration's first frame.
// Timing: one cycle of latency; output rate = input rate / int_frames.
// Integrating the channeliser output for a configurable time follows the paper
// (Fig. 2 draws the branch after channel select); widths and the memory scheme
// are this design's choice.
module power_spectra_generator
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN = NUM_INPUTS,
  parameter int unsigned NCH  = NUM_CHANS,
  parameter int unsigned SEL  = SEL_CHANS,
  parameter int unsigned CW   = CHAN_W,
  parameter int unsigned PW   = POWER_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [15:0]            int_frames,
  input  logic                   in_valid,
  input  logic                   in_sof,
  input  logic [$clog2(NCH)-1:0] in_chan,
  input  frame_ts_t              in_ts,
  input  logic signed [CW-1:0]   in_re [N_IN],
  input  logic signed [CW-1:0]   in_im [N_IN],
  output logic                   out_valid,
  output logic                   out_sof,
  output logic [$clog2(NCH)-1:0] out_chan,
  output frame_ts_t              out_ts,
  output logic [PW-1:0]          out_pow [N_IN],
  output logic [31:0]            spectra_count
);
  localparam int unsigned IW = $clog2(SEL);

  logic [PW*N_IN-1:0] acc [SEL];
  logic [IW-1:0]      idx_r, idx;
  logic [15:0]        fcnt, nint;
  logic               first, last;
  frame_ts_t          ts_first;

  logic [15:0] int_eff, n_now;
  assign int_eff = (int_frames == '0) ? 16'd1 : int_frames;
  assign n_now   = (first && in_sof) ? int_eff : nint;
  assign idx     = in_sof ? '0 : idx_r;
  assign first   = (fcnt == '0);
  assign last    = (fcnt == n_now - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      idx_r <= '0; fcnt <= '0; nint <= 16'd1; ts_first <= '0;
      out_valid <= 1'b0; out_sof <= 1'b0; out_chan <= '0; spectra_count <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid) begin
        idx_r <= idx + 1'b1;
        if (in_sof && first) begin
          nint     <= int_eff;
          ts_first <= in_ts;
        end
        for (int l = 0; l < N_IN; l++) begin
          logic signed [2*CW-1:0] re, im;
          logic [PW-1:0] p, s;
          re = (2*CW)'(in_re[l]);
          im = (2*CW)'(in_im[l]);
          p  = PW'($unsigned(re * re)) + PW'($unsigned(im * im));
          s  = first ? p : acc[idx][l*PW +: PW] + p;
          if (last) out_pow[l] <= s;
          else      acc[idx][l*PW +: PW] <= s;
        end
        if (last) begin
          out_valid <= 1'b1;
          out_sof   <= (idx == '0);
          out_chan  <= in_chan;
          out_ts    <= (in_sof && first) ? in_ts : ts_first;
        end
        if (idx == IW'(SEL - 1)) begin
          if (last) begin
            fcnt <= '0;
            spectra_count <= spectra_count + 1;
          end else begin
            fcnt <= fcnt + 1;
          end
        end
      end
    end
  end
endmodule
