// channel_select -- keeps SEL contiguous channels out of NCH and requantises.
//
// The channeliser delivers all NCH channels of a frame in order. This block
// passes on only channels chan_start .. chan_start+SEL-1 (chan_start is a host
// register, clamped so that the window stays inside the band) and reduces each
// wide complex value to CW-bit real and imaginary parts: the value is shifted
// right arithmetically by `shift` bits with round-half-up and saturated to
// +-(2**(CW-1)-1), so that the negative full scale is never produced and the
// result is symmetric. Saturation events are counted.
//
// Interface: channel stream in and out; out_sof marks the first kept channel,
// out_chan is the absolute channel number. Timing: one cycle of latency.
// Selecting 512 contiguous channels out of 2048 follows the paper; the
// requantisation and its 8-bit output are this design's reading of the
// paper's ~12.5 Gb/s total data rate (64 signals x 512 channels x 24.4 kHz x
// 16 bits).
module channel_select
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN = NUM_INPUTS,
  parameter int unsigned NCH  = NUM_CHANS,
  parameter int unsigned SEL  = SEL_CHANS,
  parameter int unsigned IW   = 31,
  parameter int unsigned CW   = CHAN_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [$clog2(NCH)-1:0] chan_start,
  input  logic [4:0]             shift,
  input  logic                   in_valid,
  input  logic                   in_sof,
  input  logic [$clog2(NCH)-1:0] in_chan,
  input  frame_ts_t              in_ts,
  input  logic signed [IW-1:0]   in_re [N_IN],
  input  logic signed [IW-1:0]   in_im [N_IN],
  output logic                   out_valid,
  output logic                   out_sof,
  output logic [$clog2(NCH)-1:0] out_chan,
  output frame_ts_t              out_ts,
  output logic signed [CW-1:0]   out_re [N_IN],
  output logic signed [CW-1:0]   out_im [N_IN],
  output logic [31:0]            sat_count
);
  localparam int unsigned NW = $clog2(NCH);

  logic [NW-1:0] start;
  frame_ts_t     ts_hold;
  logic          in_win;

  assign start  = (chan_start > NW'(NCH - SEL)) ? NW'(NCH - SEL) : chan_start;
  assign in_win = (in_chan >= start) && ({1'b0, in_chan} < {1'b0, start} + (NW+1)'(SEL));

  function automatic logic signed [CW-1:0] requant(logic signed [IW-1:0] v, logic [4:0] sh,
                                                   output logic sat);
    logic signed [IW:0] r;
    localparam logic signed [IW:0] MAXV = (IW+1)'((1 << (CW - 1)) - 1);
    logic signed [IW:0] half;
    half = (sh == 0) ? (IW+1)'(0) : ((IW+1)'(1) <<< (sh - 1));
    r = ((IW+1)'(v) + half) >>> sh;
    sat = 1'b1;
    if (r > MAXV)       return CW'(MAXV);
    else if (r < -MAXV) return CW'(-MAXV);
    sat = 1'b0;
    return CW'(r);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0; out_sof <= 1'b0; out_chan <= '0; sat_count <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (in_valid && in_sof) ts_hold <= in_ts;
      if (in_valid && in_win) begin
        int nsat;
        nsat = 0;
        out_valid <= 1'b1;
        out_sof   <= (in_chan == start);
        out_chan  <= in_chan;
        out_ts    <= in_sof ? in_ts : ts_hold;
        for (int l = 0; l < N_IN; l++) begin
          logic s1, s2;
          out_re[l] <= requant(in_re[l], shift, s1);
          out_im[l] <= requant(in_im[l], shift, s2);
          nsat += int'(s1) + int'(s2);
        end
        sat_count <= sat_count + 32'(nsat);
      end
    end
  end
endmodule
