// packet_mux -- merges two packet streams into one, a whole packet at a time.
//
// The two SPEAD formatters (channelised data and integrated spectra) share
// the single Ethernet core. When the output is free the mux grants the next
// input that has a packet waiting, alternating between the two when both wait
// (round robin), and holds the grant from the first word offered until the
// word marked `last` has been taken, so packets are never interleaved. A granted input sees the output's
// ready; the other sees ready low.
//
// Interface: two valid/ready packet streams in, one out; combinational data
// path, no added latency. The mux itself is drawn, unnamed, in Fig. 2 of the
// paper; the round-robin policy is this design's choice.
module packet_mux
  import mexart_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  pkt_word_t in_word  [2],
  input  logic      in_valid [2],
  output logic      in_ready [2],
  output pkt_word_t out_word,
  output logic      out_valid,
  input  logic      out_ready
);
  logic busy, sel, last_sel, pick;

  // input chosen when idle: the other one than last time if both wait
  always_comb begin
    if (in_valid[0] && in_valid[1]) pick = ~last_sel;
    else                            pick = in_valid[1];
  end

  logic cur;
  assign cur = busy ? sel : pick;

  always_comb begin
    out_word    = in_word[cur];
    out_valid   = in_valid[cur];
    in_ready[0] = out_ready && (cur == 1'b0);
    in_ready[1] = out_ready && (cur == 1'b1);
  end

  // The choice is locked as soon as a word is offered, so a stalled word
  // cannot be swapped for the other input's, and released after `last`.
  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; sel <= 1'b0; last_sel <= 1'b1;
    end else if (out_valid) begin
      if (out_ready && out_word.last) begin
        busy <= 1'b0;
        last_sel <= cur;
      end else begin
        busy <= 1'b1;
        sel  <= cur;
      end
    end
  end

  // An offered word stays offered, unchanged, until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (rst)
      out_valid && !out_ready |=> out_valid && $stable(out_word))
    else $error("packet_mux: output changed while stalled");
endmodule
