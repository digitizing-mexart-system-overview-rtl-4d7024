// spead_formatter -- packs a channel stream into SPEAD packets.
//
// Every input word holds one channel of all N_IN inputs (input 0 in the most
// significant bits). Words are queued in a FIFO of DEPTH entries; as soon as
// CPP of them (one packet's worth of consecutive channels) are queued, a
// packet is sent on the 64-bit output:
//   word 0      SPEAD header: magic 0x53, version 4, item pointer width 2,
//               heap address width 6, reserved, number of items (8)
//   words 1..8  immediate items {1, id[14:0], value[47:0]}: heap counter,
//               heap size, heap offset (0), payload length, seconds,
//               sample offset of the frame, {first channel, channels in the
//               packet, first input}, stream mode
//   then        payload: CPP channels x WPE 64-bit words, channel-major
// Channels are dropped a whole packet at a time: if at the start of a group of
// CPP channels the FIFO cannot hold the whole group, the group is discarded
// and counted in drop_count, so that a packet never holds a gap.
//
// Interface: valid-only channel stream in (in_sof restarts the grouping at a
// frame's first channel); valid/ready packet stream out with `last` on the
// final word. Timing: the header starts two cycles after the group's last
// channel is queued; a packet takes 9 + CPP*WPE cycles with ready held high.
// The frame number in in_ts is not sent (seconds and sample offset already
// identify the frame), so verilator reports those bits as unused.
// SPEAD packets and the two formatters of Fig. 2 follow the paper; the item
// list, packet size and drop policy are this design's choice.
module spead_formatter
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN      = NUM_INPUTS,
  parameter int unsigned NCH       = NUM_CHANS,
  parameter int unsigned EW        = 2 * CHAN_W,   // bits per input per channel
  parameter int unsigned CPP       = 32,           // channels per packet
  parameter int unsigned DEPTH     = 512,          // FIFO entries
  parameter logic [47:0] MODE      = MODE_CHANNELISED,
  parameter logic [15:0] FIRST_ANT = 16'd0
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  input  logic                   in_sof,
  input  logic [$clog2(NCH)-1:0] in_chan,
  input  frame_ts_t              in_ts,
  input  logic [N_IN*EW-1:0]     in_data,
  output pkt_word_t              out_word,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [31:0]            pkt_count,
  output logic [31:0]            drop_count
);
  localparam int unsigned DW   = N_IN * EW;
  localparam int unsigned WPE  = DW / 64;
  localparam int unsigned CHW  = $clog2(NCH);
  localparam int unsigned AW   = $clog2(DEPTH);
  localparam int unsigned EWID = CHW + 64 + DW;
  localparam int unsigned PAYLOAD_BYTES = CPP * DW / 8;

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_PAY} state_t;

  // ---- FIFO ----
  logic [EWID-1:0] fifo [DEPTH];
  logic [AW-1:0]   wp, rp;
  logic [AW:0]     count;
  logic            push, pop, dropping;
  logic [$clog2(CPP+1)-1:0] grp, g;

  assign g    = in_sof ? '0 : grp;
  assign push = in_valid && ((g == '0) ? (count + (AW+1)'(CPP) <= (AW+1)'(DEPTH)) : !dropping);

  // ---- output state ----
  state_t               state;
  logic [3:0]           hidx;
  logic [$clog2(WPE+1)-1:0] widx;
  logic [$clog2(CPP+1)-1:0] eidx;
  logic [EWID-1:0]      head;
  logic [63:0]          hdr_word;
  logic [47:0]          heap_cnt;

  assign head = fifo[rp];
  assign pop  = (state == S_PAY) && out_ready && (int'(widx) == WPE - 1);

  always_comb begin
    logic [CHW-1:0] ch;
    logic [31:0]    sec, off;
    {ch, sec, off} = head[EWID-1 -: CHW + 64];
    unique case (hidx)
      4'd0:    hdr_word = {8'h53, 8'h04, 8'h02, 8'h06, 16'h0000, 16'(SPEAD_NITEMS)};
      4'd1:    hdr_word = spead_item(SPEAD_ID_HEAP_CNT, heap_cnt);
      4'd2:    hdr_word = spead_item(SPEAD_ID_HEAP_SIZE, 48'(PAYLOAD_BYTES));
      4'd3:    hdr_word = spead_item(SPEAD_ID_HEAP_OFF, 48'd0);
      4'd4:    hdr_word = spead_item(SPEAD_ID_PAYLOAD, 48'(PAYLOAD_BYTES));
      4'd5:    hdr_word = spead_item(SPEAD_ID_SECONDS, 48'(sec));
      4'd6:    hdr_word = spead_item(SPEAD_ID_SAMPLE_OFF, 48'(off));
      4'd7:    hdr_word = spead_item(SPEAD_ID_CHAN_INFO, {16'(ch), 16'(CPP), FIRST_ANT});
      default: hdr_word = spead_item(SPEAD_ID_MODE, MODE);
    endcase
  end

  always_comb begin
    out_valid     = (state != S_IDLE);
    out_word.last = (state == S_PAY) && (int'(eidx) == CPP - 1) && (int'(widx) == WPE - 1);
    if (state == S_HDR) out_word.data = hdr_word;
    else                out_word.data = head[DW - 1 - 64*int'(widx) -: 64];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0; rp <= '0; count <= '0; grp <= '0; dropping <= 1'b0;
      state <= S_IDLE; hidx <= '0; widx <= '0; eidx <= '0;
      heap_cnt <= '0; pkt_count <= '0; drop_count <= '0;
    end else begin
      // input side: group bookkeeping, whole-group drops
      if (in_valid) begin
        grp <= (int'(g) == CPP - 1) ? '0 : g + 1'b1;
        if (g == '0) dropping <= !push;
        if (!push) drop_count <= drop_count + 1;
      end
      if (push) begin
        fifo[wp] <= {in_chan, in_ts.seconds, in_ts.sample_in_sec, in_data};
        wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);

      // output side
      unique case (state)
        S_IDLE: if (count >= (AW+1)'(CPP)) begin
          state <= S_HDR; hidx <= '0;
        end
        S_HDR: if (out_ready) begin
          if (int'(hidx) == SPEAD_NITEMS) begin
            state <= S_PAY; widx <= '0; eidx <= '0;
          end
          hidx <= hidx + 1'b1;
        end
        S_PAY: if (out_ready) begin
          if (int'(widx) == WPE - 1) begin
            widx <= '0;
            if (int'(eidx) == CPP - 1) begin
              state <= S_IDLE;
              heap_cnt  <= heap_cnt + 1;
              pkt_count <= pkt_count + 1;
            end
            eidx <= eidx + 1'b1;
          end else begin
            widx <= widx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A packet word must hold still until it is taken.
  property p_hold;
    @(posedge clk) disable iff (rst)
      out_valid && !out_ready |=> out_valid && $stable(out_word);
  endproperty
  a_hold: assert property (p_hold) else $error("spead_formatter: word changed while stalled");
endmodule
