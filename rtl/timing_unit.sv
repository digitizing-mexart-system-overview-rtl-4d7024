// timing_unit -- frames and timestamps the digitised sample stream.
//
// The samples of all inputs arrive together, one per input per valid cycle.
// The host writes the epoch (seconds) and arms the unit. On the next rising
// edge of the PPS the unit synchronises: the second counter takes the epoch
// value, the sample-in-second counter restarts at zero and the first frame
// begins. From then on every PPS rising edge advances the second counter and
// restarts the sample-in-second count, while frames of FRAME_LEN samples run
// on without interruption. Each output frame carries, on its first sample
// (out_sof), the seconds and the sample offset of that first sample and a frame
// counter. Samples are dropped until the unit is synchronised.
//
// Timing: the PPS input is asynchronous and passes a two-flop synchroniser;
// outputs are registered, one cycle after the input sample.
// The frame length and the use of the epoch and PPS edge follow the paper; the
// exact counters and the arm/sync sequence are this design's choice.
module timing_unit
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN   = NUM_INPUTS,
  parameter int unsigned FRAME  = FRAME_LEN,
  parameter int unsigned SW     = SAMPLE_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 pps,          // asynchronous pulse-per-second
  input  logic                 arm,          // pulse: sync on the next PPS edge
  input  logic [31:0]          epoch_sec,    // seconds value for that PPS edge
  input  logic                 in_valid,
  input  logic signed [SW-1:0] in_data [N_IN],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic signed [SW-1:0] out_data [N_IN],
  output frame_ts_t            out_ts,       // valid with out_sof
  output logic                 synced,
  output logic [31:0]          pps_count     // PPS edges seen since sync
);
  localparam int unsigned FW = $clog2(FRAME);

  logic [2:0]  pps_sync;
  logic        pps_edge;
  logic        armed;
  logic [31:0] seconds, sample_in_sec, frame_cnt;
  logic [FW-1:0] pos;

  always_ff @(posedge clk) begin
    if (rst) pps_sync <= '0;
    else     pps_sync <= {pps_sync[1:0], pps};
  end
  assign pps_edge = pps_sync[1] & ~pps_sync[2];

  // The PPS edge is counted on the sample it coincides with; sample counting
  // is tied to in_valid so that offsets are in units of samples.
  always_ff @(posedge clk) begin
    if (rst) begin
      armed <= 1'b0; synced <= 1'b0;
      seconds <= '0; sample_in_sec <= '0; frame_cnt <= '0; pos <= '0;
      pps_count <= '0;
      out_valid <= 1'b0; out_sof <= 1'b0; out_ts <= '0;
    end else begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (arm) begin
        armed   <= 1'b1;
        synced  <= 1'b0;
        seconds <= epoch_sec;
      end else if (armed && pps_edge) begin
        // Synchronisation edge: the sample that coincides with it is sample
        // 0 of second `epoch_sec` and of frame 0.
        armed <= 1'b0; synced <= 1'b1;
        pps_count <= '0;
        frame_cnt <= '0;
        pos           <= in_valid ? FW'(1) : '0;
        sample_in_sec <= in_valid ? 32'd1 : '0;
        if (in_valid) begin
          out_valid <= 1'b1;
          out_sof   <= 1'b1;
          out_data  <= in_data;
          out_ts    <= '{seconds: seconds, sample_in_sec: '0, frame: '0};
        end
      end else if (synced) begin
        if (pps_edge) begin
          seconds       <= seconds + 1;
          pps_count     <= pps_count + 1;
        end
        if (in_valid) begin
          out_valid <= 1'b1;
          out_sof   <= (pos == '0);
          out_data  <= in_data;
          if (pos == '0) begin
            out_ts.seconds       <= pps_edge ? seconds + 1 : seconds;
            out_ts.sample_in_sec <= pps_edge ? '0 : sample_in_sec;
            out_ts.frame         <= frame_cnt;
          end
          pos           <= (pos == FW'(FRAME - 1)) ? '0 : pos + 1;
          if (pos == FW'(FRAME - 1)) frame_cnt <= frame_cnt + 1;
          sample_in_sec <= pps_edge ? 32'd1 : sample_in_sec + 1;
        end else if (pps_edge) begin
          sample_in_sec <= '0;
        end
      end
    end
  end
endmodule
