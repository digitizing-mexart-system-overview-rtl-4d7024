// adc_snapshot -- captures raw samples of all inputs for inspection.
//
// After a trigger from the host the block waits for the next frame start and
// then stores DEPTH consecutive samples of every input, together with that
// frame's timestamp, and raises `done`. The host then reads the buffer one
// sample of one input at a time through rd_sample / rd_input; the read is
// combinational, so the register bank can return it in its usual one cycle.
// A new trigger overwrites the previous snapshot.
//
// Interface: framed sample stream of the timing unit in; trigger pulse; read
// port. Timing: capture starts on the first in_sof after the trigger and
// takes DEPTH valid samples.
// The snapshot of ADC data from all antennas is from the paper; its depth, the
// frame-aligned start and the read port are this design's choice (the paper
// sends it to the server, here it is read over the control bus).
module adc_snapshot
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN  = NUM_INPUTS,
  parameter int unsigned SW    = SAMPLE_W,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      trigger,
  input  logic                      in_valid,
  input  logic                      in_sof,
  input  frame_ts_t                 in_ts,
  input  logic signed [SW-1:0]      in_data [N_IN],
  output logic                      busy,
  output logic                      done,
  output frame_ts_t                 snap_ts,
  input  logic [$clog2(DEPTH)-1:0]  rd_sample,
  input  logic [$clog2(N_IN)-1:0]   rd_input,
  output logic signed [SW-1:0]      rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [N_IN*SW-1:0] mem [DEPTH];
  logic               armed, capturing;
  logic [AW-1:0]      wa;

  assign busy    = armed | capturing;
  assign rd_data = $signed(mem[rd_sample][int'(rd_input)*SW +: SW]);

  always_ff @(posedge clk) begin
    if (rst) begin
      armed <= 1'b0; capturing <= 1'b0; done <= 1'b0; wa <= '0; snap_ts <= '0;
    end else begin
      if (trigger) begin
        armed <= 1'b1; capturing <= 1'b0; done <= 1'b0;
      end else if (in_valid && (capturing || (armed && in_sof))) begin
        if (armed) begin
          armed <= 1'b0; capturing <= 1'b1; snap_ts <= in_ts;
        end
        for (int l = 0; l < N_IN; l++) mem[armed ? '0 : wa][l*SW +: SW] <= in_data[l];
        wa <= armed ? AW'(1) : wa + 1'b1;
        if (!armed && int'(wa) == DEPTH - 1) begin
          capturing <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
endmodule
