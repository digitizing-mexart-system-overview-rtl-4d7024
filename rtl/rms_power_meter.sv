// rms_power_meter -- running RMS of every time-domain input.
//
// For each input the meter sums x*x over a window of 2**win_log2 samples. At
// the end of a window the sum is shifted down by win_log2 to give the mean
// power, which is published on out_power, and a bit-serial integer square root
// (one result bit per cycle, 16 cycles) turns it into the RMS amplitude on
// out_rms. out_update pulses for one cycle when both are new. A new window
// starts on the sample after the last one, so no sample is skipped.
//
// Interface: the sample bus of the timing unit; win_log2 is a host register
// (5..24; smaller values are raised to 5 so that the square root finishes
// within a window). Timing: out_power is ready 2 cycles after the last sample of
// a window, out_rms and out_update 17 cycles later.
// That the meter reports the RMS power of the time-domain data of every input
// follows the paper; window length, widths and the square-root method are
// this design's choice.
module rms_power_meter
  import mexart_pkg::*;
#(
  parameter int unsigned N_IN = NUM_INPUTS,
  parameter int unsigned SW   = SAMPLE_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [4:0]           win_log2,
  input  logic                 in_valid,
  input  logic signed [SW-1:0] in_data [N_IN],
  output logic [2*SW-1:0]      out_power [N_IN],  // mean of x*x over the window
  output logic [SW-1:0]        out_rms   [N_IN],  // floor(sqrt(out_power))
  output logic                 out_update
);
  localparam int unsigned AW = 2*SW + 24;   // accumulator: 2**24 squares at most

  logic [4:0]    wl;
  logic [23:0]   cnt;
  logic [AW-1:0] acc [N_IN];
  logic          win_done;
  logic [2*SW-1:0] mean [N_IN];

  assign wl = (win_log2 < 5'd5) ? 5'd5 : ((win_log2 > 5'd24) ? 5'd24 : win_log2);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt <= '0; win_done <= 1'b0;
      for (int i = 0; i < N_IN; i++) acc[i] <= '0;
    end else begin
      win_done <= 1'b0;
      if (in_valid) begin
        for (int i = 0; i < N_IN; i++) begin
          logic signed [2*SW-1:0] xe;
          logic        [2*SW-1:0] sq;
          xe = (2*SW)'(in_data[i]);
          sq = $unsigned(xe * xe);
          if (cnt == (24'(1) << wl) - 1) begin
            mean[i] <= (2*SW)'((acc[i] + AW'(sq)) >> wl);
            acc[i]  <= '0;
          end else begin
            acc[i]  <= acc[i] + AW'(sq);
          end
        end
        if (cnt == (24'(1) << wl) - 1) begin
          cnt <= '0; win_done <= 1'b1;
        end else begin
          cnt <= cnt + 1;
        end
      end
    end
  end

  // Bit-serial square root, restoring method, one bit per cycle.
  logic [$clog2(SW+1)-1:0] step;
  logic                    busy;
  logic [2*SW-1:0]         rem  [N_IN];
  logic [SW-1:0]           root [N_IN];

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0; step <= '0; out_update <= 1'b0;
      for (int i = 0; i < N_IN; i++) begin
        out_power[i] <= '0; out_rms[i] <= '0;
      end
    end else begin
      out_update <= 1'b0;
      if (win_done) begin
        busy <= 1'b1; step <= '0;
        for (int i = 0; i < N_IN; i++) begin
          out_power[i] <= mean[i];
          rem[i]  <= mean[i];
          root[i] <= '0;
        end
      end else if (busy) begin
        for (int i = 0; i < N_IN; i++) begin
          logic [SW-1:0]   trial;
          logic [2*SW-1:0] tsq;
          trial = root[i] | (SW'(1) << (SW - 1 - int'(step)));
          tsq   = (2*SW)'(trial) * (2*SW)'(trial);
          if (tsq <= rem[i]) root[i] <= trial;
          // last bit: publish the finished root directly
          if (int'(step) == SW - 1) out_rms[i] <= (tsq <= rem[i]) ? trial : root[i];
        end
        if (int'(step) == SW - 1) begin
          busy <= 1'b0; out_update <= 1'b1;
        end
        step <= step + 1;
      end
    end
  end
endmodule
