// tb_timing_unit -- checks framing and timestamping against the PPS.
//
// Samples carry a running count so that gaps and repeats show. The PPS rises
// every P cycles. Checked: nothing leaves before the sync edge; the first
// frame has the epoch seconds, offset 0 and frame number 0; frames are
// exactly FRAME samples long and numbered in order; seconds advance by one per
// PPS and the offset of each frame follows from the previous frame
// (+FRAME, or +FRAME-P across a second boundary); no sample is lost.
module tb_timing_unit;
  import mexart_pkg::*;
  localparam int NI = 2, FRAME = 8, P = 50;

  logic clk = 0, rst = 1, pps = 0, arm = 0, in_valid = 0;
  logic [31:0] epoch_sec = 32'd1000;
  logic signed [15:0] in_data [NI];
  logic out_valid, out_sof, synced;
  logic signed [15:0] out_data [NI];
  frame_ts_t out_ts;
  logic [31:0] pps_count;
  int checks = 0, failures = 0;

  timing_unit #(.N_IN(NI), .FRAME(FRAME)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    pps <= (cyc % P) >= 5 && (cyc % P) < 10;    // 5-cycle pulse
  end

  int nout = 0, frames = 0, prev_data = 0, in_frame = 0;
  frame_ts_t prev_ts;
  bit armed_done = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    if (!armed_done) check(0, "output before arm");
    if (nout > 0) check(out_data[0] == 16'(prev_data + 1), "sample lost or repeated");
    check(out_data[1] == -out_data[0], "lane 1 data");
    prev_data = out_data[0];
    if (out_sof) begin
      if (frames == 0) begin
        check(out_ts.seconds == 1000 && out_ts.sample_in_sec == 0 && out_ts.frame == 0,
              "first frame timestamp");
      end else begin
        check(in_frame == FRAME, $sformatf("frame length %0d", in_frame));
        check(out_ts.frame == prev_ts.frame + 1, "frame number");
        if (out_ts.seconds == prev_ts.seconds)
          check(out_ts.sample_in_sec == prev_ts.sample_in_sec + FRAME, "offset within second");
        else begin
          check(out_ts.seconds == prev_ts.seconds + 1, "seconds step");
          check(out_ts.sample_in_sec == prev_ts.sample_in_sec + FRAME - P, "offset across PPS");
        end
      end
      prev_ts = out_ts;
      frames++;
      in_frame = 0;
    end
    in_frame++;
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    in_valid <= 1;
    for (int i = 0; i < 2000; i++) begin
      in_data[0] <= 16'(i); in_data[1] <= -16'(i);
      if (i == 70) begin arm <= 1; armed_done = 1; end else arm <= 0;
      @(posedge clk);
    end
    in_valid <= 0;
    @(posedge clk);
    check(synced, "synchronised");
    check(frames > 200, "frames produced");
    check(pps_count == 32'(prev_ts.seconds - 1000) || pps_count == 32'(prev_ts.seconds - 999),
          "PPS count");
    $display("frames=%0d pps=%0d", frames, pps_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
