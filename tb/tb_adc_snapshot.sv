// tb_adc_snapshot -- frame-aligned capture of all inputs and read-back.
//
// Samples carry their running index; after a trigger in the middle of a frame
// the capture must start at the next frame start, hold DEPTH consecutive
// samples of every input, record that frame's timestamp and raise done. A
// second trigger must capture again, later samples.
module tb_adc_snapshot;
  import mexart_pkg::*;
  localparam int NI = 3, DEPTH = 16, FRAME = 8;

  logic clk = 0, rst = 1, trigger = 0, in_valid = 0, in_sof = 0;
  frame_ts_t in_ts;
  logic signed [15:0] in_data [NI];
  logic busy, done;
  frame_ts_t snap_ts;
  logic [3:0] rd_sample;
  logic [1:0] rd_input;
  logic signed [15:0] rd_data;
  int checks = 0, failures = 0;

  adc_snapshot #(.N_IN(NI), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  int i = 0;
  bit run = 0;
  always @(posedge clk) if (run) begin
    in_valid <= 1; in_sof <= (i % FRAME == 0);
    in_ts <= '{seconds: 1, sample_in_sec: 32'(i), frame: 32'(i / FRAME)};
    for (int l = 0; l < NI; l++) in_data[l] <= 16'(i * 4 + l);
    i++;
  end

  task automatic capture_and_check(int trig_at);
    int first;
    wait (i == trig_at);
    @(posedge clk) trigger <= 1;
    @(posedge clk) trigger <= 0;
    #1;
    check(busy && !done, "busy after trigger");
    first = ((i + FRAME - 1) / FRAME) * FRAME;
    wait (done);
    @(posedge clk);
    check(snap_ts.sample_in_sec == 32'(first) && snap_ts.frame == 32'(first / FRAME),
          $sformatf("snapshot start %0d expected %0d", snap_ts.sample_in_sec, first));
    for (int s = 0; s < DEPTH; s++)
      for (int l = 0; l < NI; l++) begin
        rd_sample = 4'(s); rd_input = 2'(l);
        #1;
        check(rd_data == 16'((first + s) * 4 + l), $sformatf("s%0d l%0d got %0d", s, l, rd_data));
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    run = 1;
    capture_and_check(13);
    capture_and_check(61);
    run = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
