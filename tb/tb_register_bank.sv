// tb_register_bank -- register map, reset values, pulses and read-back.
//
// Checks the ID and reset values, write/read of every control register, the
// one-cycle arm and snapshot pulses (and that CONTROL reads 0), the status
// bits, counters and snapshot timestamp, the per-input RMS and power words and the snapshot
// window address split, all with rd_valid one cycle after rd.
module tb_register_bank;
  localparam int NI = 4, SNAP = 8;

  logic clk = 0, rst = 1, wr = 0, rd = 0;
  logic [15:0] addr;
  logic [31:0] wdata, rdata;
  logic rd_valid, arm, snap_trigger;
  logic [31:0] epoch_sec;
  logic [10:0] chan_start;
  logic [4:0] shift, rms_win_log2;
  logic [15:0] int_frames;
  logic synced, snap_done, snap_busy;
  logic [31:0] counters [8];
  mexart_pkg::frame_ts_t snap_ts;
  logic [15:0] rms [NI];
  logic [31:0] power [NI];
  logic [2:0] snap_sample;
  logic [1:0] snap_input;
  logic signed [15:0] snap_data;
  int checks = 0, failures = 0;

  register_bank #(.N_IN(NI), .SNAP_D(SNAP)) dut (.*);
  always #5 clk = ~clk;

  // snapshot memory model: value from the address split
  assign snap_data = -16'(snap_sample * 16 + snap_input);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  task automatic write(int a, int d);
    @(posedge clk); wr <= 1; addr <= 16'(a); wdata <= 32'(d);
    @(posedge clk); wr <= 0;
  endtask

  task automatic read(int a, output logic [31:0] d);
    @(posedge clk); rd <= 1; addr <= 16'(a);
    @(posedge clk); rd <= 0;
    #1;
    check(rd_valid, "rd_valid one cycle after rd");
    d = rdata;
  endtask

  int arms = 0, snaps = 0;
  always @(posedge clk) if (!rst) begin
    if (arm) arms++;
    if (snap_trigger) snaps++;
  end

  initial begin
    logic [31:0] d;
    synced = 1; snap_done = 0; snap_busy = 1;
    for (int i = 0; i < 8; i++) counters[i] = 32'(100 + i);
    snap_ts = '{seconds: 32'd1700000000, sample_in_sec: 32'd8192, frame: 32'd77};
    for (int l = 0; l < NI; l++) begin rms[l] = 16'(200 + l); power[l] = 32'(40000 + l); end
    repeat (3) @(posedge clk);
    rst <= 0;
    read(0, d);   check(d == 32'h4D455841, "ID");
    read(3, d);   check(d == 768, "CHAN_START reset");
    read(4, d);   check(d == 12, "SHIFT reset");
    read(5, d);   check(d == 1024, "INT_FRAMES reset");
    read(6, d);   check(d == 16, "RMS_WIN reset");
    write(2, 32'h12345678); read(2, d); check(d == 32'h12345678 && epoch_sec == 32'h12345678, "EPOCH");
    write(3, 1536);         read(3, d); check(d == 1536 && chan_start == 1536, "CHAN_START");
    write(4, 7);            read(4, d); check(d == 7 && shift == 7, "SHIFT");
    write(5, 3);            read(5, d); check(d == 3 && int_frames == 3, "INT_FRAMES");
    write(6, 20);           read(6, d); check(d == 20 && rms_win_log2 == 20, "RMS_WIN");
    write(1, 1);  write(1, 2); write(1, 3);
    repeat (2) @(posedge clk);
    check(arms == 2 && snaps == 2, $sformatf("pulses arm=%0d snap=%0d", arms, snaps));
    check(!arm && !snap_trigger, "pulses self-clear");
    read(1, d);   check(d == 0, "CONTROL reads 0");
    read(7, d);   check(d == 32'b101, "STATUS");
    for (int i = 0; i < 8; i++) begin read(8 + i, d); check(d == 32'(100 + i), "counter"); end
    read(16'h30, d); check(d == 32'd1700000000, "snapshot seconds");
    read(16'h31, d); check(d == 32'd8192, "snapshot sample offset");
    read(16'h32, d); check(d == 32'd77, "snapshot frame");
    for (int l = 0; l < NI; l++) begin
      read(16 + l, d); check(d == 32'(200 + l), "RMS word");
      read(32 + l, d); check(d == 32'(40000 + l), "power word");
    end
    for (int s = 0; s < SNAP; s++)
      for (int l = 0; l < NI; l++) begin
        read(16'h4000 + s * NI + l, d);
        check(d == 32'(-(s * 16 + l)), $sformatf("snapshot s%0d l%0d got %0d", s, l, $signed(d)));
      end
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
