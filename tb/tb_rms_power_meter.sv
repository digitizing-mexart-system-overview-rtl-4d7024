// tb_rms_power_meter -- checks mean power and RMS against values computed here.
//
// Input 0 is a +-A square wave (RMS exactly A), input 1 random samples and
// input 2 zero. For every window of 2**WL samples the expected mean power
// floor(sum x^2 / 2**WL) and its integer square root are computed in the
// testbench and compared with the outputs at out_update, which must come
// within 20 cycles of the window's last sample.
module tb_rms_power_meter;
  localparam int NI = 3, WL = 6, WIN = 1 << WL;

  logic clk = 0, rst = 1, in_valid = 0;
  logic [4:0] win_log2 = 5'(WL);
  logic signed [15:0] in_data [NI];
  logic [31:0] out_power [NI];
  logic [15:0] out_rms [NI];
  logic out_update;
  int checks = 0, failures = 0;

  rms_power_meter #(.N_IN(NI)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  longint sumsq [NI];
  longint exp_pow [16][NI];
  int wr_win = 0, rd_win = 0;
  int cyc = 0, win_end_cyc = 0, updates = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint isqrt(longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  always @(posedge clk) if (!rst && out_update) begin
    longint e [NI];
    for (int l = 0; l < NI; l++) e[l] = exp_pow[rd_win][l];
    rd_win++;
    for (int l = 0; l < NI; l++) begin
      check(out_power[l] == 32'(e[l]), $sformatf("power l%0d got %0d exp %0d", l, out_power[l], e[l]));
      check(out_rms[l] == 16'(isqrt(e[l])), $sformatf("rms l%0d got %0d exp %0d", l, out_rms[l], isqrt(e[l])));
    end
    check(cyc - win_end_cyc <= 20, $sformatf("update latency %0d", cyc - win_end_cyc));
    updates++;
  end

  initial begin
    for (int l = 0; l < NI; l++) sumsq[l] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 8 * WIN; i++) begin
      int v1;
      v1 = int'($urandom_range(60000)) - 30000;
      in_valid <= 1;
      in_data[0] <= (i % 2) ? 16'sd1234 : -16'sd1234;
      in_data[1] <= 16'(v1);
      in_data[2] <= '0;
      sumsq[0] += 1234 * 1234;
      sumsq[1] += longint'(v1) * v1;
      if (i % WIN == WIN - 1) begin
        for (int l = 0; l < NI; l++) begin exp_pow[wr_win][l] = sumsq[l] >> WL; sumsq[l] = 0; end
        wr_win++;
        win_end_cyc = cyc + 1;
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (40) @(posedge clk);
    check(updates == 8, $sformatf("updates %0d", updates));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
