// tb_channel_select -- window, requantisation and saturation of channel select.
//
// Frames of NCH channels with random wide values are fed for several window
// starts and shifts, including a start beyond the last legal one (it must be
// clamped). Expected outputs are computed here: the kept channels, their
// order, out_sof on the first kept channel, round-half-up shifting and
// symmetric saturation, and the count of saturated values.
module tb_channel_select;
  import mexart_pkg::*;
  localparam int NI = 2, NCH = 64, SEL = 16, IW = 20;

  logic clk = 0, rst = 1;
  logic [5:0] chan_start;
  logic [4:0] shift;
  logic in_valid = 0, in_sof = 0;
  logic [5:0] in_chan;
  frame_ts_t in_ts;
  logic signed [IW-1:0] in_re [NI], in_im [NI];
  logic out_valid, out_sof;
  logic [5:0] out_chan;
  frame_ts_t out_ts;
  logic signed [7:0] out_re [NI], out_im [NI];
  logic [31:0] sat_count;
  int checks = 0, failures = 0;

  channel_select #(.N_IN(NI), .NCH(NCH), .SEL(SEL), .IW(IW)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  int exp_q [$];      // expected {chan}, values checked via arrays below
  int exp_re [$], exp_im [$];
  bit exp_sof [$];
  int nsat = 0, frame_id = 0;

  function automatic int rq(int v, int sh, ref int ns);
    longint r;
    r = (longint'(v) + ((sh == 0) ? 0 : (longint'(1) << (sh - 1)))) >>> sh;
    if (r > 127)  begin ns++; return 127;  end
    if (r < -127) begin ns++; return -127; end
    return int'(r);
  endfunction

  always @(posedge clk) if (!rst && out_valid) begin
    int c;
    c = exp_q.pop_front();
    check(out_chan == 6'(c), $sformatf("channel %0d expected %0d", out_chan, c));
    check(out_sof == exp_sof.pop_front(), "sof");
    check(out_ts.frame == 32'(frame_id), "timestamp");
    for (int l = 0; l < NI; l++) begin
      int er, ei;
      er = exp_re.pop_front(); ei = exp_im.pop_front();
      check(out_re[l] == 8'(er) && out_im[l] == 8'(ei),
            $sformatf("ch%0d l%0d got %0d,%0d exp %0d,%0d", c, l, out_re[l], out_im[l], er, ei));
    end
  end

  initial begin
    int starts [4] = '{0, 17, 48, 60};
    int shifts [4] = '{0, 3, 8, 12};
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 4; t++) begin
      int st;
      chan_start <= 6'(starts[t]);
      shift <= 5'(shifts[t]);
      st = (starts[t] > NCH - SEL) ? NCH - SEL : starts[t];
      @(posedge clk);
      for (int c = 0; c < NCH; c++) begin
        int vr [NI], vi [NI];
        in_valid <= 1; in_sof <= (c == 0); in_chan <= 6'(c);
        in_ts <= '{seconds: 0, sample_in_sec: 0, frame: 32'(t)};
        if (c >= st && c < st + SEL) begin exp_q.push_back(c); exp_sof.push_back(c == st); end
        for (int l = 0; l < NI; l++) begin
          vr[l] = int'($urandom_range(1 << (IW - 1))) - (1 << (IW - 2));
          vi[l] = int'($urandom_range(1 << 14)) - (1 << 13);
          in_re[l] <= IW'(vr[l]); in_im[l] <= IW'(vi[l]);
          if (c >= st && c < st + SEL) begin
            exp_re.push_back(rq(vr[l], shifts[t], nsat));
            exp_im.push_back(rq(vi[l], shifts[t], nsat));
          end
        end
        @(posedge clk);
        if (c == 0) frame_id = t;
      end
      in_valid <= 0;
      repeat (3) @(posedge clk);
    end
    check(exp_q.size() == 0, "all expected channels seen");
    check(sat_count == 32'(nsat), $sformatf("saturations %0d expected %0d", sat_count, nsat));
    check(nsat > 0, "saturation exercised");
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
