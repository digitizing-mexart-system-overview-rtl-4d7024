// tb_packet_mux -- packet-atomic round-robin merge of two streams.
//
// Two sources send numbered packets of random length, each word tagged with
// its source, packet and word number; the sink takes words with random
// ready. Checked: no packet is interleaved with another, every packet of each
// source arrives whole and in order, and while both sources always have a
// packet waiting the output alternates between them.
module tb_packet_mux;
  import mexart_pkg::*;

  logic clk = 0, rst = 1;
  pkt_word_t in_word [2];
  logic in_valid [2], in_ready [2];
  pkt_word_t out_word;
  logic out_valid, out_ready;
  int checks = 0, failures = 0;

  packet_mux dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  localparam int NPKT = 40;
  int len [2][NPKT];
  bit busy_phase = 1;     // both sources saturated

  // sources: packet p of source s has len[s][p] words
  for (genvar s = 0; s < 2; s++) begin : g_src
    int p = 0, w = 0;
    bit gap = 0;
    always @(posedge clk) begin
      if (rst) begin
        in_valid[s] <= 0; p = 0; w = 0;
      end else begin
        if (in_valid[s] && in_ready[s]) begin
          w++;
          if (w == len[s][p]) begin w = 0; p++; end
        end
        gap = !busy_phase && ($urandom_range(3) == 0);
        if (p < NPKT && !(in_valid[s] && !in_ready[s]) && !gap) begin
          in_valid[s] <= 1;
          in_word[s].data <= {32'(s), 16'(p), 16'(w)};
          in_word[s].last <= (w == len[s][p] - 1);
        end else if (!(in_valid[s] && !in_ready[s])) begin
          in_valid[s] <= 0;
        end
      end
    end
  end

  int exp_p [2] = '{0, 0};
  int exp_w = 0, cur_src = -1, last_src = -1, alternations = 0, pkts_busy = 0;
  int total = 0;
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    int s, p, w;
    s = int'(out_word.data[63:32]); p = int'(out_word.data[31:16]); w = int'(out_word.data[15:0]);
    if (cur_src < 0) begin
      cur_src = s;
      if (busy_phase && last_src >= 0) begin
        check(s != last_src, "round robin while both wait");
        pkts_busy++;
      end
    end
    check(s == cur_src, "packets interleaved");
    check(p == exp_p[s] && w == exp_w, $sformatf("src%0d got p%0d w%0d exp p%0d w%0d", s, p, w, exp_p[s], exp_w));
    check(out_word.last == (w == len[s][p] - 1), "last flag");
    exp_w++;
    if (out_word.last) begin
      exp_p[s]++; exp_w = 0; last_src = cur_src; cur_src = -1; total++;
    end
  end

  initial begin
    for (int s = 0; s < 2; s++) for (int p = 0; p < NPKT; p++) len[s][p] = 1 + $urandom_range(5);
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    fork
      forever begin @(posedge clk); out_ready <= ($urandom_range(3) != 0); end
      begin
        wait (total >= 20);
        busy_phase = 0;
        wait (total == 2 * NPKT);
      end
    join_any
    disable fork;
    repeat (3) @(posedge clk);
    check(exp_p[0] == NPKT && exp_p[1] == NPKT, "all packets delivered");
    check(pkts_busy > 10, "round robin exercised");
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
