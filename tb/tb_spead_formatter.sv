// tb_spead_formatter -- SPEAD packet layout, back-pressure and whole-group drops.
//
// Frames of channels with random data are pushed in while the output ready
// toggles at random. Every packet is parsed word by word: the SPEAD header,
// the eight items (heap counter, sizes, timestamp, channel info, mode) and the
// payload are compared with the group of CPP input channels it must carry.
// In a second phase ready is held low long enough that the FIFO fills: whole
// groups must then be dropped (drop_count a multiple of CPP, equal to the
// groups missing from the output) and every packet that does leave must still
// hold CPP consecutive channels. A packet must take 9 + CPP*WPE cycles when
// ready stays high.
module tb_spead_formatter;
  import mexart_pkg::*;
  localparam int NI = 4, EW = 16, CPP = 4, DEPTH = 16, NCH = 32, SEL = 16;
  localparam int DW = NI * EW, WPE = DW / 64;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_sof = 0;
  logic [4:0] in_chan;
  frame_ts_t in_ts;
  logic [DW-1:0] in_data;
  pkt_word_t out_word;
  logic out_valid, out_ready;
  logic [31:0] pkt_count, drop_count;
  int checks = 0, failures = 0;

  spead_formatter #(.N_IN(NI), .NCH(NCH), .EW(EW), .CPP(CPP), .DEPTH(DEPTH),
                    .MODE(48'd5), .FIRST_ANT(16'd32)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  // groups as sent: first channel, seconds, offset, data words
  int g_chan [$];
  int g_sec [$], g_off [$];
  logic [DW-1:0] g_data [$];    // CPP entries per group
  int skipped = 0, npkts = 0;
  bit phase2 = 0, timed = 0;

  logic [63:0] pkt [$];
  int cyc = 0, start_cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [63:0] item(int id, longint v);
    return {1'b1, 15'(id), 48'(v)};
  endfunction

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    if (pkt.size() == 0) start_cyc = cyc;
    pkt.push_back(out_word.data);
    if (out_word.last) begin
      int n;
      n = pkt.size();
      check(n == 9 + CPP * WPE, $sformatf("packet length %0d", n));
      if (!phase2 && timed) check(cyc - start_cyc == n - 1, "packet took extra cycles");
      // find the group this packet carries, counting the ones skipped
      while (g_chan.size() > 0 && pkt[7][47:32] != 16'(g_chan[0])) begin
        void'(g_chan.pop_front()); void'(g_sec.pop_front()); void'(g_off.pop_front());
        for (int e = 0; e < CPP; e++) void'(g_data.pop_front());
        skipped++;
      end
      check(g_chan.size() > 0, "packet without a group");
      if (g_chan.size() > 0) begin
        int ch, sec, off;
        ch = g_chan.pop_front(); sec = g_sec.pop_front(); off = g_off.pop_front();
        check(pkt[0] == {8'h53, 8'h04, 8'h02, 8'h06, 16'h0, 16'd8}, "SPEAD header word");
        check(pkt[1] == item(1, npkts), "heap counter");
        check(pkt[2] == item(2, CPP * DW / 8), "heap size");
        check(pkt[3] == item(3, 0), "heap offset");
        check(pkt[4] == item(4, CPP * DW / 8), "payload length");
        check(pkt[5] == item(16'h1600, sec), "seconds");
        check(pkt[6] == item(16'h1601, off), "sample offset");
        check(pkt[7] == {1'b1, 15'h2002, 16'(ch), 16'(CPP), 16'd32}, "channel info");
        check(pkt[8] == item(16'h3300, 5), "mode");
        for (int e = 0; e < CPP; e++) begin
          logic [DW-1:0] d;
          d = g_data.pop_front();
          for (int w = 0; w < WPE; w++)
            check(pkt[9 + e * WPE + w] == d[DW - 1 - 64 * w -: 64], "payload word");
        end
      end
      npkts++;
      pkt.delete();
    end
  end

  task automatic send_frames(int nf, int base, int gap);
    for (int f = 0; f < nf; f++)
      for (int c = 0; c < SEL; c++) begin
        logic [DW-1:0] d;
        d = {$urandom(), $urandom()};
        in_valid <= 1; in_sof <= (c == 0); in_chan <= 5'(8 + c); in_data <= d;
        in_ts <= '{seconds: 32'(base + f), sample_in_sec: 32'(100 * f), frame: 32'(f)};
        if (c % CPP == 0) begin
          g_chan.push_back(8 + c); g_sec.push_back(base + f); g_off.push_back(100 * f);
        end
        g_data.push_back(d);
        @(posedge clk);
        in_valid <= 0;
        repeat (gap) @(posedge clk);
      end
  endtask

  initial begin
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // phase 0: ready always high, timing checked
    fork
      begin timed = 1; send_frames(1, 10, 1); repeat (200) @(posedge clk); timed = 0; end
      forever begin @(posedge clk); out_ready <= 1; end
    join_any
    disable fork;
    // phase 1: random ready, too little pressure to drop
    fork
      begin send_frames(3, 20, 5); repeat (400) @(posedge clk); end
      forever begin @(posedge clk); out_ready <= ($urandom_range(3) != 0); end
    join_any
    disable fork;
    check(drop_count == 0, "no drops expected yet");
    // phase 2: output blocked for a while, FIFO must overflow
    phase2 = 1;
    out_ready <= 0;
    send_frames(3, 40, 1);
    out_ready <= 1;
    repeat (600) @(posedge clk);
    check(drop_count > 0, "overflow exercised");
    check(drop_count % CPP == 0, "drops are whole groups");
    check(drop_count == 32'((skipped + g_chan.size()) * CPP),
          $sformatf("drops %0d vs missing groups %0d", drop_count, skipped + g_chan.size()));
    check(pkt_count == 32'(npkts), "packet counter");
    $display("packets=%0d drops=%0d", npkts, drop_count);
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
