// tb_mexart_fpga_top -- end-to-end test of one FPGA at reduced size.
//
// Drives the whole FPGA design the way the host and the analog chain would:
// a PPS every P cycles, one tone per input placed in a chosen channel, and
// register writes to set the epoch, arm the synchronisation, place the
// channel window, set the requantisation shift, the spectra integration
// length and the RMS window, and trigger a snapshot. Every packet on the
// Ethernet output is parsed. Checked end to end:
//  - channelised packets: the SPEAD header, contiguous channel groups inside
//    the window, the tone of each input in its own channel and at least
//    30 dB below it two or more channels away (after the filter has filled);
//  - spectra packets: the tone channel holds the largest power of its input;
//  - registers: RMS of every input close to A/sqrt(2), snapshot samples equal
//    to the samples that were driven at the snapshot's timestamp;
//  - timestamps: seconds from the epoch, offsets a multiple of the frame;
// and it counts how often each mechanism happened (PPS sync, second
// roll-over, requantisation saturation, packet drops under back-pressure,
// switching between the two packet streams, completed spectra, snapshot,
// RMS update); one that never happened is a failure.
module tb_mexart_fpga_top;
  import mexart_pkg::*;
  // reduced size: 4 inputs, 64-sample frames, 16 of 32 channels kept
  localparam int NI = 4, FRAME = 64, SEL = 16, CPP = 8;
  localparam int P = 1000, EPOCH = 5000, CH0 = 4, SHIFT = 9, INTF = 4, A = 2000;
  localparam int RUN1 = 2000, BLOCK = 600, RUN2 = 2500, WATCHDOG = 20000;
  localparam int NCH = FRAME / 2;
  localparam int WPE_D = NI * 16 / 64, WPE_S = NI * 32 / 64;

  logic clk = 0, rst = 1, pps = 0;
  logic adc_valid = 0;
  logic signed [15:0] adc_data [NI];
  logic reg_wr = 0, reg_rd = 0;
  logic [15:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic reg_rd_valid;
  pkt_word_t eth_word;
  logic eth_valid, eth_ready = 1;
  int checks = 0, failures = 0;

  mexart_fpga_top #(.N_IN(NI), .FRAME(FRAME), .SEL(SEL), .CPP_DATA(CPP), .CPP_SPEC(CPP), .FIFO_D(32), .SNAP_D(16)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  // ---- stimulus: PPS and tones ----
  int cyc = 0;
  longint sample = 0;
  real pi = 3.14159265358979323846;
  function automatic int tone_ch(int l); return CH0 + 1 + (l * (SEL - 3)) / NI; endfunction
  function automatic int amp(int l); return (l == NI - 1) ? 30000 : A; endfunction
  function automatic int adc_value(longint s, int l);
    return $rtoi(amp(l) * $cos(2.0 * pi * tone_ch(l) * real'(s % FRAME) / FRAME));
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    pps <= (cyc % P) < 4;
    if (!rst) begin
      adc_valid <= 1;
      for (int l = 0; l < NI; l++) adc_data[l] <= 16'(adc_value(sample, l));
      sample <= sample + 1;
    end
  end

  // ---- register access ----
  task automatic wr(int a, int d);
    @(posedge clk); reg_wr <= 1; reg_addr <= 16'(a); reg_wdata <= 32'(d);
    @(posedge clk); reg_wr <= 0;
  endtask
  task automatic rd(int a, output logic [31:0] d);
    @(posedge clk); reg_rd <= 1; reg_addr <= 16'(a);
    @(posedge clk); reg_rd <= 0;
    #1 d = reg_rdata;
  endtask

  // ---- packet parser ----
  logic [63:0] pkt [$];
  int n_data = 0, n_spec = 0, n_switch = 0, last_mode = 0, tone_hits = 0;
  int spec_peaks = 0;
  bit skip_warmup;

  always @(posedge clk) if (!rst && eth_valid && eth_ready) begin
    pkt.push_back(eth_word.data);
    if (eth_word.last) begin
      int mode, ch, cpp, wpe;
      longint secs, off, abs_s;
      mode = int'(pkt[8][47:0]);
      ch   = int'(pkt[7][47:32]);
      cpp  = int'(pkt[7][31:16]);
      secs = longint'(pkt[5][47:0]);
      off  = longint'(pkt[6][47:0]);
      wpe  = (mode == 1) ? WPE_D : WPE_S;
      check(pkt[0] == {8'h53, 8'h04, 8'h02, 8'h06, 16'h0, 16'd8}, "SPEAD header");
      check(pkt.size() == 9 + cpp * wpe, "packet length");
      check(ch >= CH0 && ch + cpp <= CH0 + SEL && (ch - CH0) % cpp == 0, $sformatf("channel group %0d", ch));
      abs_s = (secs - EPOCH) * P + off;
      check(secs >= EPOCH && abs_s % FRAME == 0 && off < P, "timestamp fields");
      skip_warmup = abs_s < 6 * FRAME;
      if (last_mode != 0 && mode != last_mode) n_switch++;
      last_mode = mode;
      if (mode == 1) begin
        n_data++;
        if (!skip_warmup)
          for (int l = 0; l < NI - 1; l++) begin
            real pk, pc;
            int k;
            k = tone_ch(l);
            for (int c = 0; c < cpp; c++) begin
              logic [63:0] w;
              logic signed [7:0] re, im;
              int pos;
              pos = 9 + (c * NI + l) * 16 / 64;
              w = pkt[pos];
              {re, im} = w[63 - ((c * NI + l) * 16) % 64 -: 16];
              pc = real'(re) ** 2 + real'(im) ** 2;
              if (ch + c == k) begin
                check(pc > 30.0 * 30.0, $sformatf("tone of input %0d too weak: %f", l, pc));
                tone_hits++;
              end else if (ch + c < k - 1 || ch + c > k + 1)
                check(pc * 1000.0 < real'(A) * A * FRAME * FRAME / 4.0 / real'(1 << (2 * SHIFT)),
                      $sformatf("leakage input %0d ch %0d: %f", l, ch + c, pc));
            end
          end
      end else begin
        check(mode == 2, "mode item");
        n_spec++;
        if (abs_s >= 6 * FRAME)
          for (int l = 0; l < NI - 1; l++)
            for (int c = 0; c < cpp; c++)
              if (ch + c == tone_ch(l)) begin
                logic [31:0] pt, po;
                pt = pkt[9 + (c * NI + l) * 32 / 64][63 - ((c * NI + l) * 32) % 64 -: 32];
                for (int c2 = 0; c2 < cpp; c2++) if (c2 < c - 1 || c2 > c + 1) begin
                  po = pkt[9 + (c2 * NI + l) * 32 / 64][63 - ((c2 * NI + l) * 32) % 64 -: 32];
                  check(pt > 100 * po, "spectra peak");
                end
                spec_peaks++;
              end
      end
      pkt.delete();
    end
  end

  initial begin
    logic [31:0] d;
    int drops;
    repeat (4) @(posedge clk);
    rst <= 0;
    wr(2, EPOCH);
    wr(3, CH0);
    wr(4, SHIFT);
    wr(5, INTF);
    wr(6, 8);
    wr(1, 1);                              // arm: sync on the next PPS
    rd(7, d);  check(d[0] == 0, "not synced before the PPS");
    wait (dut.synced);
    // run, then block the Ethernet output for a while to force drops
    repeat (RUN1) @(posedge clk);
    wr(1, 2);                              // snapshot trigger
    eth_ready <= 0;
    repeat (BLOCK) @(posedge clk);
    eth_ready <= 1;
    repeat (RUN2) @(posedge clk);
    // snapshot: the stored samples must be consecutive driven samples that
    // start on a frame boundary (the tones repeat every frame, so the phase
    // within the frame identifies them)
    begin
      int snap [8][NI];
      int found;
      rd(7, d);  check(d[1] == 1, "snapshot done");
      for (int s = 0; s < 8; s++)
        for (int l = 0; l < NI; l++) begin
          rd(16'h4000 + s * NI + l, d);
          snap[s][l] = int'($signed(d[15:0]));
        end
      found = 0;
      for (int b = 0; b < FRAME; b++) begin
        bit ok;
        ok = 1;
        for (int s = 0; s < 8; s++)
          for (int l = 0; l < NI; l++) if (snap[s][l] != adc_value(b + s, l)) ok = 0;
        if (ok) found++;
      end
      check(found > 0, "snapshot holds consecutive driven samples");
      begin
        logic [31:0] ts_sec, ts_off;
        rd(16'h30, ts_sec);
        rd(16'h31, ts_off);
        check(ts_sec >= EPOCH && ((longint'(ts_sec) - EPOCH) * P + longint'(ts_off)) % FRAME == 0,
              $sformatf("snapshot timestamp %0d.%0d on a frame start", ts_sec, ts_off));
      end
    end
    // RMS of the tones
    for (int l = 0; l < NI; l++) begin
      rd(16 + l, d);
      check(d > 32'($rtoi(amp(l) / 1.4142 * 0.97)) && d < 32'($rtoi(amp(l) / 1.4142 * 1.03)),
            $sformatf("RMS input %0d = %0d", l, d));
    end
    // mechanisms
    rd(7, d);  check(d[0] == 1, "synced");
    rd(8, d);  check(d > 0, "PPS roll-over never happened");        $display("pps edges     %0d", d);
    rd(9, d);  check(d > 0, "saturation never happened");           $display("saturations   %0d", d);
    rd(10, d); check(d > 0, "no channelised packets");              $display("data packets  %0d", d);
    rd(11, d); drops = int'(d);
    rd(13, d); drops += int'(d);
    check(drops > 0, "packet drop never happened");                 $display("dropped chans %0d", drops);
    rd(12, d); check(d > 0, "no spectra packets");                  $display("spectra pkts  %0d", d);
    rd(14, d); check(d > 1, "spectra integration not completed");   $display("spectra       %0d", d);
    rd(15, d); check(d > 0, "RMS window never completed");          $display("rms windows   %0d", d);
    check(n_switch > 0, "packet streams never alternated");         $display("switches      %0d", n_switch);
    check(tone_hits > 0, "tone never checked");                     $display("tone hits     %0d", tone_hits);
    check(spec_peaks > 0, "spectra peak never checked");            $display("spectra peaks %0d", spec_peaks);
    check(n_data > 0 && n_spec > 0, "both packet kinds parsed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
