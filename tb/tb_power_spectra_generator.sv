// tb_power_spectra_generator -- integration of channel power over frames.
//
// Random 8-bit complex channels are fed for several integrations; the
// integration length is changed between (and once in the middle of) an
// integration, which must only take effect at the next integration start.
// Each emitted spectrum is compared with sums computed here; the number of
// spectra, their channel numbers, out_sof and the first-frame timestamp are
// checked too.
module tb_power_spectra_generator;
  import mexart_pkg::*;
  localparam int NI = 2, NCH = 32, SEL = 8;

  logic clk = 0, rst = 1;
  logic [15:0] int_frames;
  logic in_valid = 0, in_sof = 0;
  logic [4:0] in_chan;
  frame_ts_t in_ts;
  logic signed [7:0] in_re [NI], in_im [NI];
  logic out_valid, out_sof;
  logic [4:0] out_chan;
  frame_ts_t out_ts;
  logic [31:0] out_pow [NI];
  logic [31:0] spectra_count;
  int checks = 0, failures = 0;

  power_spectra_generator #(.N_IN(NI), .NCH(NCH), .SEL(SEL)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  longint accm [NI][SEL];
  longint expv [$];
  int expc [$], expf [$];
  bit exps [$];
  int nspec = 0;

  always @(posedge clk) if (!rst && out_valid) begin
    check(expc.size() > 0, "unexpected output");
    if (expc.size() > 0) begin
      int c, f;
      bit s;
      c = expc.pop_front(); f = expf.pop_front(); s = exps.pop_front();
      check(out_chan == 5'(c), "channel");
      check(out_sof == s, "sof");
      check(out_ts.frame == 32'(f), $sformatf("ts frame %0d exp %0d", out_ts.frame, f));
      for (int l = 0; l < NI; l++) begin
        longint e;
        e = expv.pop_front();
        check(out_pow[l] == 32'(e), $sformatf("ch%0d l%0d got %0d exp %0d", c, l, out_pow[l], e));
      end
      if (s) nspec++;
    end
  end

  initial begin
    // integration lengths; the value in force at each integration start
    int lens [5] = '{3, 1, 2, 4, 1};
    int f = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int it = 0; it < 5; it++) begin
      int_frames <= (lens[it] == 1 && it == 4) ? 16'd0 : 16'(lens[it]);   // 0 counts as 1
      for (int k = 0; k < lens[it]; k++) begin
        int first_f;
        if (k == 0) first_f = f;
        for (int c = 0; c < SEL; c++) begin
          in_valid <= 1; in_sof <= (c == 0); in_chan <= 5'(10 + c);
          in_ts <= '{seconds: 0, sample_in_sec: 0, frame: 32'(f)};
          for (int l = 0; l < NI; l++) begin
            int r, i;
            r = int'($urandom_range(254)) - 127; i = int'($urandom_range(254)) - 127;
            in_re[l] <= 8'(r); in_im[l] <= 8'(i);
            accm[l][c] = ((k == 0) ? 0 : accm[l][c]) + r * r + i * i;
            if (k == lens[it] - 1) expv.push_back(accm[l][c]);
          end
          if (k == lens[it] - 1) begin
            expc.push_back(10 + c); expf.push_back(first_f); exps.push_back(c == 0);
          end
          @(posedge clk);
          // a change in mid-integration must not disturb the running one
          if (k == 0 && c == 2 && lens[it] > 1) int_frames <= 16'd7;
        end
        in_valid <= 0;
        repeat (2) @(posedge clk);
        f++;
      end
    end
    repeat (3) @(posedge clk);
    check(nspec == 5, $sformatf("spectra %0d", nspec));
    check(spectra_count == 5, "spectra_count");
    check(expc.size() == 0, "missing outputs");
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
