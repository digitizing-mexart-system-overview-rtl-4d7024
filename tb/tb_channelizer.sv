// tb_channelizer -- tones through the polyphase filter bank.
//
// Input 0 carries a cosine centred on channel K0, input 1 one centred on
// channel K1 (N = 64, 32 channels). After the filter history has filled, each
// output frame must list channels 0..NCH-1 in order, put its largest power in
// the tone's channel, have the tone channel's magnitude within 10% of the
// value expected from the filter's gain (A*N/2 times the sum of the branch
// coefficients at full scale), and suppress every channel two or more away by
// a factor of 1000 in power. Output frames must carry the timestamps of the
// input frames in order.
module tb_channelizer;
  import mexart_pkg::*;
  localparam int NI = 2, N = 64, NCH = N / 2, TAPS = 4, FRAMES = 10;
  localparam int K0 = 5, K1 = 20, A = 8000;
  localparam int W = 16 + 2 + 6 + 1;

  logic clk = 0, rst = 1, in_valid = 0, in_sof = 0;
  frame_ts_t in_ts;
  logic signed [15:0] in_data [NI];
  logic out_valid, out_sof;
  logic [$clog2(NCH)-1:0] out_chan;
  frame_ts_t out_ts;
  logic signed [W-1:0] out_re [NI], out_im [NI];
  int checks = 0, failures = 0;

  channelizer #(.N_IN(NI), .N(N), .TAPS(TAPS)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", msg); end
  endtask

  real pw [NI][NCH];
  int ofr = -1, ochan = 0, frames_checked = 0;
  real gain;

  always @(posedge clk) if (!rst && out_valid) begin
    if (out_sof) begin
      ofr++;
      ochan = 0;
      check(out_ts.frame == 32'(ofr) && out_ts.seconds == 32'(7 + ofr), "timestamp order");
    end
    check(out_chan == 5'(ochan), $sformatf("channel order %0d vs %0d", out_chan, ochan));
    for (int l = 0; l < NI; l++) pw[l][ochan] = real'(out_re[l]) ** 2 + real'(out_im[l]) ** 2;
    ochan++;
    if (ochan == NCH && ofr >= TAPS) begin
      for (int l = 0; l < NI; l++) begin
        int k, kmax;
        real expm;
        k = (l == 0) ? K0 : K1;
        kmax = 0;
        for (int c = 0; c < NCH; c++) if (pw[l][c] > pw[l][kmax]) kmax = c;
        check(kmax == k, $sformatf("peak of input %0d at %0d, expected %0d", l, kmax, k));
        expm = A * N / 2.0 * gain;
        check($sqrt(pw[l][k]) > 0.9 * expm && $sqrt(pw[l][k]) < 1.1 * expm,
              $sformatf("tone magnitude %f expected %f", $sqrt(pw[l][k]), expm));
        for (int c = 0; c < NCH; c++)
          if (c < k - 1 || c > k + 1) check(pw[l][c] * 1000.0 < pw[l][k],
                                             $sformatf("leakage into channel %0d", c));
      end
      frames_checked++;
    end
  end

  initial begin
    real pi = 3.14159265358979323846;
    // DC gain of one polyphase branch: the sum of its coefficients
    gain = 0;
    for (int t = 0; t < TAPS; t++) begin
      real a;
      int i;
      i = t * N;
      a = (i - TAPS * N / 2.0 + 0.5) / N;
      gain += $sin(pi * a) / (pi * a) * (0.54 - 0.46 * $cos(2.0 * pi * i / (TAPS * N - 1)));
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        int s;
        s = f * N + n;
        in_valid <= 1; in_sof <= (n == 0);
        in_ts <= '{seconds: 32'(7 + f), sample_in_sec: 32'(s), frame: 32'(f)};
        in_data[0] <= 16'($rtoi(A * $cos(2.0 * pi * K0 * s / N)));
        in_data[1] <= 16'($rtoi(A * $cos(2.0 * pi * K1 * s / N)));
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    check(frames_checked == FRAMES - 3 - TAPS, $sformatf("frames checked %0d", frames_checked));
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
