// tb_pfb_fir -- checks the polyphase FIR against a model built here.
//
// The window (Hamming-weighted sinc over TAPS*N points) is computed again in
// the testbench and quantised the same way; random frames are fed back to
// back and, once TAPS-1 frames of history exist, every output is compared
// with the exact weighted sum of the current and the previous frames at the
// same position. out_sof and the one-cycle latency are checked as well.
module tb_pfb_fir;
  localparam int NI = 2, N = 16, TAPS = 4, SW = 16, CW = 18, OW = SW + 2;
  localparam int FRAMES = 8;

  logic clk = 0, rst = 1, in_valid = 0, in_sof = 0;
  logic signed [SW-1:0] in_data [NI];
  logic out_valid, out_sof;
  logic signed [OW-1:0] out_data [NI];
  int checks = 0, failures = 0;

  pfb_fir #(.N_IN(NI), .N(N), .TAPS(TAPS)) dut (.*);
  always #5 clk = ~clk;

  int h [TAPS*N];
  int x [FRAMES][NI][N];

  initial begin
    real pi = 3.14159265358979323846;
    for (int i = 0; i < TAPS * N; i++) begin
      real a, s, w, v;
      a = (i - TAPS * N / 2.0 + 0.5) / N;
      s = (a == 0.0) ? 1.0 : $sin(pi * a) / (pi * a);
      w = 0.54 - 0.46 * $cos(2.0 * pi * i / (TAPS * N - 1));
      v = s * w * ((1 << (CW - 1)) - 1);
      h[i] = (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    end
  end

  int of = 0, on = 0, in_cyc = -1, out_cyc = -1, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (!rst && out_valid) begin
    if (out_cyc < 0) out_cyc = cyc;
    checks++;
    if (out_sof != (on == 0)) begin failures++; $display("FAIL sof at %0d", on); end
    if (of >= TAPS - 1)
      for (int l = 0; l < NI; l++) begin
        longint acc;
        acc = 0;
        for (int t = 0; t < TAPS; t++) acc += longint'(h[(TAPS-1-t)*N + on]) * x[of-t][l][on];
        acc = (acc + (1 << (CW - 2))) >>> (CW - 1);
        checks++;
        if (out_data[l] != OW'(acc)) begin
          failures++;
          if (failures < 3) begin $display("FAIL f%0d n%0d l%0d got %0d exp %0d", of, on, l, out_data[l], acc); end
        end
      end
    on++;
    if (on == N) begin on = 0; of++; end
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int l = 0; l < NI; l++)
        for (int n = 0; n < N; n++) x[f][l][n] = int'($urandom_range(65534)) - 32767;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        if (f == 0 && n == 0) in_cyc = cyc + 1;
        in_valid <= 1; in_sof <= (n == 0);
        for (int l = 0; l < NI; l++) in_data[l] <= SW'(x[f][l][n]);
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (of != FRAMES) begin failures++; $display("FAIL frames out %0d", of); end
    checks++;
    if (out_cyc - in_cyc != 1) begin failures++; $display("FAIL latency %0d", out_cyc - in_cyc); end
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
