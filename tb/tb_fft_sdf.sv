// tb_fft_sdf -- checks the streaming FFT against a direct DFT.
//
// Two streams of random complex frames (N = 64) are fed back to back; every
// output bin of the first frames is compared with a DFT computed here in
// floating point. Output j of a frame must be bin bitrev(j). The latency
// from a frame's first input to its first output is checked too.
module tb_fft_sdf;
  localparam int N = 64, L = 6, NI = 2, IW = 12;
  localparam int W = IW + L + 1;
  localparam int FRAMES = 4;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_sof = 0;
  logic signed [IW-1:0] in_re [NI], in_im [NI];
  logic out_valid, out_sof;
  logic signed [W-1:0] out_re [NI], out_im [NI];
  int checks = 0, failures = 0;

  fft_sdf #(.N_IN(NI), .N(N), .IW(IW)) dut (.*);

  always #5 clk = ~clk;

  int xr [FRAMES][NI][N], xi [FRAMES][NI][N];
  int cyc = 0, sof_in_cyc = -1, sof_out_cyc = -1;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int bitrev(int j);
    int r = 0;
    for (int b = 0; b < L; b++) if (j & (1 << b)) r |= 1 << (L - 1 - b);
    return r;
  endfunction

  // reference bin of frame f, stream l
  function automatic void ref_bin(int f, int l, int k, output real rr, output real ri);
    real pi = 3.14159265358979323846;
    rr = 0; ri = 0;
    for (int n = 0; n < N; n++) begin
      real a = -2.0 * pi * n * k / N;
      rr += xr[f][l][n] * $cos(a) - xi[f][l][n] * $sin(a);
      ri += xr[f][l][n] * $sin(a) + xi[f][l][n] * $cos(a);
    end
  endfunction

  function automatic real fabs(real v); return v < 0 ? -v : v; endfunction

  int ofr = -1, oj = 0;
  always @(posedge clk) if (!rst && out_valid) begin
    if (out_sof) begin ofr++; oj = 0; if (sof_out_cyc < 0) sof_out_cyc = cyc; end
    if (ofr >= 0 && ofr < FRAMES - 1) begin
      for (int l = 0; l < NI; l++) begin
        real rr, ri;
        ref_bin(ofr, l, bitrev(oj), rr, ri);
        checks++;
        if (fabs(rr - out_re[l]) > 16.0 || fabs(ri - out_im[l]) > 16.0) begin
          failures++;
          if (failures < 10) $display("MISMATCH f%0d l%0d bin%0d got %0d,%0d exp %f,%f",
                                      ofr, l, bitrev(oj), out_re[l], out_im[l], rr, ri);
        end
      end
    end
    oj++;
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int l = 0; l < NI; l++)
        for (int n = 0; n < N; n++) begin
          xr[f][l][n] = int'($urandom_range(4000)) - 2000;
          xi[f][l][n] = int'($urandom_range(4000)) - 2000;
        end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        @(posedge clk);
        in_valid <= 1; in_sof <= (n == 0);
        if (f == 0 && n == 0) sof_in_cyc = cyc + 1;
        for (int l = 0; l < NI; l++) begin
          in_re[l] <= IW'(xr[f][l][n]); in_im[l] <= IW'(xi[f][l][n]);
        end
      end
    @(posedge clk) in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (ofr < FRAMES - 2) begin failures++; $display("too few frames out: %0d", ofr + 1); end
    // Latency: N-1 samples in the delay lines plus one register per stage.
    checks++;
    if (sof_out_cyc - sof_in_cyc != N - 1 + L) begin
      failures++; $display("latency %0d expected %0d", sof_out_cyc - sof_in_cyc, N - 1 + L);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
