// tb_pfb -- self-checking testbench of the polyphase filter bank.
// The prototype window (Hann-weighted sinc over 4 frames) and the half-bin
// rotation exp(-j*pi*p/N) are recomputed here in floating point; random
// frames are driven and every output of the fifth and later frames is
// compared with the floating-point result (tolerance 3 LSB).
module tb_pfb;
  localparam int N = 1024, T = 4, M = N * T;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic signed [15:0] x, yr, yi;
  pfb dut (.clk, .rst, .in_valid, .in_data(x), .out_valid, .out_re(yr), .out_im(yi));

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real proto(int j);
    real m, s, w;
    m = real'(j - M / 2) / N;
    s = (j == M / 2) ? 1.0 : $sin(PI * m) / (PI * m);
    w = 0.5 - 0.5 * $cos(2.0 * PI * j / M);
    return s * w;
  endfunction

  int xs [6*N];
  int nout, bad;
  initial begin
    for (int i = 0; i < 6 * N; i++) xs[i] = $signed(16'($urandom)) / 4;
  end

  // output checker
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      int f, p;
      real acc, er, ei;
      f = nout / N; p = nout % N;
      if (f >= T - 1) begin
        acc = 0.0;
        for (int t = 0; t < T; t++) acc += proto(t * N + p) * xs[(f - T + 1 + t) * N + p];
        er = acc * $cos(PI * p / N);
        ei = -acc * $sin(PI * p / N);
        checks++;
        if (yr - er > 3.0 || er - yr > 3.0 || yi - ei > 3.0 || ei - yi > 3.0) begin
          failures++; bad++;
          if (bad < 6) $display("FAIL f=%0d p=%0d got %0d,%0d want %f,%f", f, p, yr, yi, er, ei);
        end
      end
      nout <= nout + 1;
    end
  end

  initial begin
    in_valid = 0; x = 0; nout = 0; bad = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < 6 * N; i++) begin
      @(posedge clk); in_valid <= 1; x <= 16'(xs[i]);
      @(posedge clk); in_valid <= 0;
    end
    repeat (5) @(posedge clk);
    checks++; if (nout != 6 * N) begin failures++; $display("FAIL output count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
