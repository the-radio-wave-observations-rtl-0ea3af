// tb_fft_sdf -- self-checking testbench of the streaming 1024-point FFT.
// Drives three frames of random complex data and one frame holding a tone
// in bin 37; every output is compared with a floating-point DFT scaled by
// 1/1024 (tolerance 4 LSB), the reported bin numbers are checked against the
// order of arrival, and the output latency of 1023 samples is checked.
module tb_fft_sdf;
  localparam int N = 1024;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid, fs, primed;
  logic signed [15:0] xr, xi, yr, yi;
  logic [9:0] bin;
  fft_sdf dut (.clk, .rst, .in_valid, .in_re(xr), .in_im(xi), .out_valid, .out_re(yr),
               .out_im(yi), .out_bin(bin), .out_frame_start(fs), .out_primed(primed));

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ar [5*N], ai [5*N];
  real cr [N], ci [N];
  real ref_re [4][N], ref_im [4][N];
  int nin, nout, bad, first_primed_at;

  initial begin
    for (int k = 0; k < N; k++) begin cr[k] = $cos(2.0*PI*k/N); ci[k] = $sin(2.0*PI*k/N); end
    for (int i = 0; i < 3 * N; i++) begin
      ar[i] = $signed(16'($urandom)) / 2; ai[i] = $signed(16'($urandom)) / 2;
    end
    for (int i = 0; i < N; i++) begin
      ar[3*N + i] = $rtoi(16000.0 * $cos(2.0*PI*37*i/N));
      ai[3*N + i] = $rtoi(16000.0 * $sin(2.0*PI*37*i/N));
    end
    for (int i = 4 * N; i < 5 * N; i++) begin ar[i] = 0; ai[i] = 0; end
    for (int f = 0; f < 4; f++)
      for (int k = 0; k < N; k++) begin
        real sr, si;
        sr = 0; si = 0;
        for (int n = 0; n < N; n++) begin
          int idx;
          idx = (k * n) % N;
          sr += ar[f*N+n] * cr[idx] + ai[f*N+n] * ci[idx];
          si += ai[f*N+n] * cr[idx] - ar[f*N+n] * ci[idx];
        end
        ref_re[f][k] = sr / N; ref_im[f][k] = si / N;
      end
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      int m, f, pos, k;
      m = nout;
      if (m >= N - 1) begin
        f = (m - (N - 1)) / N; pos = (m - (N - 1)) % N;
        k = 0;
        for (int b = 0; b < 10; b++) if (pos & (1 << b)) k |= 1 << (9 - b);
        if (f < 4) begin
          checks++;
          if (bin != 10'(k) || fs != (pos == 0)) begin
            failures++; bad++;
            if (bad < 6) $display("FAIL bin label m=%0d bin=%0d want %0d", m, bin, k);
          end
          checks++;
          if (yr - ref_re[f][k] > 4.0 || ref_re[f][k] - yr > 4.0 ||
              yi - ref_im[f][k] > 4.0 || ref_im[f][k] - yi > 4.0) begin
            failures++; bad++;
            if (bad < 6) $display("FAIL f=%0d k=%0d got %0d,%0d want %f,%f", f, k, yr, yi, ref_re[f][k], ref_im[f][k]);
          end
        end
      end
      if (primed && first_primed_at < 0) first_primed_at = m;
      nout <= nout + 1;
    end
  end

  initial begin
    in_valid = 0; xr = 0; xi = 0; nout = 0; bad = 0; first_primed_at = -1;
    #1;
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < 5 * N; i++) begin
      @(posedge clk); in_valid <= 1; xr <= 16'(ar[i]); xi <= 16'(ai[i]);
      @(posedge clk); in_valid <= 0;
    end
    repeat (30) @(posedge clk);
    checks++; if (first_primed_at != N - 1) begin failures++; $display("FAIL primed at %0d", first_primed_at); end
    checks++; if (nout != 5 * N) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
