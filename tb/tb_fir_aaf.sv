// tb_fir_aaf -- self-checking testbench of the anti-alias FIR.
// Drives an impulse and checks the response is symmetric, has unity DC gain
// (sum 32768 +- 8) and a main tap of about 2*fc; then checks a DC input
// passes unchanged, a Nyquist-rate input is attenuated by more than 20 dB
// and a tone at fs/20 passes within 5 %.
module tb_fir_aaf;
  import rolses_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic signed [15:0] x, y;
  fir_aaf dut (.clk, .rst, .in_valid, .in_data(x), .out_valid, .out_data(y));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int h [15];
  int sum, peak;
  initial begin
    in_valid = 0; x = 0;
    repeat (3) @(posedge clk); rst <= 0;
    @(posedge clk); in_valid <= 1; x <= 16'sh7FFF;
    for (int k = 0; k < 15; k++) begin
      @(posedge clk); x <= 0;
      #1 h[k] = y;
    end
    sum = 0;
    for (int k = 0; k < 15; k++) sum += h[k];
    for (int k = 0; k < 7; k++) check(h[k] == h[14-k], $sformatf("symmetry %0d: %0d %0d", k, h[k], h[14-k]));
    check(sum > 32767 - 12 && sum < 32767 + 12, $sformatf("DC sum %0d", sum));
    check(h[7] > 25000 && h[7] < 27500, $sformatf("centre tap %0d", h[7]));
    // DC
    for (int i = 0; i < 40; i++) begin @(posedge clk); x <= 16'sd10000; end
    #1 check(y > 9990 && y < 10010, $sformatf("DC out %0d", y));
    // Nyquist
    peak = 0;
    for (int i = 0; i < 60; i++) begin
      @(posedge clk); x <= (i % 2) ? 16'sd16000 : -16'sd16000;
      #1 if (i > 30 && (y > peak || -y > peak)) peak = (y > 0) ? y : -y;
    end
    check(peak < 1600, $sformatf("Nyquist residue %0d", peak));
    // fs/20 tone
    peak = 0;
    for (int i = 0; i < 200; i++) begin
      @(posedge clk); x <= 16'($rtoi(16000.0 * $sin(2.0 * 3.14159265358979 * i / 20.0)));
      #1 if (i > 40 && y > peak) peak = y;
    end
    check(peak > 15200 && peak < 16800, $sformatf("passband tone peak %0d", peak));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
