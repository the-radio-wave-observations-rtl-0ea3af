// tb_nco -- self-checking testbench of the test-mode oscillator.
// With the tuning word $0044 the phase advances 68/16384 of a turn per
// clock (500 kHz at 120 MHz): checks every output sample against a sine
// computed here from the phase, and counts 136 sign changes in 16384 clocks.
module tb_nco;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en;
  logic [15:0] tuning;
  logic signed [15:0] y, yprev;
  nco dut (.clk, .rst, .en, .tuning, .out_data(y));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int phase, bad, ncross;
  real ref_v;
  initial begin
    en = 0; tuning = 16'h0044; phase = 68; bad = 0; ncross = 0;
    repeat (3) @(posedge clk); rst <= 0;
    @(posedge clk); en <= 1;
    @(posedge clk);
    yprev = 0;
    for (int n = 0; n < 16384; n++) begin
      @(posedge clk); #1;
      // y now holds lut[phase(n)] with phase(n) = n*68 mod 2^14
      ref_v = 16384.0 * $sin(2.0 * 3.14159265358979 * ((phase >> 4) % 1024) / 1024.0);
      if (y - ref_v > 2.0 || ref_v - y > 2.0) begin
        bad++;
        if (bad < 5) $display("mismatch n=%0d y=%0d ref=%f", n, y, ref_v);
      end
      if ((y >= 0) != (yprev >= 0) && n > 0) ncross++;
      yprev = y;
      phase = (phase + 68) % 16384;
    end
    checks++; if (bad != 0) failures++;
    checks++; if (ncross < 135 || ncross > 137) begin failures++; $display("crossings %0d", ncross); end
    // hold: en low freezes the output
    en <= 0; @(posedge clk); @(posedge clk); yprev = y;
    repeat (10) @(posedge clk);
    checks++; if (y != yprev) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
