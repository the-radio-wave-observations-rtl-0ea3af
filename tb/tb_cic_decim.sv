// tb_cic_decim -- self-checking testbench of the CIC down-sampler.
// Checks, for R=2 and R=16 (N=3): the DC gain is exactly one, the output
// rate is one per R inputs, an impulse spreads R^N/R of its area over the
// outputs, and R=2 rejects an input alternating at the Nyquist rate.
module tb_cic_decim;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid;
  logic signed [15:0] x;
  logic v2, v16;
  logic signed [15:0] y2, y16;
  cic_decim #(.W(16), .R(2),  .N(3)) dut2  (.clk, .rst, .in_valid, .in_data(x), .out_valid(v2),  .out_data(y2));
  cic_decim #(.W(16), .R(16), .N(3)) dut16 (.clk, .rst, .in_valid, .in_data(x), .out_valid(v16), .out_data(y16));

  int n2, n16;
  longint sum2;
  always_ff @(posedge clk) begin
    if (!rst && v2) begin n2 <= n2 + 1; sum2 <= sum2 + longint'(y2); end
    if (!rst && v16) n16 <= n16 + 1;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; x = 0; n2 = 0; n16 = 0; sum2 = 0;
    repeat (4) @(posedge clk);
    rst <= 0;
    // DC
    for (int i = 0; i < 640; i++) begin
      @(posedge clk); in_valid <= 1; x <= 16'sd12345;
    end
    @(posedge clk); in_valid <= 0;
    @(posedge clk); @(posedge clk);
    check(y2 == 16'sd12345, $sformatf("R=2 DC gain: %0d", y2));
    check(y16 == 16'sd12345, $sformatf("R=16 DC gain: %0d", y16));
    check(n2 == 320, $sformatf("R=2 output count %0d", n2));
    check(n16 == 40, $sformatf("R=16 output count %0d", n16));
    // settle to zero, then impulse of 64 into R=2: outputs sum to 64*4/8 = 32
    for (int i = 0; i < 64; i++) begin @(posedge clk); in_valid <= 1; x <= 0; end
    @(posedge clk); in_valid <= 0;
    @(posedge clk); @(posedge clk);
    sum2 = 0;
    @(posedge clk); in_valid <= 1; x <= 16'sd64;
    for (int i = 0; i < 31; i++) begin @(posedge clk); in_valid <= 1; x <= 0; end
    @(posedge clk); in_valid <= 0;
    repeat (3) @(posedge clk);
    check(sum2 == 32, $sformatf("R=2 impulse area %0d", sum2));
    // Nyquist-rate input is nulled by R=2
    for (int i = 0; i < 200; i++) begin
      @(posedge clk); in_valid <= 1; x <= (i % 2) ? -16'sd8000 : 16'sd8000;
    end
    @(posedge clk); in_valid <= 0;
    repeat (3) @(posedge clk);
    check(y2 >= -16'sd1 && y2 <= 16'sd1, $sformatf("R=2 Nyquist null %0d", y2));
    // gaps in valid do not change the result
    for (int i = 0; i < 400; i++) begin
      @(posedge clk); in_valid <= (i % 3 == 0); x <= -16'sd777;
    end
    @(posedge clk); in_valid <= 0;
    repeat (3) @(posedge clk);
    check(y2 == -16'sd777, $sformatf("R=2 DC with gaps %0d", y2));
    check(y16 == -16'sd777, $sformatf("R=16 DC with gaps %0d", y16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
