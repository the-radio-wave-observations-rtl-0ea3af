// tb_raw_capture -- self-checking testbench of the raw waveform memory.
// Captures DEPTH samples of a known stream (with gaps in adc_valid), checks
// busy/done and the number of clocks the capture takes, reads all words back,
// then captures again and checks the memory now holds the new stream.
module tb_raw_capture;
  localparam int D = 1024;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic adc_valid, capture, busy, done;
  logic signed [13:0] adc, rd;
  logic [9:0] ra;
  raw_capture dut (.clk, .rst, .adc_valid, .adc_data(adc), .capture, .rd_addr(ra), .rd_data(rd),
                   .busy, .done);
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cnt, k, bad, t0, t1;
  int seen [$];
  always @(posedge clk) begin
    cnt <= cnt + 1;
    adc_valid <= (cnt % 4) != 3;
    adc <= 14'(cnt * 7 + k);
  end

  task automatic run(int kk);
    k = kk;
    seen.delete();
    @(posedge clk); capture <= 1; @(posedge clk); capture <= 0; t0 = cnt;
    #1 checks++; if (!busy || done) failures++;
    while (busy) begin
      @(negedge clk);
      if (busy && adc_valid) seen.push_back(adc);
      @(posedge clk); #1;
    end
    t1 = cnt;
    checks++; if (!done) failures++;
    // 3 of 4 clocks carry a sample
    checks++; if (t1 - t0 < D * 4 / 3 - 3 || t1 - t0 > D * 4 / 3 + 3) begin failures++; $display("FAIL capture time %0d", t1 - t0); end
    bad = 0;
    for (int a = 0; a < D; a++) begin
      ra <= 10'(a); @(posedge clk); @(posedge clk); #1;
      if (rd != 14'(seen[a])) begin bad++; if (bad < 4) $display("FAIL addr %0d got %0d want %0d", a, rd, seen[a]); end
    end
    checks++; if (bad != 0) failures++;
  endtask

  initial begin
    cnt = 0; k = 0; capture = 0; ra = 0;
    repeat (3) @(posedge clk); rst <= 0;
    repeat (5) @(posedge clk);
    run(0);
    run(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
