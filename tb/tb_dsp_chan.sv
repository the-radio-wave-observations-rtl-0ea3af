// tb_dsp_chan -- self-checking testbench of one DSP core.
// The accumulator sums complex FFT words, so test tones are chosen with a
// whole number of cycles per 1024-sample frame (otherwise their phase turns
// from frame to frame and the sum partly cancels).
// 1. TEST mode, high band: the NCO tone of tuning word 800 (5.859 MHz, 100
//    cycles per frame) lies on the edge between bins 99 and 100 (bin k is
//    centred at (k + 0.5) * 58.594 kHz); the peak must be one of them and at
//    least 30 times the median bin; the integration of 4 FFTs must end
//    (SKIP + 4) frames of 1024 high-band samples (2048 clocks each) after GO.
// 2. TEST mode, low band: tuning word 10 (73.2 kHz) lies on the edge
//    between bins 19 and 20 (3.662 kHz bins): the peak must be one of them.
// 3. RUN mode, high band, a 17.0 MHz sine driven on the ADC input: peak
//    in bin 289 or 290 (17.0 MHz / 58.594 kHz - 0.5 = 289.6).
// 4. OFF mode holds the core in reset: GO is ignored.
module tb_dsp_chan;
  import rolses_pkg::*;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [13:0] adc;
  dsp_mode_e mode;
  logic [15:0] test_reg, nhi, nlo;
  logic go_high, go_low, dump_high, dump_low, hist_ready, acc_busy, dump_busy;
  logic [8:0] hist_addr;
  logic [31:0] hist_data;
  band_e hist_band, acc_band;
  logic [1:0] acc_done;

  dsp_chan dut (.clk, .rst, .adc_valid(1'b1), .adc_data(adc), .mode, .test_reg,
    .num_fft_high(nhi), .num_fft_low(nlo), .go_high, .go_low, .dump_high, .dump_low,
    .hist_addr, .hist_data, .hist_band, .hist_ready, .acc_busy, .acc_band, .acc_done, .dump_busy);

  initial begin
    #200000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc;
  real adc_f;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    adc <= 14'($rtoi(6000.0 * $sin(2.0 * PI * adc_f * real'(cyc) / 120.0e6)));
  end

  int peak_bin;
  longint peak_val, median;
  task automatic integrate(bit high, output longint took);
    longint t0;
    @(posedge clk);
    if (high) go_high <= 1; else go_low <= 1;
    t0 = cyc;
    @(posedge clk); go_high <= 0; go_low <= 0;
    @(posedge clk);
    wait (acc_done[high ? 0 : 1]);
    took = cyc - t0;
    @(posedge clk);
    if (high) dump_high <= 1; else dump_low <= 1;
    @(posedge clk); dump_high <= 0; dump_low <= 0;
    @(posedge clk);
    wait (hist_ready);
    begin
      longint v [512];
      longint tmp;
      peak_val = -1; peak_bin = -1;
      for (int k = 0; k < 512; k++) begin
        hist_addr <= 9'(k); @(posedge clk); @(posedge clk); #1;
        v[k] = longint'(hist_data);
        if (v[k] > peak_val) begin peak_val = v[k]; peak_bin = k; end
      end
      // median by partial selection sort
      for (int i = 0; i <= 256; i++)
        for (int j = i + 1; j < 512; j++)
          if (v[j] < v[i]) begin tmp = v[i]; v[i] = v[j]; v[j] = tmp; end
      median = v[256];
    end
  endtask

  longint took;
  initial begin
    cyc = 0; adc_f = 0.0; mode = MODE_NCO; test_reg = 16'd800; nhi = 16'd4; nlo = 16'd2;
    go_high = 0; go_low = 0; dump_high = 0; dump_low = 0; hist_addr = 0;
    repeat (4) @(posedge clk); rst <= 0;
    repeat (5000) @(posedge clk);
    // 1. NCO, high band
    integrate(1'b1, took);
    $display("high NCO: peak bin %0d value %0d median %0d, took %0d clocks", peak_bin, peak_val, median, took);
    check(peak_bin == 99 || peak_bin == 100, $sformatf("high-band NCO peak bin %0d", peak_bin));
    check(peak_val > 30 * median, "high-band NCO peak above floor");
    check(took >= 2048 * (6 + 4 - 1) && took <= 2048 * (6 + 4 + 1), $sformatf("integration time %0d", took));
    check(hist_band == BAND_HIGH, "hist band high");
    // 2. NCO, low band
    test_reg = 16'd10;
    integrate(1'b0, took);
    $display("low NCO: peak bin %0d value %0d median %0d, took %0d clocks", peak_bin, peak_val, median, took);
    check(peak_bin == 19 || peak_bin == 20, $sformatf("low-band NCO peak bin %0d", peak_bin));
    check(peak_val > 30 * median, "low-band NCO peak above floor");
    check(took >= 32768 * (6 + 2 - 1) && took <= 32768 * (6 + 2 + 1), $sformatf("low integration time %0d", took));
    check(hist_band == BAND_LOW, "hist band low");
    // 3. RUN mode, ADC tone at 17.0 MHz
    mode = MODE_RUN; adc_f = 17.0e6;
    integrate(1'b1, took);
    $display("high ADC: peak bin %0d value %0d median %0d", peak_bin, peak_val, median);
    check(peak_bin == 289 || peak_bin == 290, $sformatf("ADC tone peak bin %0d", peak_bin));
    check(peak_val > 30 * median, "ADC tone above floor");
    // 4. OFF
    mode = MODE_OFF;
    repeat (10) @(posedge clk);
    go_high <= 1; @(posedge clk); go_high <= 0;
    repeat (10) @(posedge clk);
    check(!acc_busy && acc_done == 2'b00, "OFF mode holds the core in reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
