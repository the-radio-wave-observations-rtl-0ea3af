// tb_sig_stats -- self-checking testbench of the signal statistics.
// Random 14-bit samples with random out-of-range flags; one-second ticks
// every 3000 clocks and a major tick on every eighth.  The testbench keeps
// its own record of the first 1024 samples after each tick and checks the
// per-second min/max/range, the running min/max (and their reset), the
// 8-second total, average and out-of-range count after each major frame.
module tb_sig_stats;
  import rolses_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic adc_valid, adc_or, sec_tick, major_tick, stats_reset;
  logic signed [13:0] adc;
  stats_t st;
  sig_stats dut (.clk, .rst, .adc_valid, .adc_data(adc), .adc_or, .sec_tick, .major_tick,
                 .stats_reset, .stats(st));

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n, mn, mx, rmn, rmx, oor;
  longint tot;
  int sec;
  initial begin
    adc_valid = 0; adc_or = 0; sec_tick = 0; major_tick = 0; stats_reset = 0; adc = 0;
    repeat (3) @(posedge clk); rst <= 0;
    rmn = 8191; rmx = -8192; tot = 0; oor = 0;
    for (sec = 0; sec < 17; sec++) begin
      // tick
      @(posedge clk);
      sec_tick <= 1; major_tick <= (sec % 8 == 0); adc_valid <= 0;
      @(posedge clk);
      sec_tick <= 0; major_tick <= 0;
      #1;
      if (sec > 0) begin
        check(st.min_s == 14'(mn) && st.max_s == 14'(mx) && st.range_s == 15'(mx - mn),
              $sformatf("sec %0d min/max %0d %0d want %0d %0d", sec, st.min_s, st.max_s, mn, mx));
        check(st.min_run == 14'(rmn) && st.max_run == 14'(rmx), $sformatf("running min/max sec %0d", sec));
      end
      if (sec % 8 == 0 && sec > 0) begin
        check(st.total_8s == 32'(tot), $sformatf("total %0d want %0d", st.total_8s, tot));
        check(st.average == 14'(tot >>> 13), $sformatf("average %0d want %0d", st.average, tot >>> 13));
        check(st.oor_8s == 16'(oor), $sformatf("oor %0d want %0d", st.oor_8s, oor));
        tot = 0; oor = 0;
      end
      if (sec == 12) begin
        stats_reset <= 1; @(posedge clk); stats_reset <= 0; rmn = 8191; rmx = -8192;
      end
      n = 0; mn = 8191; mx = -8192;
      for (int i = 0; i < 3000; i++) begin
        int v; bit valid, o;
        v = $signed(14'($urandom)) / ((sec % 3) + 1) + ((sec % 2) ? 500 : -300);
        if (v > 8191) v = 8191;
        if (v < -8192) v = -8192;
        valid = ($urandom % 5) != 0;
        o = ($urandom % 97) == 0;
        @(posedge clk);
        adc_valid <= valid; adc <= 14'(v); adc_or <= o;
        if (valid && n < 1024) begin
          n++;
          if (v < mn) mn = v;
          if (v > mx) mx = v;
          if (v < rmn) rmn = v;
          if (v > rmx) rmx = v;
          tot += v;
          if (o) oor++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
