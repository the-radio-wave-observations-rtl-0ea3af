// tb_met_clock -- self-checking testbench of the mission-elapsed-time clock.
// CLK_HZ is cut to 50 so that a "second" is 50 clocks.  Checks the tick
// period and the own MET count, the lander PPS count, that a lander MET
// sync is taken over only at the next PPS edge, and the latched sub-second
// count at a PPS edge.
module tb_met_clock;
  localparam int HZ = 50;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic pps, sv, sec_tick, pps_edge;
  logic [31:0] sval, met_own, met_lander, pps_sub;
  met_clock #(.CLK_HZ(HZ)) dut (.clk, .rst, .pps, .met_sync_valid(sv), .met_sync_value(sval),
                                .sec_tick, .met_own, .met_lander, .pps_sub, .pps_edge);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int cyc, ticks, last_tick, per_bad, edges;
  always @(posedge clk) if (!rst) begin
    cyc <= cyc + 1;
    if (sec_tick) begin
      ticks <= ticks + 1;
      if (last_tick >= 0 && cyc - last_tick != HZ) per_bad <= per_bad + 1;
      last_tick <= cyc;
    end
    if (pps_edge) edges <= edges + 1;
  end

  task automatic pulse_pps();
    @(negedge clk) pps = 1;
    repeat (5) @(negedge clk);
    pps = 0;
    repeat (5) @(negedge clk);
  endtask

  initial begin
    pps = 0; sv = 0; sval = 0; cyc = 0; ticks = 0; last_tick = -1; per_bad = 0; edges = 0;
    repeat (3) @(posedge clk); rst = 0;
    repeat (HZ * 10 + 5) @(posedge clk);
    check(ticks == 10 && per_bad == 0, $sformatf("ticks %0d period errors %0d", ticks, per_bad));
    check(met_own == 32'd10, $sformatf("met_own %0d", met_own));
    repeat (3) pulse_pps();
    check(met_lander == 32'd3 && edges == 3, $sformatf("met_lander %0d", met_lander));
    // sync: not applied until the next PPS edge
    @(negedge clk) sv = 1; sval = 32'd1000;
    @(negedge clk) sv = 0;
    repeat (20) @(negedge clk);
    check(met_lander == 32'd3, "sync applied before PPS");
    // PPS edge at a known phase of the own second
    wait (sec_tick);
    repeat (17) @(negedge clk);
    pulse_pps();
    check(met_lander == 32'd1000, $sformatf("sync not applied at PPS: %0d", met_lander));
    // sub-second count: pps rises 17 clocks after the tick, plus 2 sync stages
    check(pps_sub >= 17 && pps_sub <= 21, $sformatf("pps_sub %0d", pps_sub));
    pulse_pps();
    check(met_lander == 32'd1001, "PPS advance after sync");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
