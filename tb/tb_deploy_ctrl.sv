// tb_deploy_ctrl -- self-checking testbench of the antenna deployment sequencer.
// One-second ticks every 20 clocks, timeout cut to 10 s.  Fires antenna 2
// and closes its switch 5 s later (deploy time 5, fire line released);
// fires antenna 0 and sends a second command while it burns (refused);
// fires antenna 3 and never closes its switch (timeout after 10 s).
module tb_deploy_ctrl;
  localparam int T = 20;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic fire_cmd, sec_tick, timed_out;
  logic [1:0] fire_ant;
  logic [3:0] switch_n, fire, deployed;
  logic [7:0] deploy_time [4];
  logic [7:0] refused;
  deploy_ctrl #(.TIMEOUT_S(10)) dut (.clk, .rst, .fire_cmd, .fire_ant, .sec_tick, .switch_n,
                                     .fire, .deployed, .deploy_time, .timed_out, .refused);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  int cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    sec_tick <= (cyc % T) == T - 1;
  end
  task automatic cmd(int a);
    @(negedge clk) fire_cmd = 1; fire_ant = 2'(a);
    @(negedge clk) fire_cmd = 0;
  endtask
  task automatic seconds(int n);
    repeat (n) begin @(posedge sec_tick); @(negedge clk); end
  endtask

  initial begin
    cyc = 0; fire_cmd = 0; fire_ant = 0; switch_n = '1;
    repeat (3) @(posedge clk); rst = 0;
    @(posedge sec_tick); @(negedge clk);
    cmd(2);
    check(fire == 4'b0100, $sformatf("fire %b", fire));
    seconds(5);
    repeat (3) @(negedge clk);
    switch_n[2] = 0;
    repeat (4) @(negedge clk);
    check(fire == 4'b0000 && deployed == 4'b0100, "antenna 2 not stopped");
    check(deploy_time[2] == 8'd5, $sformatf("deploy_time %0d", deploy_time[2]));
    cmd(0);
    seconds(1);
    cmd(1);
    check(refused == 8'd1 && fire == 4'b0001, "second command not refused");
    seconds(1);
    switch_n[0] = 0;
    repeat (4) @(negedge clk);
    check(deploy_time[0] == 8'd2 && fire == 0, $sformatf("antenna 0 time %0d", deploy_time[0]));
    cmd(3);
    seconds(9);
    check(fire == 4'b1000 && !timed_out, "timeout too early");
    seconds(2);
    check(fire == 4'b0000 && timed_out && deploy_time[3] == 0, "no timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
