// tb_frame_sched -- self-checking testbench of the microframe scheduler.
// One-second ticks every 100 clocks and a fine step of 8 clocks.  For each
// microframe the testbench works out, from the matrix and the slot table,
// which action pulses must appear and at which clock after the tick, and
// checks every clock of the second against that.  It runs the default
// matrix, then random matrices, then the scheduler disabled, and checks
// major_tick falls on the tick that ends microframe 7.
module tb_frame_sched;
  import rolses_pkg::*;
  localparam int FS = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic enable, sec_tick, major_tick;
  logic [7:0] matrix [NACT];
  logic [NACT-1:0] action;
  logic [2:0] microframe;
  frame_sched #(.FINE_STEP(FS)) dut (.clk, .rst, .enable, .matrix, .sec_tick, .action,
                                    .microframe, .major_tick);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int mf, bad, npulse;
  task automatic second(bit en);
    logic [NACT-1:0] want;
    bit mt;
    @(negedge clk);
    sec_tick = 1; #1 mt = major_tick;
    checks++; if (mt != (mf == 7)) begin failures++; $display("FAIL major_tick mf=%0d", mf); end
    @(negedge clk); sec_tick = 0;
    mf = (mf + 1) % 8;
    checks++; if (microframe != 3'(mf)) begin failures++; $display("FAIL microframe %0d want %0d", microframe, mf); end
    bad = 0;
    for (int t = 1; t < 100; t++) begin
      // slot s pulse is visible 2 + s*FS clocks after the tick clock
      for (int r = 0; r < NACT; r++)
        want[r] = en && matrix[r][mf] && (t == 2 + int'(ACT_SLOT[r]) * FS);
      if (action != want) begin
        bad++;
        if (bad < 3) $display("FAIL mf %0d t %0d action %b want %b", mf, t, action, want);
      end
      npulse += $countones(action);
      @(negedge clk);
    end
    checks++; if (bad) failures++;
  endtask

  initial begin
    enable = 1; sec_tick = 0; npulse = 0;
    matrix = MATRIX_DEFAULT;
    repeat (3) @(posedge clk); rst = 0;
    mf = 7;
    repeat (16) second(1);
    checks++; if (npulse != 2 * (8 + 2 + 2 + 2 + 2 + 8 + 2 + 1 + 4 + 1 + 0)) begin
      failures++; $display("FAIL default matrix pulse count %0d", npulse); end
    for (int k = 0; k < 4; k++) begin
      for (int r = 0; r < NACT; r++) matrix[r] = 8'($urandom);
      repeat (8) second(1);
    end
    enable = 0; npulse = 0;
    repeat (8) second(0);
    checks++; if (npulse != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
