// frame_sched -- major-frame / microframe scheduler driven by the command
// matrix.
//
// The 8 s major frame is made of eight 1 s microframes.  At every second tick
// the microframe number advances (0..7; the first tick after reset starts
// microframe 0).  Each of the 11 rows of the command matrix holds one bit per
// microframe; when the bit of the current microframe is set the row's action
// is pulsed once, at a fixed offset in that microframe: slot 0 (HK ADC,
// DUMP, spare) right at the tick, slot 1 (GO, CAPTURE) FINE_STEP clocks
// later, slot 2 (telemetry) 2*FINE_STEP clocks later.  So a dump always
// reads the previous integration before a new GO in the same microframe
// starts, and telemetry sends what the dump produced.  The matrix and the
// 8 x 1 s frame follow the description; the slot order and FINE_STEP are
// this design's choice ("fine timing is controlled by the control logic").
//
// Interface: matrix[row][microframe], sec_tick in, action[row] one-clock
// pulses out, microframe number, major_tick (the sec_tick that starts
// microframe 0, combinational).
module frame_sched
  import rolses_pkg::*;
#(
  parameter int unsigned FINE_STEP = 4096
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             enable,
  input  logic [7:0]       matrix [NACT],
  input  logic             sec_tick,
  output logic [NACT-1:0]  action,
  output logic [2:0]       microframe,
  output logic             major_tick
);
  localparam int unsigned FW = $clog2(2 * FINE_STEP + 1);
  logic [FW-1:0] fine;
  logic          running;

  always_ff @(posedge clk) begin
    if (rst) begin
      microframe <= 3'd7;
      fine       <= '0;
      running    <= 1'b0;
    end else begin
      if (sec_tick) begin
        microframe <= microframe + 1'b1;
        fine       <= '0;
        running    <= enable;
      end else if (running) begin
        if (fine == FW'(2 * FINE_STEP)) running <= 1'b0;
        else fine <= fine + 1'b1;
      end
    end
  end

  assign major_tick = sec_tick && (microframe == 3'd7);

  always_ff @(posedge clk) begin
    if (rst) begin
      action <= '0;
    end else begin
      for (int r = 0; r < NACT; r++)
        action[r] <= running && matrix[r][microframe] &&
                     (fine == FW'(int'(ACT_SLOT[r]) * FINE_STEP));
    end
  end
endmodule
