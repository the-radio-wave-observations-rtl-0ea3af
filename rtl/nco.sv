// nco -- numerically controlled oscillator for the DSP test mode.
//
// A PHASE_W-bit phase accumulator advances by the tuning word (the DSP
// "Test Reg") on every enabled clock; its top 10 bits address a 1024-entry
// sine table computed at elaboration.  In TEST mode the DSP core takes this
// sine in place of the ADC samples.  The tuning-word scale follows the
// operator screen, which pairs 500000 Hz with the word $0044: at 120 MHz
// that is 500 kHz * 2^14 / 120 MHz = 68.3, hence PHASE_W = 14.  Amplitude
// (AMPL/32768 of full scale) is this design's choice.
//
// Interface: en advances the phase; out_data is registered (one clock).
module nco
  import rolses_pkg::*;
#(
  parameter int unsigned PHASE_W = 14,
  parameter int unsigned AMPL    = 16384
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic [15:0]          tuning,
  output logic signed [DW-1:0] out_data
);
  localparam int unsigned LUT_N = 1024;
  logic signed [15:0] lut [LUT_N];
  for (genvar i = 0; i < LUT_N; i++) begin : g_lut
    localparam logic signed [15:0] V = q30_to_q15((sin2pi_q30(longint'(i), longint'(LUT_N)) * longint'(AMPL)) >>> 15);
    assign lut[i] = V;
  end

  logic [PHASE_W-1:0] phase;
  always_ff @(posedge clk) begin
    if (rst) begin
      phase    <= '0;
      out_data <= '0;
    end else if (en) begin
      phase    <= phase + tuning[PHASE_W-1:0];
      out_data <= lut[phase[PHASE_W-1 -: 10]];
    end
  end
endmodule
