// fir_aaf -- anti-alias low-pass FIR following each down-sampler.
//
// Direct-form FIR with TAPS symmetric coefficients.  The coefficients are a
// Hann-windowed sinc with cut-off CUT_NUM/CUT_DEN of the sample rate, computed
// at elaboration from the integer trigonometry of rolses_pkg and normalised to
// unity DC gain in Q1.15.  The chain description names this block only, so the
// length, window and cut-off are this design's choice.
//
// Interface: in_valid/in_data, out_valid/out_data (signed W).  One output per
// input, one clock of latency; the product sum is rounded and saturated.
module fir_aaf
  import rolses_pkg::*;
#(
  parameter int unsigned TAPS    = 15,
  parameter int unsigned CUT_NUM = 2,
  parameter int unsigned CUT_DEN = 5
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data
);
  // unnormalised tap k (Q30): sin(2 pi fc m)/(pi m) * hann
  function automatic longint raw_tap(int k);
    longint m, s, w;
    m = longint'(k) - longint'(TAPS) / 2;
    if (m == 0) s = (longint'(2 * CUT_NUM) <<< 30) / longint'(CUT_DEN);
    else begin
      if (m < 0) m = -m;
      s = (sin2pi_q30(m * longint'(CUT_NUM), longint'(CUT_DEN)) <<< 20) / ((PI_Q30 * m) >>> 10);
    end
    w = ((64'sd1 <<< 30) - cos2pi_q30(longint'(k) + 1, longint'(TAPS) + 1)) >>> 1;
    return (s * w) >>> 30;
  endfunction

  function automatic logic signed [15:0] tap(int k);
    longint sum;
    sum = 0;
    for (int i = 0; i < int'(TAPS); i++) sum += raw_tap(i);
    return q30_to_q15((raw_tap(k) <<< 30) / sum);
  endfunction

  logic signed [DW-1:0] coef [TAPS];
  for (genvar k = 0; k < TAPS; k++) begin : g_coef
    localparam logic signed [15:0] C = tap(k);
    assign coef[k] = C;
  end

  logic signed [DW-1:0] sr [TAPS];
  logic signed [47:0]   acc;

  always_comb begin
    acc = 48'sd16384;  // rounding
    acc = acc + 48'(in_data) * 48'(coef[0]);
    for (int k = 1; k < TAPS; k++) acc = acc + 48'(sr[k-1]) * 48'(coef[k]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < TAPS; k++) sr[k] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        sr[0] <= in_data;
        for (int k = 1; k < TAPS; k++) sr[k] <= sr[k-1];
        out_data <= sat16(acc >>> 15);
      end
    end
  end
endmodule
