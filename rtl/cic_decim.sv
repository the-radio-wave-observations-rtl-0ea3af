// cic_decim -- filtering down-sampler (the "Down-sample" boxes of the DSP chain).
//
// A cascaded integrator-comb decimator: N integrators run at the input rate,
// every R-th integrator output is passed to N comb sections at the output
// rate.  The gain R^N is removed by an arithmetic right shift, so the output
// word has the scale of the input word.  R must be a power of two.
// In the DSP core it is used twice: R=2 takes the 120 MS/s ADC stream to the
// 60 MS/s high band, R=16 takes the high band on to the 3.75 MS/s low band.
// The rates come from the chain description; the CIC structure and N=3 are
// this design's choice (the description names the function only).
//
// Interface: in_valid/in_data (signed W), out_valid/out_data (signed W).
// out_valid pulses one clock after every R-th accepted input.
module cic_decim #(
  parameter int unsigned W = 16,
  parameter int unsigned R = 2,
  parameter int unsigned N = 3
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_data,
  output logic                out_valid,
  output logic signed [W-1:0] out_data
);
  localparam int unsigned LR = (R <= 1) ? 1 : $clog2(R);
  localparam int unsigned IW = W + N * LR;   // internal width, no overflow

  logic signed [IW-1:0] integ [N];
  logic signed [IW-1:0] dly   [N];
  logic [LR-1:0]        phase;

  // integrators
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) integ[i] <= '0;
      phase <= '0;
    end else if (in_valid) begin
      integ[0] <= integ[0] + IW'(in_data);
      for (int i = 1; i < N; i++) integ[i] <= integ[i] + integ[i-1];
      phase <= phase + 1'b1;
    end
  end

  // combs at the decimated rate
  logic signed [IW-1:0] c_in [N+1];
  always_comb begin
    c_in[0] = integ[N-1];
    for (int i = 0; i < N; i++) c_in[i+1] = c_in[i] - dly[i];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < N; i++) dly[i] <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && phase == LR'(R - 1)) begin
        for (int i = 0; i < N; i++) dly[i] <= c_in[i];
        out_data  <= W'(c_in[N] >>> (N * LR));
        out_valid <= 1'b1;
      end
    end
  end
endmodule
