// fft_sdf -- streaming 1024-point FFT ("FFT: generate spectral data").
//
// Ten radix-2 SDF stages (fft_stage, spans 512 down to 1) in a row transform
// consecutive frames of NFFT complex samples, one sample per valid, with every
// butterfly scaled by 1/2 so the output is the DFT divided by NFFT in 16-bit
// words.  Results leave in bit-reversed order; this module reports for every
// output sample its natural bin number, and marks the first sample of each
// output frame.  The transform length follows from the 512 bins of
// 58.6 kHz (high band) and 3.7 kHz (low band); the SDF architecture is this
// design's choice.
//
// Timing: the output sample for input frame f, position p, appears NFFT-1
// valid samples after input sample (f, p), plus 10 clocks of registers.
// out_primed goes high once the first complete frame is leaving.
module fft_sdf
  import rolses_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im,
  output logic [9:0]           out_bin,
  output logic                 out_frame_start,
  output logic                 out_primed
);
  localparam int unsigned NST = 10;

  logic                 v  [NST+1];
  logic signed [DW-1:0] re [NST+1];
  logic signed [DW-1:0] im [NST+1];

  assign v[0]  = in_valid;
  assign re[0] = in_re;
  assign im[0] = in_im;

  for (genvar s = 0; s < NST; s++) begin : g_st
    fft_stage #(.L(NFFT >> (s + 1))) u_st (
      .clk, .rst,
      .in_valid (v[s]),   .in_re (re[s]),   .in_im (im[s]),
      .out_valid(v[s+1]), .out_re(re[s+1]), .out_im(im[s+1])
    );
  end

  // output index: sample m of the output stream is position (m+1) mod NFFT
  logic [9:0]  pos;
  logic [10:0] seen;
  always_ff @(posedge clk) begin
    if (rst) begin
      pos  <= 10'd1;
      seen <= '0;
    end else if (v[NST]) begin
      pos <= pos + 1'b1;
      if (!seen[10]) seen <= seen + 1'b1;
    end
  end

  assign out_valid       = v[NST];
  assign out_re          = re[NST];
  assign out_im          = im[NST];
  assign out_bin         = bitrev10(pos);
  assign out_frame_start = (pos == 10'd0);
  assign out_primed      = (seen >= 11'(NFFT - 1));
endmodule
