// fft_stage -- one radix-2 single-path delay-feedback (SDF) stage of the
// streaming decimation-in-frequency FFT.
//
// The stage works on blocks of 2*L samples.  During the first L samples of a
// block it stores the input in an L-word delay memory and emits what the
// memory held: the differences of the previous block, multiplied by the
// twiddle W_(2L)^j.  During the second L samples it forms the butterfly of
// the stored sample a and the new sample b, emits (a+b)/2 and stores (a-b)/2.
// The halving on every stage keeps the word at 16 bits.  The stage advances
// only on in_valid, so it runs at any sample rate; out_valid is in_valid
// delayed by one clock and output sample m belongs to input sample m-L.
module fft_stage
  import rolses_pkg::*;
#(
  parameter int unsigned L = 512
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im
);
  localparam int unsigned LW = (L <= 1) ? 1 : $clog2(L);

  logic signed [15:0] tw_c [L];
  logic signed [15:0] tw_s [L];
  for (genvar j = 0; j < L; j++) begin : g_tw
    localparam logic signed [15:0] C = q30_to_q15(cos2pi_q30(j, 2 * L));
    localparam logic signed [15:0] S = q30_to_q15(sin2pi_q30(j, 2 * L));
    assign tw_c[j] = C;
    assign tw_s[j] = S;
  end

  logic signed [DW-1:0] mem_re [L];
  logic signed [DW-1:0] mem_im [L];
  logic [LW-1:0]        ptr;
  logic                 second;   // in second half of the block

  logic signed [DW-1:0] a_re, a_im;
  logic signed [DW:0]   sum_re, sum_im, dif_re, dif_im;
  logic signed [47:0]   m_re, m_im;

  always_comb begin
    a_re   = mem_re[ptr];
    a_im   = mem_im[ptr];
    sum_re = (DW+1)'(a_re) + (DW+1)'(in_re);
    sum_im = (DW+1)'(a_im) + (DW+1)'(in_im);
    dif_re = (DW+1)'(a_re) - (DW+1)'(in_re);
    dif_im = (DW+1)'(a_im) - (DW+1)'(in_im);
    // (a_re + j a_im) * (c - j s)
    m_re = 48'(a_re) * 48'(tw_c[ptr]) + 48'(a_im) * 48'(tw_s[ptr]) + 48'sd16384;
    m_im = 48'(a_im) * 48'(tw_c[ptr]) - 48'(a_re) * 48'(tw_s[ptr]) + 48'sd16384;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr       <= '0;
      second    <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (L == 1 || ptr == LW'(L - 1)) begin
          ptr    <= '0;
          second <= ~second;
        end else begin
          ptr <= ptr + 1'b1;
        end
        if (!second) begin
          out_re <= sat16(m_re >>> 15);
          out_im <= sat16(m_im >>> 15);
        end else begin
          out_re <= sum_re[DW:1];
          out_im <= sum_im[DW:1];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!second) begin
        mem_re[ptr] <= in_re;
        mem_im[ptr] <= in_im;
      end else begin
        mem_re[ptr] <= dif_re[DW:1];
        mem_im[ptr] <= dif_im[DW:1];
      end
    end
  end
endmodule
