// pfb -- polyphase filter bank front end of the spectral transform, with the
// half-bin frequency shift.
//
// A critically sampled PFB: the input stream is cut into frames of NFFT
// samples; output sample p of a frame is the weighted sum of the samples at
// position p of the current frame and of the TAPS-1 frames before it, with
// weights from a TAPS*NFFT prototype window (a Hann-windowed sinc, computed at
// elaboration).  The previous frames are kept in TAPS-1 memories of NFFT
// words.  The result is then multiplied by exp(-j*pi*p/NFFT), which moves the
// transform bins by half a bin so that bin k of the following FFT is centred
// at (k + 1/2) * fs / NFFT: 29.3 kHz + k * 58.594 kHz in the high band, as
// the published bin frequencies state.  The FFT length follows from the 512
// bins of 58.6 kHz at 60 MS/s; TAPS and the window are this design's choice.
//
// Interface: in_valid/in_data (real, signed 16), out_valid with out_re/out_im
// (signed 16) two clocks later.  Frames start at the first input after reset.
module pfb
  import rolses_pkg::*;
#(
  parameter int unsigned N    = NFFT,
  parameter int unsigned TAPS = 4
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im
);
  localparam int unsigned LN = $clog2(N);
  localparam int unsigned M  = N * TAPS;

  // prototype tap j (Q15): sinc((j - M/2)/N) * hann(j)
  function automatic logic signed [15:0] proto(int j);
    longint m, s, w;
    m = longint'(j) - longint'(M) / 2;
    if (m == 0) s = 64'sd1 <<< 30;
    else begin
      if (m < 0) m = -m;
      s = ((sin2pi_q30(m, 2 * N) * longint'(N)) <<< 20) / ((PI_Q30 * m) >>> 10);
    end
    w = ((64'sd1 <<< 30) - cos2pi_q30(longint'(j), longint'(M))) >>> 1;
    return q30_to_q15((s * w) >>> 30);
  endfunction

  logic signed [15:0] coef [M];
  for (genvar j = 0; j < M; j++) begin : g_coef
    localparam logic signed [15:0] C = proto(j);
    assign coef[j] = C;
  end

  logic signed [15:0] rot_c [N];
  logic signed [15:0] rot_s [N];
  for (genvar p = 0; p < N; p++) begin : g_rot
    localparam logic signed [15:0] RC = q30_to_q15(cos2pi_q30(p, 2 * N));
    localparam logic signed [15:0] RS = q30_to_q15(sin2pi_q30(p, 2 * N));
    assign rot_c[p] = RC;
    assign rot_s[p] = RS;
  end

  // hist[t][p]: sample at position p, t+1 frames ago
  logic signed [DW-1:0] hist [TAPS-1][N];
  logic [LN-1:0]        pos;
  logic signed [47:0]   acc;

  always_comb begin
    acc = 48'sd16384;
    acc = acc + 48'(in_data) * 48'(coef[(TAPS-1)*N + int'(pos)]);
    for (int t = 0; t < TAPS - 1; t++)
      acc = acc + 48'(hist[t][pos]) * 48'(coef[(TAPS-2-t)*N + int'(pos)]);
  end

  // stage 1: window and sum
  logic                 s1_valid;
  logic signed [DW-1:0] s1_y;
  logic [LN-1:0]        s1_pos;
  always_ff @(posedge clk) begin
    if (rst) begin
      pos      <= '0;
      s1_valid <= 1'b0;
      s1_y     <= '0;
      s1_pos   <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_y   <= sat16(acc >>> 15);
        s1_pos <= pos;
        pos    <= pos + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      hist[0][pos] <= in_data;
      for (int t = 1; t < TAPS - 1; t++) hist[t][pos] <= hist[t-1][pos];
    end
  end

  // stage 2: half-bin shift, y * (cos - j sin)
  logic signed [47:0] pr, pi;
  always_comb begin
    pr =  48'(s1_y) * 48'(rot_c[s1_pos]) + 48'sd16384;
    pi = -48'(s1_y) * 48'(rot_s[s1_pos]) + 48'sd16384;
  end
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= s1_valid;
      if (s1_valid) begin
        out_re <= sat16(pr >>> 15);
        out_im <= sat16(pi >>> 15);
      end
    end
  end
endmodule
