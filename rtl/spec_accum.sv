// spec_accum -- spectral accumulator, magnitude pass and histogram buffer of
// one DSP core.
//
// GO starts an integration in the selected band: after SKIP frame starts
// (letting the filter bank and FFT refill with the newly selected band) it
// sums num_fft consecutive FFT frames, bin by bin, into that band's
// accumulator memory (512 complex words of 2 x ACC_W bits; the first frame is
// written, the others added).  The accumulator is 32 bits wide, the 16-bit
// FFT word followed by 16 bits of room, so 65535 frames cannot overflow.
// DUMP reads a band's accumulator memory, passes every bin through the
// CORDIC magnitude pipeline and writes the magnitudes into the histogram
// buffer, which telemetry reads through hist_addr/hist_data.
// The accumulator follows the description of a rolling sum over 58592
// (high) or 3662 (low) FFTs with 16 zero bits of headroom, but keeps all 32
// bits of the running sum: the flown unit discarded the upper 16 bits after
// each addition, an error its builders reported, which this design does not
// reproduce.  Summing the complex words before the magnitude follows the
// order of the blocks in the chain (accumulator, then CORDIC).
//
// Timing: accumulation is a two-clock read-modify-write per bin and needs
// valid samples at least two clocks apart for the same memory (true at both
// band rates).  DUMP takes 512 + ITER + 3 clocks; a DUMP of the band being
// integrated is ignored.  hist_data is a registered read (one clock).
module spec_accum
  import rolses_pkg::*;
#(
  parameter int unsigned SKIP = 6,
  parameter int unsigned ITER = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  // FFT stream
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  input  logic [9:0]           in_bin,
  input  logic                 in_frame_start,
  // control
  input  logic                 go,
  input  band_e                go_band,
  input  logic [15:0]          num_fft,
  input  logic                 dump,
  input  band_e                dump_band,
  // histogram buffer
  input  logic [8:0]           hist_addr,
  output logic [MAG_W-1:0]     hist_data,
  output band_e                hist_band,
  output logic                 hist_ready,
  // status
  output logic                 acc_busy,
  output band_e                acc_band,
  output logic [1:0]           acc_done,     // per band: integration complete
  output logic                 dump_busy,
  output logic [15:0]          frames_done
);
  typedef enum logic [1:0] {S_IDLE, S_SKIP, S_ACC} acc_state_e;
  acc_state_e          state;
  logic [3:0]          skip_cnt;
  logic [15:0]         target;
  logic                first_frame;

  // ------------------------------------------------ frame bookkeeping
  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      skip_cnt    <= '0;
      target      <= 16'd1;
      frames_done <= '0;
      first_frame <= 1'b0;
      acc_band    <= BAND_HIGH;
      acc_done    <= '0;
    end else if (go) begin
      state       <= S_SKIP;
      skip_cnt    <= 4'(SKIP);
      target      <= (num_fft == 16'd0) ? 16'd1 : num_fft;
      frames_done <= '0;
      acc_band    <= go_band;
      acc_done[go_band] <= 1'b0;
    end else if (in_valid && in_frame_start) begin
      case (state)
        S_SKIP: begin
          if (skip_cnt <= 4'd1) begin
            state       <= S_ACC;
            frames_done <= 16'd1;
            first_frame <= 1'b1;
          end else begin
            skip_cnt <= skip_cnt - 1'b1;
          end
        end
        S_ACC: begin
          if (frames_done == target) begin
            state              <= S_IDLE;
            acc_done[acc_band] <= 1'b1;
          end else begin
            frames_done <= frames_done + 1'b1;
            first_frame <= 1'b0;
          end
        end
        default: ;
      endcase
    end
  end
  assign acc_busy = (state != S_IDLE);

  // sample belongs to the integration once the state has been updated:
  // decide with the same conditions, combinationally
  logic take, take_first;
  always_comb begin
    take       = 1'b0;
    take_first = first_frame;
    if (in_valid && !go && in_bin < 10'd512) begin
      if (in_frame_start) begin
        if (state == S_SKIP && skip_cnt <= 4'd1) begin
          take = 1'b1; take_first = 1'b1;
        end else if (state == S_ACC && frames_done != target) begin
          take = 1'b1; take_first = 1'b0;
        end
      end else begin
        take = (state == S_ACC);
      end
    end
  end

  // ------------------------------------------------ accumulator memories
  logic [2*ACC_W-1:0] mem_h [NBINS];
  logic [2*ACC_W-1:0] mem_l [NBINS];
  logic [2*ACC_W-1:0] rd_h, rd_l;
  logic [8:0]         ra_h, ra_l;

  // dump sequencing
  logic        d_active, d_issue_v;
  band_e       d_band;
  logic [9:0]  d_addr;
  logic [8:0]  d_issue_addr;
  logic [9:0]  d_outs;

  // accumulation pipeline stage A -> B
  logic                a_v, a_first;
  band_e               a_band;
  logic [8:0]          a_bin;
  logic signed [DW-1:0] a_re, a_im;

  always_comb begin
    ra_h = (d_active && d_band == BAND_HIGH) ? d_addr[8:0] : in_bin[8:0];
    ra_l = (d_active && d_band == BAND_LOW)  ? d_addr[8:0] : in_bin[8:0];
  end

  always_ff @(posedge clk) begin
    rd_h <= mem_h[ra_h];
    rd_l <= mem_l[ra_l];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      a_v <= 1'b0;
    end else begin
      a_v <= take && !(d_active && d_band == acc_band);
    end
    a_first <= take_first;
    a_band  <= acc_band;
    a_bin   <= in_bin[8:0];
    a_re    <= in_re;
    a_im    <= in_im;
  end

  logic [2*ACC_W-1:0] old_w, new_w;
  logic signed [ACC_W-1:0] sum_re, sum_im;
  always_comb begin
    old_w  = (a_band == BAND_HIGH) ? rd_h : rd_l;
    sum_re = ACC_W'(a_re) + (a_first ? '0 : $signed(old_w[2*ACC_W-1:ACC_W]));
    sum_im = ACC_W'(a_im) + (a_first ? '0 : $signed(old_w[ACC_W-1:0]));
    new_w  = {sum_re, sum_im};
  end

  always_ff @(posedge clk) begin
    if (a_v && a_band == BAND_HIGH) mem_h[a_bin] <= new_w;
    if (a_v && a_band == BAND_LOW)  mem_l[a_bin] <= new_w;
  end

  // ------------------------------------------------ dump through CORDIC
  logic             c_valid;
  logic [MAG_W-1:0] c_mag;
  logic [8:0]       c_tag;
  logic [2*ACC_W-1:0] d_word;
  assign d_word = (d_band == BAND_HIGH) ? rd_h : rd_l;

  always_ff @(posedge clk) begin
    if (rst) begin
      d_active     <= 1'b0;
      d_issue_v    <= 1'b0;
      d_addr       <= '0;
      d_issue_addr <= '0;
      d_band       <= BAND_HIGH;
      d_outs       <= '0;
      dump_busy    <= 1'b0;
      hist_ready   <= 1'b0;
      hist_band    <= BAND_HIGH;
    end else begin
      d_issue_v    <= d_active;
      d_issue_addr <= d_addr[8:0];
      if (dump && !dump_busy && !(acc_busy && acc_band == dump_band)) begin
        d_active   <= 1'b1;
        d_addr     <= '0;
        d_band     <= dump_band;
        d_outs     <= '0;
        dump_busy  <= 1'b1;
        hist_ready <= 1'b0;
      end else if (d_active) begin
        if (d_addr == 10'(NBINS - 1)) d_active <= 1'b0;
        d_addr <= d_addr + 1'b1;
      end
      if (c_valid) begin
        d_outs <= d_outs + 1'b1;
        if (d_outs == 10'(NBINS - 1)) begin
          dump_busy  <= 1'b0;
          hist_ready <= 1'b1;
          hist_band  <= d_band;
        end
      end
    end
  end

  cordic_mag #(.IW(MAG_W), .ITER(ITER), .TAG_W(9)) u_cordic (
    .clk, .rst,
    .in_valid (d_issue_v),
    .in_re    ($signed(d_word[2*ACC_W-1:ACC_W])),
    .in_im    ($signed(d_word[ACC_W-1:0])),
    .in_tag   (d_issue_addr),
    .out_valid(c_valid),
    .out_mag  (c_mag),
    .out_tag  (c_tag)
  );

  logic [MAG_W-1:0] hist [NBINS];
  always_ff @(posedge clk) begin
    if (c_valid) hist[c_tag] <= c_mag;
    hist_data <= hist[hist_addr];
  end
endmodule
