// dsp_chan -- one of the four identical DSP cores (one per antenna).
//
// Chain: ADC word (or, in TEST mode, the NCO sine) -> CIC down-sample by 2 to
// the 60 MS/s high band -> anti-alias FIR; the high band is down-sampled again
// by 16 to the 3.75 MS/s low band -> anti-alias FIR.  One polyphase filter
// bank and one 1024-point FFT are shared by the two bands: GO HIGH or GO LOW
// selects which band feeds them and starts an integration in the accumulator;
// DUMP HIGH / DUMP LOW turns a band's sums into magnitudes in the histogram
// buffer.  The chain, the band rates, the shared filter bank/FFT, the
// accumulate-then-CORDIC order and the OFF/RUN/TEST modes follow the
// description; filter structures and sizes are this design's choice.
//
// Control (DSP control registers): mode 0 = OFF (core held in reset),
// 2 = RUN, 3 = TEST (NCO), 1 = unused (treated as OFF); test_reg is the NCO
// tuning word; num_fft_high / num_fft_low are the FFTs per integration.
// The ADC word is taken when adc_valid is high (every clock of the 120 MHz
// sample clock in the instrument).
module dsp_chan
  import rolses_pkg::*;
#(
  parameter int unsigned SKIP = 6
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    adc_valid,
  input  logic signed [ADC_W-1:0] adc_data,
  input  dsp_mode_e               mode,
  input  logic [15:0]             test_reg,
  input  logic [15:0]             num_fft_high,
  input  logic [15:0]             num_fft_low,
  input  logic                    go_high,
  input  logic                    go_low,
  input  logic                    dump_high,
  input  logic                    dump_low,
  input  logic [8:0]              hist_addr,
  output logic [MAG_W-1:0]        hist_data,
  output band_e                   hist_band,
  output logic                    hist_ready,
  output logic                    acc_busy,
  output band_e                   acc_band,
  output logic [1:0]              acc_done,
  output logic                    dump_busy
);
  logic core_rst;
  assign core_rst = rst || (mode == MODE_OFF) || (mode == MODE_UNUSED);

  // source select
  logic signed [DW-1:0] nco_out, src;
  logic                 src_valid;
  nco u_nco (.clk, .rst(core_rst), .en(adc_valid), .tuning(test_reg), .out_data(nco_out));
  always_ff @(posedge clk) begin
    if (core_rst) begin
      src       <= '0;
      src_valid <= 1'b0;
    end else begin
      src_valid <= adc_valid;
      src       <= (mode == MODE_NCO) ? nco_out : DW'({adc_data, 2'b00});
    end
  end

  // high band: 120 -> 60 MS/s
  logic                 hd_v, hb_v, ld_v, lb_v;
  logic signed [DW-1:0] hd_d, hb_d, ld_d, lb_d;
  cic_decim #(.W(DW), .R(2),  .N(3)) u_dec_h (.clk, .rst(core_rst),
    .in_valid(src_valid), .in_data(src), .out_valid(hd_v), .out_data(hd_d));
  fir_aaf u_aaf_h (.clk, .rst(core_rst), .in_valid(hd_v), .in_data(hd_d),
    .out_valid(hb_v), .out_data(hb_d));
  // low band: 60 -> 3.75 MS/s
  cic_decim #(.W(DW), .R(16), .N(3)) u_dec_l (.clk, .rst(core_rst),
    .in_valid(hd_v), .in_data(hd_d), .out_valid(ld_v), .out_data(ld_d));
  fir_aaf u_aaf_l (.clk, .rst(core_rst), .in_valid(ld_v), .in_data(ld_d),
    .out_valid(lb_v), .out_data(lb_d));

  // band selection for the shared filter bank / FFT
  band_e sel;
  always_ff @(posedge clk) begin
    if (core_rst)     sel <= BAND_HIGH;
    else if (go_high) sel <= BAND_HIGH;
    else if (go_low)  sel <= BAND_LOW;
  end

  logic                 p_v;
  logic signed [DW-1:0] p_re, p_im;
  pfb u_pfb (.clk, .rst(core_rst),
    .in_valid(sel == BAND_HIGH ? hb_v : lb_v),
    .in_data (sel == BAND_HIGH ? hb_d : lb_d),
    .out_valid(p_v), .out_re(p_re), .out_im(p_im));

  logic                 f_v, f_fs, f_primed;
  logic signed [DW-1:0] f_re, f_im;
  logic [9:0]           f_bin;
  fft_sdf u_fft (.clk, .rst(core_rst), .in_valid(p_v), .in_re(p_re), .in_im(p_im),
    .out_valid(f_v), .out_re(f_re), .out_im(f_im), .out_bin(f_bin),
    .out_frame_start(f_fs), .out_primed(f_primed));

  logic [15:0] frames_done;
  spec_accum #(.SKIP(SKIP)) u_acc (
    .clk, .rst(core_rst),
    .in_valid(f_v && f_primed), .in_re(f_re), .in_im(f_im), .in_bin(f_bin),
    .in_frame_start(f_fs),
    .go(go_high || go_low), .go_band(go_high ? BAND_HIGH : BAND_LOW),
    .num_fft(go_high ? num_fft_high : num_fft_low),
    .dump(dump_high || dump_low), .dump_band(dump_high ? BAND_HIGH : BAND_LOW),
    .hist_addr, .hist_data, .hist_band, .hist_ready,
    .acc_busy, .acc_band, .acc_done, .dump_busy, .frames_done);
endmodule
