// rolses_top -- digital unit of the ROLSES main electronics box.
//
// Four ADC streams (antennas A..D, 14 bits at 120 MS/s) each feed a DSP core
// (dsp_chan), a signal-statistics unit (sig_stats) and a raw waveform memory
// (raw_capture).  The time base (met_clock) gives the one-second tick and
// both MET counters; the scheduler (frame_sched) runs the 8 s major frame
// and fires the actions of the command matrix: HK ADC conversion, GO and
// DUMP of the low and high bands of all four cores, raw capture and the
// four telemetry requests.  Commands arrive on the engineering bus
// (uart_rx -> cmd_decoder, acknowledged through uart_tx); packets leave on
// the science bus (tlm_ctrl -> uart_tx).  The deployment sequencer fires
// the frangibolts one antenna at a time.  Analog parts (antennas, pre-amps,
// analog units and ADCs, housekeeping ADC, power converter) are outside:
// their signals are ports.  Everything runs on one clock, the 120 MHz sample
// clock, which also serves as the instrument's crystal time base.
//
// Timing: reset is synchronous and active high.  The first one-second tick
// comes CLK_HZ clocks after reset and starts microframe 0; scheduled actions
// follow it by 2 + slot * FINE_STEP clocks.  The block split, the four
// identical cores, the 8 s frame, the matrix, both buses at 115.2 kbit/s
// and the PPS/MET pair follow the published description.  The register map,
// the command and packet formats and the fine slots are this design's own.
// Several status signals of the blocks (command and error counts, deployment
// state and timing, PPS sub-second latch, busy flags, inhibited packets) are
// kept visible in the hierarchy but go into no packet: the description does
// not say where such values are reported, so they are left unused here.
module rolses_top
  import rolses_pkg::*;
#(
  parameter int unsigned CLK_HZ    = 120_000_000,
  parameter int unsigned BAUD_DIV  = 1042,
  parameter int unsigned FINE_STEP = 4096,
  parameter int unsigned RAW_DEPTH = 1024,
  parameter int unsigned NHK       = 8
) (
  input  logic                    clk,
  input  logic                    rst,
  // analog units: ADC words and out-of-range flags
  input  logic signed [ADC_W-1:0] adc_data [NCHAN],
  input  logic [NCHAN-1:0]        adc_or,
  // lander interface
  input  logic                    pps,
  input  logic                    eng_rxd,
  output logic                    eng_txd,
  output logic                    sci_txd,
  // housekeeping ADC
  output logic                    hk_adc_start,
  input  logic [15:0]             hk_words [NHK],
  // antenna deployment
  output logic [3:0]              deploy_fire,
  input  logic [3:0]              deploy_switch_n,
  // status
  output logic [2:0]              microframe,
  output logic [31:0]             met_own,
  output logic [15:0]             pkt_sent
);
  // ---------------------------------------------------------------- time
  logic        sec_tick, pps_edge, major_tick;
  logic [31:0] met_lander, pps_sub;
  logic        met_sync_valid;
  logic [31:0] met_sync_value;

  met_clock #(.CLK_HZ(CLK_HZ)) u_met (
    .clk, .rst, .pps, .met_sync_valid, .met_sync_value,
    .sec_tick, .met_own, .met_lander, .pps_sub, .pps_edge);

  // ------------------------------------------------------------ commands
  logic        rx_v, rx_err, ack_v, ack_rdy;
  logic [7:0]  rx_d, ack_d;
  logic [15:0] dsp_reg [16];
  logic [7:0]  matrix [NACT];
  logic [23:0] tlm_cfg;
  logic        sched_en, fire_cmd, stats_reset;
  logic [1:0]  fire_ant;
  logic [15:0] cmd_count, err_count;

  uart_rx #(.DIV(BAUD_DIV)) u_eng_rx (.clk, .rst, .rxd(eng_rxd),
    .valid(rx_v), .data(rx_d), .frame_err(rx_err));
  cmd_decoder u_cmd (.clk, .rst, .rx_valid(rx_v), .rx_data(rx_d),
    .ack_valid(ack_v), .ack_data(ack_d), .ack_ready(ack_rdy),
    .dsp_reg, .matrix, .tlm_cfg, .sched_en, .met_sync_valid, .met_sync_value,
    .deploy_fire(fire_cmd), .deploy_ant(fire_ant), .stats_reset,
    .cmd_count, .err_count);
  uart_tx #(.DIV(BAUD_DIV)) u_eng_tx (.clk, .rst, .valid(ack_v), .data(ack_d),
    .ready(ack_rdy), .txd(eng_txd));

  // ------------------------------------------------------------ schedule
  logic [NACT-1:0] act;
  frame_sched #(.FINE_STEP(FINE_STEP)) u_sched (.clk, .rst, .enable(sched_en),
    .matrix, .sec_tick, .action(act), .microframe, .major_tick);
  assign hk_adc_start = act[ACT_HK_ADC];

  // ------------------------------------------------- per-antenna streams
  logic [8:0]               hist_addr;
  logic [MAG_W-1:0]         hist_data [NCHAN];
  band_e                    hist_band [NCHAN];
  logic [NCHAN-1:0]         hist_ready;
  logic [$clog2(RAW_DEPTH)-1:0] raw_addr;
  logic signed [ADC_W-1:0]  raw_data [NCHAN];
  logic [NCHAN-1:0]         raw_done;
  stats_t                   stats [NCHAN];

  for (genvar c = 0; c < NCHAN; c++) begin : g_ch
    logic       acc_busy, dump_busy, raw_busy;
    band_e      acc_band;
    logic [1:0] acc_done;
    dsp_chan u_dsp (
      .clk, .rst, .adc_valid(1'b1), .adc_data(adc_data[c]),
      .mode(dsp_mode_e'(dsp_reg[4*c + 2][1:0])),
      .test_reg(dsp_reg[4*c + 0]),
      .num_fft_high(dsp_reg[4*c + 1]),
      .num_fft_low(dsp_reg[4*c + 3]),
      .go_high(act[ACT_GO_HIGH]), .go_low(act[ACT_GO_LOW]),
      .dump_high(act[ACT_DUMP_HIGH]), .dump_low(act[ACT_DUMP_LOW]),
      .hist_addr, .hist_data(hist_data[c]), .hist_band(hist_band[c]),
      .hist_ready(hist_ready[c]), .acc_busy, .acc_band, .acc_done, .dump_busy);
    sig_stats u_stats (.clk, .rst, .adc_valid(1'b1), .adc_data(adc_data[c]),
      .adc_or(adc_or[c]), .sec_tick, .major_tick, .stats_reset, .stats(stats[c]));
    raw_capture #(.DEPTH(RAW_DEPTH)) u_raw (.clk, .rst, .adc_valid(1'b1),
      .adc_data(adc_data[c]), .capture(act[ACT_CAPTURE_RAW]),
      .rd_addr(raw_addr), .rd_data(raw_data[c]), .busy(raw_busy), .done(raw_done[c]));
  end

  // ----------------------------------------------------------- telemetry
  logic       sci_v, sci_rdy, tlm_busy;
  logic [7:0] sci_d;
  logic [15:0] pkt_inhibited;
  tlm_ctrl #(.NHK(NHK), .RAW_DEPTH(RAW_DEPTH)) u_tlm (
    .clk, .rst,
    .go_urgent(act[ACT_TLM_URGENT]), .go_hk(act[ACT_TLM_HK]),
    .go_dsp(act[ACT_TLM_DSP]), .go_raw(act[ACT_TLM_RAW]),
    .tlm_cfg, .met_lander, .met_own, .stats, .hk_words,
    .hist_addr, .hist_data, .hist_band, .hist_ready,
    .raw_addr, .raw_data, .raw_done,
    .tx_valid(sci_v), .tx_data(sci_d), .tx_ready(sci_rdy),
    .pkt_sent, .pkt_inhibited, .busy(tlm_busy));
  uart_tx #(.DIV(BAUD_DIV)) u_sci_tx (.clk, .rst, .valid(sci_v), .data(sci_d),
    .ready(sci_rdy), .txd(sci_txd));

  // ---------------------------------------------------------- deployment
  logic [3:0] deployed;
  logic [7:0] deploy_time [4];
  logic       deploy_timed_out;
  logic [7:0] deploy_refused;
  deploy_ctrl u_dep (.clk, .rst, .fire_cmd, .fire_ant, .sec_tick,
    .switch_n(deploy_switch_n), .fire(deploy_fire), .deployed,
    .deploy_time, .timed_out(deploy_timed_out), .refused(deploy_refused));
endmodule
