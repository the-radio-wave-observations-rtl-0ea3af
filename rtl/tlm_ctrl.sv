// tlm_ctrl -- telemetry controller: builds the science-bus packets.
//
// Four packet kinds go to the lander on the science bus: housekeeping,
// priority (same contents as housekeeping), histograms (spectra) and raw
// waveform dumps.  A GO TLM action from the scheduler marks its kind
// pending; pending kinds are served in the order priority, housekeeping,
// histograms, raw.  The telemetry control word chooses, per kind, the channel
// (0 = rotate: channels A, B, C, D in turn; 1..4 = dwell on A..D) and two
// routing bits (bit 1 stream to the real-time downlink, bit 0 store in the
// lander's mass store).  A packet whose routing bits are both clear is
// inhibited and not sent; a histogram or raw packet whose buffer holds no
// result is skipped.  Field positions of the control word and the default
// routing follow the telemetry screen; the packet layout below is this
// design's choice.
//
// Packet: FA F3 | type | band<<4 | channel | route | lander MET (4) |
// own MET (4) | payload length (2) | payload | XOR of bytes from type on.
// Payloads: housekeeping/priority: min_s, max_s, range_s, min_run, max_run,
// total_8s (2 words), average, oor_8s, then NHK housekeeping-ADC words, all
// 16-bit big-endian; histogram: 512 magnitudes, 32-bit big-endian, bin 0
// first; raw: RAW_DEPTH samples, sign-extended to 16 bits, big-endian.  All multi-byte values
// are big-endian.  Bytes leave through tx_valid/tx_data/tx_ready.
module tlm_ctrl
  import rolses_pkg::*;
#(
  parameter int unsigned NHK       = 8,
  parameter int unsigned RAW_DEPTH = 1024
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    go_urgent,
  input  logic                    go_hk,
  input  logic                    go_dsp,
  input  logic                    go_raw,
  input  logic [23:0]             tlm_cfg,
  input  logic [31:0]             met_lander,
  input  logic [31:0]             met_own,
  input  stats_t                  stats [NCHAN],
  input  logic [15:0]             hk_words [NHK],
  output logic [8:0]              hist_addr,
  input  logic [MAG_W-1:0]        hist_data [NCHAN],
  input  band_e                   hist_band [NCHAN],
  input  logic [NCHAN-1:0]        hist_ready,
  output logic [$clog2(RAW_DEPTH)-1:0] raw_addr,
  input  logic signed [ADC_W-1:0] raw_data [NCHAN],
  input  logic [NCHAN-1:0]        raw_done,
  output logic                    tx_valid,
  output logic [7:0]              tx_data,
  input  logic                    tx_ready,
  output logic [15:0]             pkt_sent,
  output logic [15:0]             pkt_inhibited,
  output logic                    busy
);
  localparam int unsigned HDR   = 15;
  localparam int unsigned HKW   = 9 + NHK;
  localparam int unsigned RAW_AW = $clog2(RAW_DEPTH);

  typedef enum logic [2:0] {T_IDLE, T_CHAN, T_PREP, T_W1, T_W2, T_SEND} tstate_e;
  tstate_e     st;
  logic [3:0]  pend;      // [0] priority, [1] hk, [2] hist, [3] raw
  logic [1:0]  kind;      // job being served, same numbering
  logic [2:0]  cstep;     // channel step within a job
  logic [1:0]  chan;
  logic [15:0] bi, plen;
  logic [7:0]  chk;
  logic [1:0]  route;
  logic [HKW*16-1:0] hkv;
  logic [NHK*16-1:0] hk_flat;
  always_comb for (int i = 0; i < NHK; i++) hk_flat[16*(NHK-1-i) +: 16] = hk_words[i];

  function automatic logic [1:0] route_of(logic [1:0] k, logic [23:0] c);
    case (k)
      2'd0:    return c[1:0];
      2'd1:    return c[7:6];
      2'd2:    return c[5:4];
      default: return c[3:2];
    endcase
  endfunction
  function automatic logic [3:0] sel_of(logic [1:0] k, logic [23:0] c);
    case (k)
      2'd0:    return c[19:16];
      2'd1:    return c[15:12];
      2'd2:    return c[23:20];
      default: return c[11:8];
    endcase
  endfunction
  function automatic pkt_type_e type_of(logic [1:0] k);
    case (k)
      2'd0:    return PKT_PRIO;
      2'd1:    return PKT_HK;
      2'd2:    return PKT_HIST;
      default: return PKT_RAW;
    endcase
  endfunction

  logic [3:0] sel;
  logic       dwell;
  assign sel   = sel_of(kind, tlm_cfg);
  assign dwell = (sel >= 4'd1 && sel <= 4'd4);

  // channel of the current step, and whether the job has more steps
  logic [1:0] step_chan;
  logic       step_last;
  always_comb begin
    step_chan = dwell ? 2'(sel - 4'd1) : cstep[1:0];
    step_last = dwell ? 1'b1 : (cstep == 3'd3);
  end

  // byte of the packet at index bi
  logic [15:0] pw;     // payload byte index
  logic [7:0]  hdr_b, pay_b;
  logic [31:0] hw;
  logic [15:0] rw;     // raw sample, sign-extended to 16 bits
  assign pw = bi - 16'(HDR);
  always_comb begin
    case (bi)
      16'd0:  hdr_b = 8'hFA;
      16'd1:  hdr_b = 8'hF3;
      16'd2:  hdr_b = type_of(kind);
      16'd3:  hdr_b = {3'b000, (kind == 2'd2) ? hist_band[chan] : 1'b0, 2'b00, chan};
      16'd4:  hdr_b = {6'b0, route};
      16'd5:  hdr_b = met_lander[31:24];
      16'd6:  hdr_b = met_lander[23:16];
      16'd7:  hdr_b = met_lander[15:8];
      16'd8:  hdr_b = met_lander[7:0];
      16'd9:  hdr_b = met_own[31:24];
      16'd10: hdr_b = met_own[23:16];
      16'd11: hdr_b = met_own[15:8];
      16'd12: hdr_b = met_own[7:0];
      16'd13: hdr_b = plen[15:8];
      default: hdr_b = plen[7:0];
    endcase
    hw = hist_data[chan];
    rw = 16'(raw_data[chan]);
    case (kind)
      2'd2:    pay_b = hw[8*(3 - int'(pw[1:0])) +: 8];
      2'd3:    pay_b = pw[0] ? rw[7:0] : rw[15:8];
      default: pay_b = hkv[HKW*16 - 8 - 8*int'(pw) +: 8];
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st            <= T_IDLE;
      pend          <= '0;
      kind          <= '0;
      cstep         <= '0;
      chan          <= '0;
      bi            <= '0;
      plen          <= '0;
      chk           <= '0;
      route         <= '0;
      hkv           <= '0;
      tx_valid      <= 1'b0;
      tx_data       <= '0;
      hist_addr     <= '0;
      raw_addr      <= '0;
      pkt_sent      <= '0;
      pkt_inhibited <= '0;
    end else begin
      if (go_urgent) pend[0] <= 1'b1;
      if (go_hk)     pend[1] <= 1'b1;
      if (go_dsp)    pend[2] <= 1'b1;
      if (go_raw)    pend[3] <= 1'b1;
      case (st)
        T_IDLE: begin
          cstep <= '0;
          if      (pend[0]) begin kind <= 2'd0; pend[0] <= 1'b0; st <= T_CHAN; end
          else if (pend[1]) begin kind <= 2'd1; pend[1] <= 1'b0; st <= T_CHAN; end
          else if (pend[2]) begin kind <= 2'd2; pend[2] <= 1'b0; st <= T_CHAN; end
          else if (pend[3]) begin kind <= 2'd3; pend[3] <= 1'b0; st <= T_CHAN; end
        end
        T_CHAN: begin
          chan  <= step_chan;
          route <= route_of(kind, tlm_cfg);
          bi    <= '0;
          chk   <= '0;
          case (kind)
            2'd2:    plen <= 16'(NBINS * 4);
            2'd3:    plen <= 16'(RAW_DEPTH * 2);
            default: plen <= 16'(HKW * 2);
          endcase
          hkv <= {16'(stats[step_chan].min_s), 16'(stats[step_chan].max_s),
                  16'(stats[step_chan].range_s), 16'(stats[step_chan].min_run),
                  16'(stats[step_chan].max_run), stats[step_chan].total_8s,
                  16'(stats[step_chan].average), stats[step_chan].oor_8s,
                  hk_flat};
          if (route_of(kind, tlm_cfg) == 2'b00 ||
              (kind == 2'd2 && !hist_ready[step_chan]) ||
              (kind == 2'd3 && !raw_done[step_chan])) begin
            pkt_inhibited <= pkt_inhibited + 1'b1;
            if (step_last) st <= T_IDLE;
            cstep <= cstep + 1'b1;
          end else begin
            st <= T_PREP;
          end
        end
        T_PREP: begin
          hist_addr <= 9'(pw >> 2);
          raw_addr  <= RAW_AW'(pw >> 1);
          st        <= T_W1;
        end
        T_W1: st <= T_W2;
        T_W2: begin
          if (bi < 16'(HDR))           tx_data <= hdr_b;
          else if (bi == 16'(HDR) + plen) tx_data <= chk;
          else                          tx_data <= pay_b;
          tx_valid <= 1'b1;
          st       <= T_SEND;
        end
        T_SEND: begin
          if (tx_ready) begin
            tx_valid <= 1'b0;
            if (bi >= 16'd2) chk <= chk ^ tx_data;
            if (bi == 16'(HDR) + plen) begin
              pkt_sent <= pkt_sent + 1'b1;
              cstep    <= cstep + 1'b1;
              st       <= step_last ? T_IDLE : T_CHAN;
            end else begin
              bi <= bi + 1'b1;
              st <= T_PREP;
            end
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  assign busy = (st != T_IDLE);
endmodule
