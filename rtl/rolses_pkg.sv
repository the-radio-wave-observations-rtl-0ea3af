// rolses_pkg -- shared constants, types and constant functions of the
// ROLSES digital unit.
//
// Holds the sizes of the DSP chain (1024-point transform giving 512 bins per
// band), the operating-mode and action encodings, the telemetry packet
// types, the default register contents shown on the operator screens
// (command matrix, telemetry control, DSP control) and integer sine/cosine
// functions used at elaboration to build the twiddle, window and oscillator
// tables.  The trigonometric functions use a Taylor series in Q30 fixed
// point on [0, pi/2] with quadrant folding; they are evaluated only as
// constants, never in hardware.
package rolses_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NFFT      = 1024;  // transform length
  localparam int unsigned NBINS     = 512;   // bins kept per band
  localparam int unsigned ADC_W     = 14;    // ADC word
  localparam int unsigned DW        = 16;    // DSP data word
  localparam int unsigned ACC_W     = 32;    // accumulator word (16 data + 16 pad)
  localparam int unsigned MAG_W     = 32;    // magnitude word
  localparam int unsigned NCHAN     = 4;     // antennas / DSP cores A..D
  localparam int unsigned NACT      = 11;    // rows of the command matrix

  // ------------------------------------------------- DSP operating modes
  typedef enum logic [1:0] {
    MODE_OFF   = 2'd0,
    MODE_UNUSED= 2'd1,
    MODE_RUN   = 2'd2,
    MODE_NCO   = 2'd3
  } dsp_mode_e;

  typedef enum logic {BAND_HIGH = 1'b0, BAND_LOW = 1'b1} band_e;

  // ------------------------------------------ command matrix rows (Fig. 10)
  typedef enum logic [3:0] {
    ACT_HK_ADC       = 4'd0,
    ACT_GO_LOW       = 4'd1,
    ACT_GO_HIGH      = 4'd2,
    ACT_DUMP_LOW     = 4'd3,
    ACT_DUMP_HIGH    = 4'd4,
    ACT_SPARE0       = 4'd5,
    ACT_TLM_URGENT   = 4'd6,
    ACT_TLM_HK       = 4'd7,
    ACT_TLM_DSP      = 4'd8,
    ACT_CAPTURE_RAW  = 4'd9,
    ACT_TLM_RAW      = 4'd10
  } action_e;

  // bit m of a row = action in microframe m
  localparam logic [7:0] MATRIX_DEFAULT [NACT] = '{
    8'hFF,  // HK ADC           all microframes
    8'h44,  // GO LOW DSP       2, 6
    8'h11,  // GO HIGH DSP      0, 4
    8'h44,  // DUMP LOW DSP     2, 6
    8'h11,  // DUMP HIGH DSP    0, 4
    8'hFF,  // SPARE 0          all
    8'h11,  // GO TLM URGENT    0, 4
    8'h80,  // GO TLM HK        7
    8'hAA,  // GO TLM DSP DATA  1, 3, 5, 7
    8'h02,  // GO CAPTURE RAW   1
    8'h00   // GO TLM RAW       none
  };

  // fine timing: slot (multiple of the fine step) at which each row fires
  localparam logic [1:0] ACT_SLOT [NACT] = '{
    2'd0, 2'd1, 2'd1, 2'd0, 2'd0, 2'd0, 2'd2, 2'd2, 2'd2, 2'd1, 2'd2
  };

  // ------------------------------------------- telemetry control (Fig. 11)
  // [7:6] HK, [5:4] histograms, [3:2] raw, [1:0] priority; in each pair
  // bit 1 = stream (real time), bit 0 = store (mass store).
  // [23:20] histograms, [19:16] priority, [15:12] HK, [11:8] raw:
  // channel selection, 0 = rotate, 1..4 = dwell on A..D.
  localparam logic [23:0] TLM_CFG_DEFAULT = 24'h0_1_2_0_56;

  typedef enum logic [7:0] {
    PKT_HK   = 8'h01,
    PKT_PRIO = 8'h02,
    PKT_HIST = 8'h03,
    PKT_RAW  = 8'h04
  } pkt_type_e;

  // ------------------------------------------------ DSP control (Fig. 12)
  localparam logic [15:0] TEST_REG_DEFAULT = 16'h0044;
  localparam logic [15:0] NFFT_HIGH_DEFAULT = 16'hE4E0;  // 58592
  localparam logic [15:0] NFFT_LOW_DEFAULT  = 16'h0E4E;  // 3662
  localparam logic [15:0] MODE_DEFAULT      = 16'h0002;  // RUN

  // ------------------------------------------------- per-channel statistics
  typedef struct packed {
    logic signed [ADC_W-1:0] min_s;     // minimum of the last second
    logic signed [ADC_W-1:0] max_s;     // maximum of the last second
    logic        [ADC_W:0]   range_s;   // max - min of the last second
    logic signed [ADC_W-1:0] min_run;   // minimum since reset
    logic signed [ADC_W-1:0] max_run;   // maximum since reset
    logic signed [31:0]      total_8s;  // sum over the last 8 s window
    logic signed [ADC_W-1:0] average;   // total_8s / samples in 8 s
    logic        [15:0]      oor_8s;    // out-of-range samples in 8 s
  } stats_t;

  // ---------------------------------------------- constant trigonometry
  localparam longint PI_Q30 = 64'sd3373259426;  // pi * 2^30

  function automatic longint taylor_sin(longint x);  // x in [0, pi/2], Q30
    longint x2, term, sum;
    x2 = (x * x) >>> 30;
    term = x;
    sum  = x;
    for (int n = 1; n < 9; n++) begin
      term = -((term * x2) >>> 30) / longint'((2*n) * (2*n + 1));
      sum  = sum + term;
    end
    return sum;
  endfunction

  function automatic longint taylor_cos(longint x);
    longint x2, term, sum;
    x2 = (x * x) >>> 30;
    term = 64'sd1 << 30;
    sum  = term;
    for (int n = 1; n < 9; n++) begin
      term = -((term * x2) >>> 30) / longint'((2*n - 1) * (2*n));
      sum  = sum + term;
    end
    return sum;
  endfunction

  // sin(2*pi*k/n) in Q30, any k >= 0, n >= 1
  function automatic longint sin2pi_q30(longint k, longint n);
    longint kk, q, r, x;
    kk = (4 * k) % (4 * n);
    q  = kk / n;                  // quadrant 0..3
    r  = kk - q * n;              // 0..n-1
    x  = (PI_Q30 * r) / (2 * n);  // angle within quadrant, Q30
    case (q)
      0:       return  taylor_sin(x);
      1:       return  taylor_cos(x);
      2:       return -taylor_sin(x);
      default: return -taylor_cos(x);
    endcase
  endfunction

  function automatic longint cos2pi_q30(longint k, longint n);
    return sin2pi_q30(4 * k + n, 4 * n);
  endfunction

  // Q30 -> Q15 with rounding and saturation to a 16-bit signed word
  function automatic logic signed [15:0] q30_to_q15(longint v);
    longint r;
    r = (v + (64'sd1 <<< 14)) >>> 15;
    if (r > 32767)  r = 32767;
    if (r < -32768) r = -32768;
    return 16'(r);
  endfunction

  // bit reversal of a 10-bit transform index
  function automatic logic [9:0] bitrev10(logic [9:0] v);
    logic [9:0] r;
    for (int i = 0; i < 10; i++) r[i] = v[9-i];
    return r;
  endfunction

  function automatic logic signed [15:0] sat16(logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7FFF;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
