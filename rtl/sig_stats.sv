// sig_stats -- real-time signal statistics of one ADC stream.
//
// Listens to the ADC samples going to the DSP core and raw memory.  After
// every one-second tick it takes the next SAMPLES_PER_SEC samples (1024, as
// the statistics screen states) and keeps their minimum and maximum; at the
// next tick these become min_s, max_s and range_s (max - min).  min_run and
// max_run follow the same samples since the last statistics reset.  The
// samples of eight seconds are summed into total_8s, their mean into
// average, and the samples flagged out of range by the ADC are counted into
// oor_8s; these three are published at every major-frame tick (every 8 s).
// Which 1024 samples of a second are taken (the first after the tick) and
// the use of the ADC's out-of-range flag are this design's choice.
//
// Interface: adc_valid/adc_data/adc_or, sec_tick, major_tick (coincides with
// a sec_tick), stats_reset; stats is registered and changes on the ticks.
module sig_stats
  import rolses_pkg::*;
#(
  parameter int unsigned SAMPLES_PER_SEC = 1024
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    adc_valid,
  input  logic signed [ADC_W-1:0] adc_data,
  input  logic                    adc_or,
  input  logic                    sec_tick,
  input  logic                    major_tick,
  input  logic                    stats_reset,
  output stats_t                  stats
);
  localparam int unsigned CW = $clog2(SAMPLES_PER_SEC + 1);
  localparam int unsigned SH = $clog2(SAMPLES_PER_SEC * 8);

  logic [CW-1:0]            n;
  logic signed [ADC_W-1:0]  mn, mx;
  logic signed [31:0]       tot;
  logic [15:0]              oor;
  logic                     take;

  assign take = adc_valid && (n < CW'(SAMPLES_PER_SEC));

  always_ff @(posedge clk) begin
    if (rst) begin
      n     <= CW'(SAMPLES_PER_SEC);   // idle until the first tick
      mn    <= '1;
      mx    <= '0;
      tot   <= '0;
      oor   <= '0;
      stats <= '0;
      stats.min_run <= {1'b0, {(ADC_W-1){1'b1}}};
      stats.max_run <= {1'b1, {(ADC_W-1){1'b0}}};
    end else begin
      if (sec_tick) begin
        stats.min_s   <= mn;
        stats.max_s   <= mx;
        stats.range_s <= (ADC_W+1)'(mx) - (ADC_W+1)'(mn);
        n  <= '0;
        mn <= {1'b0, {(ADC_W-1){1'b1}}};
        mx <= {1'b1, {(ADC_W-1){1'b0}}};
        if (major_tick) begin
          stats.total_8s <= tot;
          stats.average  <= ADC_W'(tot >>> SH);
          stats.oor_8s   <= oor;
          tot <= '0;
          oor <= '0;
        end
      end else if (take) begin
        n <= n + 1'b1;
        if (adc_data < mn) mn <= adc_data;
        if (adc_data > mx) mx <= adc_data;
        tot <= tot + 32'(adc_data);
        if (adc_or) oor <= oor + 1'b1;
      end
      if (stats_reset) begin
        stats.min_run <= {1'b0, {(ADC_W-1){1'b1}}};
        stats.max_run <= {1'b1, {(ADC_W-1){1'b0}}};
      end else if (take && !sec_tick) begin
        if (adc_data < stats.min_run) stats.min_run <= adc_data;
        if (adc_data > stats.max_run) stats.max_run <= adc_data;
      end
    end
  end
endmodule
