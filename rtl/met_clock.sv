// met_clock -- instrument time: own mission elapsed time, lander MET and the
// one-second tick.
//
// The instrument keeps its own MET (1 s LSB) from its crystal oscillator:
// a cycle counter wraps every CLK_HZ clocks, giving sec_tick and advancing
// met_own.  The lander's MET arrives in a time-synchronisation message
// (met_sync_valid/met_sync_value) and is taken over at the next rising edge of
// the lander's PPS discrete, then advanced by every further PPS edge
// (met_lander).  At each PPS edge the oscillator's sub-second count is
// latched (pps_sub) so packets can relate the two time bases.  Own MET,
// lander MET, PPS and the 1 s LSB follow the description; applying the sync
// value at the next PPS and the sub-second latch are this design's choice.
//
// The PPS input is synchronised with two flip-flops; pps_edge is one clock.
module met_clock #(
  parameter int unsigned CLK_HZ = 120_000_000
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        pps,
  input  logic        met_sync_valid,
  input  logic [31:0] met_sync_value,
  output logic        sec_tick,
  output logic [31:0] met_own,
  output logic [31:0] met_lander,
  output logic [31:0] pps_sub,
  output logic        pps_edge
);
  localparam int unsigned CW = $clog2(CLK_HZ);
  logic [CW-1:0] cyc;
  logic [2:0]    pps_sr;
  logic          sync_pend;
  logic [31:0]   sync_val;

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc      <= '0;
      sec_tick <= 1'b0;
      met_own  <= '0;
    end else begin
      sec_tick <= 1'b0;
      if (cyc == CW'(CLK_HZ - 1)) begin
        cyc      <= '0;
        sec_tick <= 1'b1;
        met_own  <= met_own + 1'b1;
      end else begin
        cyc <= cyc + 1'b1;
      end
    end
  end

  assign pps_edge = pps_sr[1] && !pps_sr[2];

  always_ff @(posedge clk) begin
    if (rst) begin
      pps_sr     <= '0;
      sync_pend  <= 1'b0;
      sync_val   <= '0;
      met_lander <= '0;
      pps_sub    <= '0;
    end else begin
      pps_sr <= {pps_sr[1:0], pps};
      if (met_sync_valid) begin
        sync_pend <= 1'b1;
        sync_val  <= met_sync_value;
      end
      if (pps_edge) begin
        pps_sub <= 32'(cyc);
        if (sync_pend && !met_sync_valid) begin
          met_lander <= sync_val;
          sync_pend  <= 1'b0;
        end else begin
          met_lander <= met_lander + 1'b1;
        end
      end
    end
  end
endmodule
