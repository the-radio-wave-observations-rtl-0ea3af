// cmd_decoder -- engineering-bus command decoder and configuration registers.
//
// Commands arrive as bytes from the engineering-bus receiver.  A command
// frame is  EB 90 ADDR COUNT {DATA_HI DATA_LO} x COUNT  CHK, where CHK is the
// XOR of ADDR, COUNT and all data bytes and 1 <= COUNT <= 16.  The words are
// buffered and written to COUNT consecutive registers only when the checksum
// matches, so a whole table (the command matrix, the telemetry control word,
// the DSP control table) is loaded by a single command, as the operator
// screens do.  Each frame is answered with one byte: 06 (accepted) or 15
// (rejected).  Register map:
//   00-0F  DSP control, four per core A..D: test reg (NCO tuning), FFTs per
//          high-band integration, operating mode, FFTs per low-band
//          integration (the order and defaults of the DSP control screen)
//   10-1A  command matrix rows (bit m = microframe m)
//   20, 21 telemetry control bits 15:0 and 23:16
//   30, 31 lander MET high and low word; writing 31 delivers the sync message
//   40     fire antenna deployment, data[1:0] = antenna A..D
//   41     reset the signal statistics
//   42     scheduler enable (bit 0)
// The register addresses 00-0F and all defaults are those shown on the
// operator screens; the frame format, the other addresses and the
// acknowledgement bytes are this design's choice.
module cmd_decoder
  import rolses_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        rx_valid,
  input  logic [7:0]  rx_data,
  // acknowledgement byte to the engineering-bus transmitter
  output logic        ack_valid,
  output logic [7:0]  ack_data,
  input  logic        ack_ready,
  // registers
  output logic [15:0] dsp_reg [16],
  output logic [7:0]  matrix [NACT],
  output logic [23:0] tlm_cfg,
  output logic        sched_en,
  output logic        met_sync_valid,
  output logic [31:0] met_sync_value,
  output logic        deploy_fire,
  output logic [1:0]  deploy_ant,
  output logic        stats_reset,
  output logic [15:0] cmd_count,
  output logic [15:0] err_count
);
  typedef enum logic [2:0] {P_SYNC0, P_SYNC1, P_ADDR, P_COUNT, P_DHI, P_DLO, P_CHK} pstate_e;
  pstate_e     ps;
  logic [7:0]  addr, cnt, chk, dhi;
  logic [4:0]  idx;
  logic [15:0] buf_w [16];
  logic [15:0] met_hi;
  logic        commit;

  always_ff @(posedge clk) begin
    if (rst) begin
      ps        <= P_SYNC0;
      addr      <= '0;
      cnt       <= '0;
      chk       <= '0;
      dhi       <= '0;
      idx       <= '0;
      commit    <= 1'b0;
      ack_valid <= 1'b0;
      ack_data  <= '0;
      err_count <= '0;
    end else begin
      commit <= 1'b0;
      if (ack_valid && ack_ready) ack_valid <= 1'b0;
      if (rx_valid) begin
        case (ps)
          P_SYNC0: if (rx_data == 8'hEB) ps <= P_SYNC1;
          P_SYNC1: ps <= (rx_data == 8'h90) ? P_ADDR : P_SYNC0;
          P_ADDR:  begin addr <= rx_data; chk <= rx_data; ps <= P_COUNT; end
          P_COUNT: begin
            cnt <= rx_data;
            chk <= chk ^ rx_data;
            idx <= '0;
            ps  <= (rx_data == 8'd0 || rx_data > 8'd16) ? P_SYNC0 : P_DHI;
            if (rx_data == 8'd0 || rx_data > 8'd16) begin
              ack_valid <= 1'b1; ack_data <= 8'h15; err_count <= err_count + 1'b1;
            end
          end
          P_DHI:   begin dhi <= rx_data; chk <= chk ^ rx_data; ps <= P_DLO; end
          P_DLO:   begin
            buf_w[idx[3:0]] <= {dhi, rx_data};
            chk <= chk ^ rx_data;
            idx <= idx + 1'b1;
            ps  <= (5'(idx + 1) == cnt[4:0]) ? P_CHK : P_DHI;
          end
          P_CHK: begin
            ps        <= P_SYNC0;
            ack_valid <= 1'b1;
            if (rx_data == chk) begin
              commit   <= 1'b1;
              ack_data <= 8'h06;
            end else begin
              ack_data  <= 8'h15;
              err_count <= err_count + 1'b1;
            end
          end
          default: ps <= P_SYNC0;
        endcase
      end
    end
  end

  // register file
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < 4; c++) begin
        dsp_reg[4*c + 0] <= TEST_REG_DEFAULT;
        dsp_reg[4*c + 1] <= NFFT_HIGH_DEFAULT;
        dsp_reg[4*c + 2] <= MODE_DEFAULT;
        dsp_reg[4*c + 3] <= NFFT_LOW_DEFAULT;
      end
      for (int r = 0; r < NACT; r++) matrix[r] <= MATRIX_DEFAULT[r];
      tlm_cfg        <= TLM_CFG_DEFAULT;
      sched_en       <= 1'b1;
      met_hi         <= '0;
      met_sync_valid <= 1'b0;
      met_sync_value <= '0;
      deploy_fire    <= 1'b0;
      deploy_ant     <= '0;
      stats_reset    <= 1'b0;
      cmd_count      <= '0;
    end else begin
      met_sync_valid <= 1'b0;
      deploy_fire    <= 1'b0;
      stats_reset    <= 1'b0;
      if (commit) begin
        cmd_count <= cmd_count + 1'b1;
        for (int i = 0; i < 16; i++) begin
          if (i < int'(cnt)) begin
            automatic logic [7:0] a = addr + 8'(i);
            if (a < 8'h10)                    dsp_reg[a[3:0]] <= buf_w[i];
            else if (a >= 8'h10 && a < 8'h1B) matrix[4'(a - 8'h10)] <= buf_w[i][7:0];
            else if (a == 8'h20)              tlm_cfg[15:0]   <= buf_w[i];
            else if (a == 8'h21)              tlm_cfg[23:16]  <= buf_w[i][7:0];
            else if (a == 8'h30)              met_hi          <= buf_w[i];
            else if (a == 8'h31) begin
              met_sync_value <= {(i > 0 && addr + 8'(i) - 8'd1 == 8'h30) ? buf_w[(i + 15) % 16] : met_hi, buf_w[i]};
              met_sync_valid <= 1'b1;
            end
            else if (a == 8'h40) begin
              deploy_fire <= 1'b1;
              deploy_ant  <= buf_w[i][1:0];
            end
            else if (a == 8'h41)              stats_reset <= 1'b1;
            else if (a == 8'h42)              sched_en    <= buf_w[i][0];
          end
        end
      end
    end
  end
endmodule
