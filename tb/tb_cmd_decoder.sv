// tb_cmd_decoder -- self-checking testbench of the engineering-bus command decoder.
// Feeds command frames byte by byte (EB 90 ADDR COUNT {hi lo}.. CHK) and
// checks the reply byte, the register file after each frame and the
// one-clock strobes.  Covers: reset defaults of the DSP registers, matrix
// and telemetry word; a multi-word write across DSP registers; a matrix row;
// both telemetry words; a MET sync written as two words in one frame;
// deploy, statistics reset and scheduler enable; a bad checksum (NAK, no
// write); a zero count (NAK); noise bytes before a sync.
module tb_cmd_decoder;
  import rolses_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rx_valid, ack_valid, ack_ready, sched_en, met_sync_valid, deploy_fire, stats_reset;
  logic [7:0] rx_data, ack_data;
  logic [15:0] dsp_reg [16];
  logic [7:0] matrix [NACT];
  logic [23:0] tlm_cfg;
  logic [31:0] met_sync_value;
  logic [1:0] deploy_ant;
  logic [15:0] cmd_count, err_count;
  cmd_decoder dut (.*);
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_ack, n_nak, n_sync, n_deploy, n_sreset;
  logic [31:0] last_sync;
  always @(posedge clk) if (!rst) begin
    if (ack_valid && ack_ready) begin
      if (ack_data == 8'h06) n_ack++;
      else if (ack_data == 8'h15) n_nak++;
    end
    if (met_sync_valid) begin n_sync++; last_sync = met_sync_value; end
    if (deploy_fire) n_deploy++;
    if (stats_reset) n_sreset++;
  end

  task automatic put(logic [7:0] b);
    @(negedge clk) rx_valid = 1; rx_data = b;
    @(negedge clk) rx_valid = 0;
    repeat (3) @(negedge clk);
  endtask
  task automatic frame(logic [7:0] addr, logic [15:0] w [$], bit corrupt = 0);
    logic [7:0] c;
    put(8'hEB); put(8'h90); put(addr); put(8'(w.size()));
    c = addr ^ 8'(w.size());
    foreach (w[i]) begin put(w[i][15:8]); put(w[i][7:0]); c ^= w[i][15:8] ^ w[i][7:0]; end
    put(corrupt ? ~c : c);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    rx_valid = 0; rx_data = 0; ack_ready = 1;
    n_ack = 0; n_nak = 0; n_sync = 0; n_deploy = 0; n_sreset = 0;
    repeat (3) @(posedge clk); rst = 0;
    repeat (3) @(negedge clk);
    // defaults (Fig. 12 register values, Fig. 10 matrix, Fig. 11 control word)
    check(dsp_reg[0] == 16'h0044 && dsp_reg[1] == 16'hE4E0 && dsp_reg[2] == 16'h0002 &&
          dsp_reg[3] == 16'h0E4E && dsp_reg[15] == 16'h0E4E, "DSP defaults");
    check(matrix[1] == 8'h44 && matrix[7] == 8'h80 && matrix[8] == 8'hAA, "matrix defaults");
    check(tlm_cfg == 24'h012056 && sched_en, "tlm defaults");
    // noise, then a 3-word write to registers 5..7
    put(8'h12); put(8'hEB); put(8'h00);
    frame(8'h05, '{16'h1234, 16'h0003, 16'h00AA});
    check(dsp_reg[5] == 16'h1234 && dsp_reg[6] == 16'h0003 && dsp_reg[7] == 16'h00AA &&
          dsp_reg[4] == 16'h0044, "multi-word DSP write");
    frame(8'h19, '{16'h0080});
    check(matrix[9] == 8'h80 && matrix[8] == 8'hAA, "matrix row write");
    frame(8'h20, '{16'hC0FF, 16'h0034});
    check(tlm_cfg == 24'h34C0FF, $sformatf("tlm_cfg %h", tlm_cfg));
    frame(8'h30, '{16'hDEAD, 16'hBEEF});
    check(n_sync == 1 && last_sync == 32'hDEADBEEF, $sformatf("MET sync %h", last_sync));
    frame(8'h40, '{16'h0002, 16'h0001, 16'h0000});
    check(n_deploy == 1 && deploy_ant == 2'd2 && n_sreset == 1 && !sched_en, "deploy/reset/enable");
    frame(8'h02, '{16'h0003}, 1);
    check(dsp_reg[2] == 16'h0002 && n_nak == 1 && err_count == 1, "bad checksum must not write");
    put(8'hEB); put(8'h90); put(8'h02); put(8'h00); repeat (4) @(negedge clk);
    check(n_nak == 2 && err_count == 2, "zero count NAK");
    frame(8'h02, '{16'h0003});
    check(dsp_reg[2] == 16'h0003 && n_ack == 6 && cmd_count == 6, $sformatf("acks %0d count %0d", n_ack, cmd_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
