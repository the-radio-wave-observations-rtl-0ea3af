// tb_rolses_full -- the ROLSES digital unit at its real size and rates.
//
// rolses_top with every parameter at its default: 120 MHz clock and time
// base, 115 200 bit/s buses, 1024-sample raw memories.  The testbench plays
// the lander for the first second of operation: it sends a command on the
// engineering bus (DSP control of core C: OFF) and a lander MET sync, gives a
// PPS pulse half a second in, and decodes the science bus.  At the first
// one-second tick microframe 0 begins: the housekeeping ADC is started, the
// high-band integrations are launched and a priority packet (dwell on
// antenna A, routed to the real-time stream) is sent.  Checked: the replies,
// the tick exactly 120 000 000 clocks after reset, the GO HIGH pulse
// 2 + 4096 clocks after the tick, core C held off while the others integrate, and the
// priority packet's header, length, both METs and checksum.  A whole spectrum
// needs five simulated seconds (GO in microframe 0, DUMP in microframe 4),
// more than a simulation of this size can run here; the reduced-clock
// end-to-end testbench covers it.
module tb_rolses_full;
  import rolses_pkg::*;
  localparam int S = 120_000_000, BD = 1042, NHK = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [ADC_W-1:0] adc_data [NCHAN];
  logic [NCHAN-1:0] adc_or;
  logic pps, eng_rxd, eng_txd, sci_txd, hk_adc_start;
  logic [15:0] hk_words [NHK];
  logic [3:0] deploy_fire, deploy_switch_n;
  logic [2:0] microframe;
  logic [31:0] met_own;
  logic [15:0] pkt_sent;

  rolses_top dut (.*);

  initial begin
    #1300000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint cyc;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < NCHAN; c++) adc_data[c] <= ADC_W'(int'(cyc[5:0]) * 64 - 2048 + c);
    adc_or <= '0;
    pps <= cyc >= S / 2 && cyc < S / 2 + 1000;
  end
  assign deploy_switch_n = '1;
  always_comb for (int k = 0; k < NHK; k++) hk_words[k] = 16'(k * 257);

  // engineering bus
  logic cv, crdy, ack_v, ack_fe;
  logic [7:0] cd, ack_d;
  uart_tx #(.DIV(BD)) u_ctx (.clk, .rst, .valid(cv), .data(cd), .ready(crdy), .txd(eng_rxd));
  uart_rx #(.DIV(BD)) u_arx (.clk, .rst, .rxd(eng_txd), .valid(ack_v), .data(ack_d), .frame_err(ack_fe));
  int n_ack;
  always @(posedge clk) if (!rst && ack_v && ack_d == 8'h06) n_ack++;
  task automatic put(logic [7:0] b);
    while (!crdy) @(negedge clk);
    cv = 1; cd = b;
    @(negedge clk); cv = 0;
    @(negedge clk);
  endtask
  task automatic command(logic [7:0] addr, logic [15:0] w [$]);
    logic [7:0] c;
    int n0;
    n0 = n_ack;
    put(8'hEB); put(8'h90); put(addr); put(8'(w.size()));
    c = addr ^ 8'(w.size());
    foreach (w[i]) begin put(w[i][15:8]); put(w[i][7:0]); c ^= w[i][15:8] ^ w[i][7:0]; end
    put(c);
    while (n_ack == n0) @(negedge clk);
  endtask

  // science bus
  logic sv, sfe;
  logic [7:0] sd;
  uart_rx #(.DIV(BD)) u_srx (.clk, .rst, .rxd(sci_txd), .valid(sv), .data(sd), .frame_err(sfe));
  logic [7:0] bytes [$];
  always @(posedge clk) if (!rst && sv) bytes.push_back(sd);

  longint t_tick, t_go;
  int n_hk;
  always @(posedge clk) if (!rst) begin
    if (dut.sec_tick && t_tick < 0) t_tick = cyc;
    if (dut.act[ACT_GO_HIGH] && t_go < 0) t_go = cyc;
    if (hk_adc_start) n_hk++;
  end

  initial begin
    logic [7:0] x;
    int len;
    cyc = 0; cv = 0; cd = 0; t_tick = -1; t_go = -1; n_hk = 0; n_ack = 0;
    repeat (10) @(posedge clk);
    rst = 0;
    command(8'h08, '{16'h0044, 16'hE4E0, 16'h0000, 16'h0E4E});   // core C: OFF
    command(8'h30, '{16'h0000, 16'h1234});                       // lander MET
    check(n_ack == 2, "commands not acknowledged");
    // run to the end of the first priority packet
    while (bytes.size() < 50 && cyc < longint'(S) + 1_000_000) @(negedge clk);
    repeat (10) @(negedge clk);
    // reset ends at clock 10; the second counter then runs 0..S-1 and the
    // tick is high on its S-th clock
    check(t_tick - 10 == longint'(S) - 1 || t_tick - 10 == longint'(S),
          $sformatf("first tick %0d clocks after reset", t_tick - 10));
    // actions are registered twice after the tick: slot 1 shows 2 + 4096 later
    check(t_go - t_tick == 4096 + 2, $sformatf("GO HIGH %0d clocks after the tick", t_go - t_tick));
    check(n_hk == 1, "housekeeping ADC not started in microframe 0");
    check(dut.g_ch[0].u_dsp.acc_busy && dut.g_ch[3].u_dsp.acc_busy && !dut.g_ch[2].u_dsp.acc_busy,
          "cores A, D integrating and C off");
    check(bytes.size() == 50 && bytes[0] == 8'hFA && bytes[1] == 8'hF3 && bytes[2] == 8'h02 &&
          bytes[3] == 8'h00 && bytes[4] == 8'h02, "priority packet header");
    if (bytes.size() == 50) begin
      len = {bytes[13], bytes[14]};
      x = 0;
      for (int i = 2; i < 49; i++) x ^= bytes[i];
      check(len == 34 && x == bytes[49], "length / checksum");
      check({bytes[5], bytes[6], bytes[7], bytes[8]} == 32'h0000_1234, "lander MET");
      check({bytes[9], bytes[10], bytes[11], bytes[12]} == 32'd1, "own MET");
      check({bytes[47], bytes[48]} == 16'(7 * 257), "housekeeping words");
    end
    check(pkt_sent == 16'd1 && microframe == 3'd0, "one packet in microframe 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
