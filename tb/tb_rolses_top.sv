// tb_rolses_top -- end-to-end testbench of the ROLSES digital unit.
//
// The whole instrument runs with a "second" of S = 400 000 clocks (the DSP
// chain still sees one sample per clock, so every band, bin and frame length
// is the real one; only the 1 s tick comes sooner), a serial bit of 4 clocks,
// a fine step of 1024 clocks and a 256-sample raw memory.  The testbench
// plays the lander: it drives four ADC streams (sums of tones whose period
// fits a whole number of times into a transform frame, so the coherent
// accumulation keeps them), a PPS pulse in the middle of each second, and a
// housekeeping ADC whose words count its conversions; it closes an antenna
// switch two seconds after that antenna is fired; it sends commands on the
// engineering bus and reads the replies; and it decodes every packet on the
// science bus.
//
// Commands: DSP registers for the four cores (A: RUN, B: NCO at tuning 800,
// C: OFF, D: RUN; 4 high-band and 2 low-band transforms per integration), a
// raw-telemetry row in the command matrix, a lander MET sync, a frame with a
// bad checksum, a deployment of antenna B, a statistics reset and, later,
// control words that move the priority dwell to B and inhibit spectra.  The
// run lasts 10.4 s: one major frame and two microframes of the next.
//
// Checked: each packet's checksum, length and header; the high-band
// spectra of A, B, D peak at the bins of their tones and the low-band
// spectra of A and D at theirs; the OFF core C never sends a spectrum; raw
// packets hold the ADC waveform; priority packets dwell on A (then B) and
// housekeeping on B, spectra rotate and are inhibited at the end; the
// statistics of B (min/max, a running minimum that forgot a spike after
// the reset, the out-of-range count of the first published 8 s window) and
// the housekeeping words; the lander MET in the headers
// follows the sync; the deploy time is 2 s.  Each mechanism is counted
// and one that never happened is a failure.
module tb_rolses_top;
  import rolses_pkg::*;
  localparam int S = 400_000, BD = 4, FS = 1024, RD = 256, NHK = 8;
  localparam real PI = 3.14159265358979;
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

  rolses_top #(.CLK_HZ(S), .BAUD_DIV(BD), .FINE_STEP(FS), .RAW_DEPTH(RD), .NHK(NHK)) dut (.*);

  initial begin
    #200000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ----------------------------------------------------------- the lander
  longint cyc;
  bit spike;
  function automatic int adc_fn(int c, longint t);
    real v;
    case (c)
      0: v = 4000.0 * $sin(2.0 * PI * real'(t % 16) / 16.0) + 2000.0 * $sin(2.0 * PI * real'(t % 1024) / 1024.0);
      1: v = 3000.0 * $sin(2.0 * PI * real'(t % 64) / 64.0);
      2: v = 1000.0 * $sin(2.0 * PI * real'(t % 256) / 256.0);
      default: v = 4000.0 * $sin(2.0 * PI * real'(t % 32) / 32.0) + 2000.0 * $sin(2.0 * PI * real'(t % 2048) / 2048.0);
    endcase
    return $rtoi(v + (v >= 0.0 ? 0.5 : -0.5));
  endfunction
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int c = 0; c < NCHAN; c++) adc_data[c] <= ADC_W'(adc_fn(c, cyc));
    if (spike) adc_data[1] <= -14'sd8000;
    adc_or <= {3'b000, (cyc % 97) == 0} << 1;      // channel B only
    pps <= (cyc % S) >= S / 2 && (cyc % S) < S / 2 + 100;
  end

  int n_hk_conv;
  always @(posedge clk) if (!rst && hk_adc_start) n_hk_conv++;
  always_comb for (int k = 0; k < NHK; k++) hk_words[k] = 16'(n_hk_conv + k);

  // antenna switches: close two seconds after the fire line rises
  int fire_secs [4];
  always @(posedge clk) if (!rst) begin
    for (int a = 0; a < 4; a++) begin
      if (deploy_fire[a] && dut.sec_tick) fire_secs[a]++;
      if (deploy_fire[a] && fire_secs[a] == 2) deploy_switch_n[a] <= 1'b0;
    end
  end

  // ------------------------------------------------------ engineering bus
  logic cv, crdy, ack_v, ack_fe;
  logic [7:0] cd, ack_d;
  uart_tx #(.DIV(BD)) u_ctx (.clk, .rst, .valid(cv), .data(cd), .ready(crdy), .txd(eng_rxd));
  uart_rx #(.DIV(BD)) u_arx (.clk, .rst, .rxd(eng_txd), .valid(ack_v), .data(ack_d), .frame_err(ack_fe));
  int n_ack, n_nak;
  always @(posedge clk) if (!rst && ack_v) begin
    if (ack_d == 8'h06) n_ack++; else if (ack_d == 8'h15) n_nak++;
  end
  task automatic put(logic [7:0] b);
    while (!crdy) @(negedge clk);
    cv = 1; cd = b;
    @(negedge clk); cv = 0;
    @(negedge clk);
  endtask
  task automatic command(logic [7:0] addr, logic [15:0] w [$], bit corrupt = 0);
    logic [7:0] c;
    int n_prev;
    n_prev = n_ack + n_nak;
    put(8'hEB); put(8'h90); put(addr); put(8'(w.size()));
    c = addr ^ 8'(w.size());
    foreach (w[i]) begin put(w[i][15:8]); put(w[i][7:0]); c ^= w[i][15:8] ^ w[i][7:0]; end
    put(corrupt ? ~c : c);
    while (n_ack + n_nak == n_prev) @(negedge clk);
  endtask

  // ----------------------------------------------------------- science bus
  logic sv, sfe;
  logic [7:0] sd;
  uart_rx #(.DIV(BD)) u_srx (.clk, .rst, .rxd(sci_txd), .valid(sv), .data(sd), .frame_err(sfe));
  logic [7:0] bytes [$];
  int n_pkt [5], n_bad, n_fe;
  int n_hist_hi_ok, n_hist_lo_ok, n_hist_chan [4], n_raw_ok, n_hk_ok, n_prio_ok, n_met_ok;
  int n_rotate, last_hist_chan, n_hist_late;

  function automatic int peak_bin(int len);
    longint best; int bi;
    best = -1; bi = -1;
    for (int i = 0; i < NBINS; i++) begin
      longint m = {bytes[15+4*i], bytes[16+4*i], bytes[17+4*i], bytes[18+4*i]};
      if (m > best) begin best = m; bi = i; end
    end
    return bi;
  endfunction

  task automatic parse();
    int len, typ, c, band, pk;
    real tsec;
    logic [7:0] x;
    logic [31:0] ml, mo;
    if (bytes.size() < 15) return;
    if (bytes[0] != 8'hFA || bytes[1] != 8'hF3) begin void'(bytes.pop_front()); n_bad++; return; end
    len = {bytes[13], bytes[14]};
    if (bytes.size() < 16 + len) return;
    typ = bytes[2]; c = bytes[3][1:0]; band = bytes[3][4];
    ml = {bytes[5], bytes[6], bytes[7], bytes[8]};
    mo = {bytes[9], bytes[10], bytes[11], bytes[12]};
    tsec = real'(cyc) / real'(S);
    x = 0;
    for (int i = 2; i < 15 + len; i++) x ^= bytes[i];
    if (x != bytes[15 + len]) n_bad++;
    if (typ >= 1 && typ <= 4) n_pkt[typ]++; else n_bad++;
    // lander MET follows the sync (0x00010000 at the first PPS after it)
    if (mo >= 1 && ml >= 32'h0001_0000 && ml <= 32'h0001_0000 + mo) n_met_ok++;
    else $display("MET lander %h own %0d", ml, mo);
    case (typ)
      1, 2: begin  // housekeeping / priority
        logic signed [15:0] mn, mx, mnr; int oor; bit ok;
        mn = {bytes[15], bytes[16]}; mx = {bytes[17], bytes[18]};
        mnr = {bytes[21], bytes[22]}; oor = {bytes[31], bytes[32]};
        ok = len == 2 * (9 + NHK) && {bytes[33], bytes[34]} + 16'd1 == {bytes[35], bytes[36]};
        // housekeeping dwells on B; priority on A until 6.5 s, then on B
        if (typ == 1 || tsec > 6.5) begin
          // B's statistics: +-3000 tone, spike at 1.2 s forgotten by the
          // reset at 2.5 s, out-of-range flags counted once the first 8 s
          // window is published at 9 s
          ok &= c == 1 && mx > 2900 && mx <= 3000 && mn < -2900 && mn >= -3000 &&
                mnr >= -3000 && mnr < -2900 && {bytes[33], bytes[34]} != 0;
          if (tsec > 9.0) ok &= oor > 50;
        end else begin
          ok &= c == 0;
        end
        if (typ == 1 && ok) n_hk_ok++;
        if (typ == 2 && ok) n_prio_ok++;
        if (!ok) $display("FAIL %0d packet chan %0d min %0d max %0d minrun %0d oor %0d", typ, c, mn, mx, mnr, oor);
      end
      3: begin
        if (len != 4 * NBINS) n_bad++;
        else begin
          pk = peak_bin(len);
          n_hist_chan[c]++;
          if (last_hist_chan >= 0 && c != last_hist_chan) n_rotate++;
          last_hist_chan = c;
          // high band spectra of the major frame are sent in microframe 5,
          // low band ones in microframe 7
          if (tsec > 6.0 && tsec < 8.0 && band == 0) begin
            if ((c == 0 && (pk == 127 || pk == 128)) || (c == 1 && (pk == 99 || pk == 100)) ||
                (c == 3 && (pk == 63 || pk == 64)))
              n_hist_hi_ok++;
            else $display("FAIL high band chan %0d peak %0d", c, pk);
          end
          if (tsec > 9.5) n_hist_late++;
          if (tsec > 8.0 && band == 1 && c != 1) begin
            if ((c == 0 && (pk == 31 || pk == 32)) || (c == 3 && (pk == 15 || pk == 16)))
              n_hist_lo_ok++;
            else $display("FAIL low band chan %0d peak %0d", c, pk);
          end
        end
      end
      4: begin  // raw: find where in the waveform the capture started
        bit found; found = 0;
        if (len == 2 * RD) begin
          for (int t0 = 0; t0 < 4096 && !found; t0++) begin
            bit m; m = 1;
            for (int i = 0; i < RD && m; i += 17)
              if ($signed({bytes[15+2*i], bytes[16+2*i]}) != adc_fn(c, longint'(t0 + i))) m = 0;
            found = m;
          end
        end
        if (found) n_raw_ok++; else $display("FAIL raw packet chan %0d", c);
      end
      default: ;
    endcase
    for (int i = 0; i < 16 + len; i++) void'(bytes.pop_front());
  endtask

  always @(posedge clk) if (!rst) begin
    if (sv) bytes.push_back(sd);
    if (sfe) n_fe++;
  end
  always @(negedge clk) if (!rst && bytes.size() >= 15) parse();

  // --------------------------------------------------------- mechanisms
  int n_go_hi, n_go_lo, n_dump_hi, n_dump_lo, n_capture, n_major, n_sync, n_sreset, n_deploy;
  int n_inhib, n_hist_ready_c, n_nco, n_pps;
  always @(posedge clk) if (!rst) begin
    if (dut.act[ACT_GO_HIGH])     n_go_hi++;
    if (dut.act[ACT_GO_LOW])      n_go_lo++;
    if (dut.act[ACT_DUMP_HIGH])   n_dump_hi++;
    if (dut.act[ACT_DUMP_LOW])    n_dump_lo++;
    if (dut.act[ACT_CAPTURE_RAW]) n_capture++;
    if (dut.major_tick)           n_major++;
    if (dut.met_sync_valid)       n_sync++;
    if (dut.stats_reset)          n_sreset++;
    if (dut.fire_cmd)             n_deploy++;
    if (dut.pps_edge)             n_pps++;
    if (dut.g_ch[2].u_dsp.hist_ready) n_hist_ready_c++;
    if (dut.g_ch[1].u_dsp.mode == MODE_NCO && dut.act[ACT_GO_HIGH]) n_nco++;
  end

  task automatic until_sec(real t);
    while (real'(cyc) < t * real'(S)) @(negedge clk);
  endtask

  int inhib0;
  initial begin
    cyc = 0; spike = 0; cv = 0; cd = 0; deploy_switch_n = '1; n_hk_conv = 0;
    last_hist_chan = -1;
    foreach (fire_secs[a]) fire_secs[a] = 0;
    repeat (10) @(posedge clk);
    rst = 0;
    repeat (10) @(negedge clk);
    // DSP registers: test, high count, mode, low count for A..D
    command(8'h00, '{16'h0044, 16'd4, 16'd2, 16'd2,
                     16'd800,  16'd4, 16'd3, 16'd2,
                     16'h0044, 16'd4, 16'd0, 16'd2,
                     16'h0044, 16'd4, 16'd2, 16'd2});
    command(8'h1A, '{16'h0008});               // raw telemetry in microframe 3
    command(8'h30, '{16'h0001, 16'h0000});     // lander MET sync
    command(8'h02, '{16'h0000}, 1);            // bad checksum: must be refused
    check(dut.dsp_reg[2] == 16'd2, "refused command wrote a register");
    command(8'h40, '{16'h0001});               // deploy antenna B
    until_sec(1.2);
    spike = 1; @(negedge clk); spike = 0;
    until_sec(2.5);
    command(8'h41, '{16'h0001});               // statistics reset
    until_sec(6.5);
    command(8'h20, '{16'h2056, 16'h0002});     // priority packets dwell on B
    until_sec(9.3);
    command(8'h20, '{16'h2046});               // spectra inhibited
    inhib0 = int'(dut.u_tlm.pkt_inhibited);
    until_sec(10.4);
    repeat (20) @(negedge clk);

    check(n_bad == 0 && n_fe == 0, $sformatf("%0d bad packets, %0d framing errors", n_bad, n_fe));
    check(n_ack == 7 && n_nak == 1, $sformatf("acks %0d naks %0d", n_ack, n_nak));
    check(n_hist_hi_ok == 3, $sformatf("high-band spectra good: %0d", n_hist_hi_ok));
    check(n_hist_lo_ok == 2, $sformatf("low-band spectra good: %0d", n_hist_lo_ok));
    check(n_hist_chan[2] == 0 && n_hist_ready_c == 0, "OFF core produced a spectrum");
    check(n_raw_ok == 4 && n_pkt[4] == 4, $sformatf("raw packets %0d good %0d", n_pkt[4], n_raw_ok));
    check(n_hk_ok == 1 && n_pkt[1] == 1, $sformatf("HK packets %0d good %0d", n_pkt[1], n_hk_ok));
    check(n_prio_ok == 3 && n_pkt[2] == 3, $sformatf("priority packets %0d good %0d", n_pkt[2], n_prio_ok));
    check(int'(dut.u_tlm.pkt_inhibited) >= inhib0 + 4 && n_hist_late == 0, "spectra not inhibited");
    check(n_met_ok == n_pkt[1] + n_pkt[2] + n_pkt[3] + n_pkt[4], "lander MET in headers");
    check(dut.u_dep.deploy_time[1] == 8'd2 && dut.u_dep.deployed == 4'b0010,
          $sformatf("deploy time %0d", dut.u_dep.deploy_time[1]));
    check(int'(pkt_sent) == n_pkt[1] + n_pkt[2] + n_pkt[3] + n_pkt[4], "packet count");

    $display("mechanisms: go_high %0d go_low %0d dump_high %0d dump_low %0d capture %0d",
             n_go_hi, n_go_lo, n_dump_hi, n_dump_lo, n_capture);
    $display("  major %0d pps %0d sync %0d stats_reset %0d deploy %0d nco %0d rotate %0d",
             n_major, n_pps, n_sync, n_sreset, n_deploy, n_nco, n_rotate);
    $display("  packets hk %0d prio %0d hist %0d raw %0d inhibited %0d nak %0d",
             n_pkt[1], n_pkt[2], n_pkt[3], n_pkt[4], int'(dut.u_tlm.pkt_inhibited), n_nak);
    check(n_go_hi > 0,  "GO HIGH never happened");
    check(n_go_lo > 0,  "GO LOW never happened");
    check(n_dump_hi > 0, "DUMP HIGH never happened");
    check(n_dump_lo > 0, "DUMP LOW never happened");
    check(n_capture > 0, "raw capture never happened");
    check(n_major > 0,  "major frame never ended");
    check(n_pps > 0,    "no PPS edge");
    check(n_sync > 0,   "MET sync never happened");
    check(n_sreset > 0, "statistics reset never happened");
    check(n_deploy > 0, "deployment never happened");
    check(n_nco > 0,    "NCO mode never ran");
    check(n_rotate > 0, "channel rotation never happened");
    check(n_nak > 0,    "no command refused");
    check(n_hk_conv > 0, "no housekeeping conversion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
