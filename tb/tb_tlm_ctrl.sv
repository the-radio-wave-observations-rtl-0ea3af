// tb_tlm_ctrl -- self-checking testbench of the telemetry controller.
// Models the histogram and raw memories (one-clock read, contents a known
// function of channel and address), random statistics and housekeeping
// words, and a byte sink whose ready line toggles at random.  Every packet
// is parsed and checked: sync, type, channel, band, route, both MET
// values, length, each payload byte and the checksum.  Scenarios: the
// default control word (priority dwell A, housekeeping dwell B, histograms
// rotate, raw rotate), raw with only two channels captured, an inhibited
// housekeeping route, histogram dwell on D, and several requests at once
// (served priority first).
module tb_tlm_ctrl;
  import rolses_pkg::*;
  localparam int NHK = 8, RD = 64;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic go_urgent, go_hk, go_dsp, go_raw, tx_valid, tx_ready, busy;
  logic [23:0] tlm_cfg;
  logic [31:0] met_lander, met_own;
  stats_t stats [NCHAN];
  logic [15:0] hk_words [NHK];
  logic [8:0] hist_addr;
  logic [MAG_W-1:0] hist_data [NCHAN];
  band_e hist_band [NCHAN];
  logic [NCHAN-1:0] hist_ready, raw_done;
  logic [5:0] raw_addr;
  logic signed [ADC_W-1:0] raw_data [NCHAN];
  logic [7:0] tx_data;
  logic [15:0] pkt_sent, pkt_inhibited;
  tlm_ctrl #(.NHK(NHK), .RAW_DEPTH(RD)) dut (.*);
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] hist_fn(int c, int a);
    return 32'(c * 32'h01000193 + a * 32'h9E3779B1);
  endfunction
  function automatic logic [13:0] raw_fn(int c, int a);
    return 14'(c * 1000 - a * 37);
  endfunction
  always @(posedge clk)
    for (int c = 0; c < NCHAN; c++) begin
      hist_data[c] <= hist_fn(c, int'(hist_addr));
      raw_data[c]  <= raw_fn(c, int'(raw_addr));
    end
  always @(posedge clk) tx_ready <= ($urandom % 3) == 0;

  // ---------------------------------------------------------- packet parser
  logic [7:0] bytes [$];
  always @(posedge clk) if (!rst && tx_valid && tx_ready) bytes.push_back(tx_data);

  typedef struct { int typ; int chan; int band; int route; } pkt_t;
  pkt_t got [$];
  int bad_pkts;

  function automatic logic [15:0] hk_word(int c, int i);
    logic [15:0] w [17];
    w[0] = 16'(stats[c].min_s);   w[1] = 16'(stats[c].max_s);  w[2] = 16'(stats[c].range_s);
    w[3] = 16'(stats[c].min_run); w[4] = 16'(stats[c].max_run);
    w[5] = stats[c].total_8s[31:16]; w[6] = stats[c].total_8s[15:0];
    w[7] = 16'(stats[c].average); w[8] = stats[c].oor_8s;
    for (int k = 0; k < NHK; k++) w[9 + k] = hk_words[k];
    return w[i];
  endfunction

  task automatic parse();
    while (bytes.size() >= 15) begin
      int len, typ, c, b;
      logic [7:0] x;
      bit ok;
      ok = 1;
      if (bytes[0] != 8'hFA || bytes[1] != 8'hF3) begin
        void'(bytes.pop_front()); bad_pkts++; continue;
      end
      len = {bytes[13], bytes[14]};
      if (bytes.size() < 15 + len + 1) return;
      typ = bytes[2]; c = bytes[3][1:0]; b = bytes[3][4];
      if ({bytes[5], bytes[6], bytes[7], bytes[8]} != met_lander) ok = 0;
      if ({bytes[9], bytes[10], bytes[11], bytes[12]} != met_own) ok = 0;
      x = 0;
      for (int i = 2; i < 15 + len; i++) x ^= bytes[i];
      if (x != bytes[15 + len]) begin ok = 0; $display("FAIL checksum"); end
      case (typ)
        1, 2: begin
          if (len != 2 * (9 + NHK)) ok = 0;
          else for (int i = 0; i < 9 + NHK; i++)
            if ({bytes[15 + 2*i], bytes[16 + 2*i]} != hk_word(c, i)) ok = 0;
        end
        3: begin
          if (len != 4 * NBINS || b != int'(hist_band[c])) ok = 0;
          else for (int i = 0; i < NBINS; i++)
            if ({bytes[15+4*i], bytes[16+4*i], bytes[17+4*i], bytes[18+4*i]} != hist_fn(c, i)) ok = 0;
        end
        4: begin
          if (len != 2 * RD) ok = 0;
          else for (int i = 0; i < RD; i++)
            if ({bytes[15+2*i], bytes[16+2*i]} != 16'($signed(raw_fn(c, i)))) ok = 0;
        end
        default: ok = 0;
      endcase
      if (!ok) begin bad_pkts++; $display("FAIL packet type %0d chan %0d", typ, c); end
      got.push_back('{typ, c, b, int'(bytes[4])});
      for (int i = 0; i < 16 + len; i++) void'(bytes.pop_front());
    end
  endtask

  task automatic go(bit u, bit h, bit d, bit r);
    @(negedge clk); go_urgent = u; go_hk = h; go_dsp = d; go_raw = r;
    @(negedge clk); go_urgent = 0; go_hk = 0; go_dsp = 0; go_raw = 0;
    // idle for 8 clocks in a row: all pending jobs done
    for (int idle = 0; idle < 8; idle = busy ? 0 : idle + 1) @(negedge clk);
    parse();
  endtask

  function automatic string list();
    string s = "";
    foreach (got[i]) s = {s, $sformatf("(%0d,%0d,%0d) ", got[i].typ, got[i].chan, got[i].route)};
    return s;
  endfunction

  initial begin
    go_urgent = 0; go_hk = 0; go_dsp = 0; go_raw = 0; bad_pkts = 0;
    tlm_cfg = TLM_CFG_DEFAULT;
    met_lander = 32'h0001_2345; met_own = 32'h00AB_CDEF;
    for (int c = 0; c < NCHAN; c++) begin
      stats[c] = stats_t'({$urandom, $urandom, $urandom, $urandom});
      hist_band[c] = band_e'(c[0]);
    end
    for (int k = 0; k < NHK; k++) hk_words[k] = 16'($urandom);
    hist_ready = 4'b1111; raw_done = 4'b1010;
    repeat (3) @(posedge clk); rst = 0;
    // priority: dwell A, route 10 (stream)
    go(1, 0, 0, 0);
    check(got.size() == 1 && got[0].typ == 2 && got[0].chan == 0 && got[0].route == 2, list());
    got.delete();
    // housekeeping: dwell B, route 01 (store)
    go(0, 1, 0, 0);
    check(got.size() == 1 && got[0].typ == 1 && got[0].chan == 1 && got[0].route == 1, list());
    got.delete();
    // histograms: rotate over A..D
    go(0, 0, 1, 0);
    check(got.size() == 4 && got[0].chan == 0 && got[1].chan == 1 && got[2].chan == 2 &&
          got[3].chan == 3 && got[3].typ == 3 && got[1].route == 1, list());
    got.delete();
    // raw: rotate, only B and D hold a capture
    go(0, 0, 0, 1);
    check(got.size() == 2 && got[0].chan == 1 && got[1].chan == 3 && got[0].typ == 4 &&
          pkt_inhibited == 2, list());
    got.delete();
    // housekeeping inhibited by its route bits
    tlm_cfg[7:6] = 2'b00;
    go(0, 1, 0, 0);
    check(got.size() == 0 && pkt_inhibited == 3, list());
    got.delete();
    // histogram dwell on D, stream and store
    tlm_cfg[23:20] = 4'd4; tlm_cfg[5:4] = 2'b11; met_own = 32'h00AB_CDF7;
    go(0, 0, 1, 0);
    check(got.size() == 1 && got[0].chan == 3 && got[0].route == 3 && got[0].band == 1, list());
    got.delete();
    // several requests at once: priority first, then histogram, then raw
    go(1, 1, 1, 1);
    check(got.size() == 4 && got[0].typ == 2 && got[1].typ == 3 && got[2].typ == 4 &&
          got[3].typ == 4, list());
    got.delete();
    check(bad_pkts == 0 && bytes.size() == 0, $sformatf("%0d bad packets", bad_pkts));
    check(pkt_sent == 13, $sformatf("pkt_sent %0d", pkt_sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
