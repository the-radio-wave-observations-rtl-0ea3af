// tb_spec_accum -- self-checking testbench of the spectral accumulator.
// A synthetic FFT stream (bit-reversed bin order, one sample every two
// clocks, known data per frame and bin) is integrated: the high band over
// 300 frames with words near full scale, so the sums need the full 32 bits,
// and the low band over 3 frames.  After each DUMP all 512 histogram words
// are read back and compared with |sum| computed here over exactly the
// frames the accumulator should take (after SKIP frame starts).  Also checks
// acc_done, hist_band, the integration time in frames, and that a DUMP of a
// band still being integrated is refused.
module tb_spec_accum;
  import rolses_pkg::*;
  localparam int N = 1024, SKIP = 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, fs, go, dump, hist_ready, acc_busy, dump_busy;
  logic signed [15:0] xr, xi;
  logic [9:0] bin;
  band_e go_band, dump_band, hist_band, acc_band;
  logic [15:0] num_fft, frames_done;
  logic [8:0] hist_addr;
  logic [31:0] hist_data;
  logic [1:0] acc_done;

  spec_accum #(.SKIP(SKIP)) dut (.clk, .rst, .in_valid, .in_re(xr), .in_im(xi), .in_bin(bin),
    .in_frame_start(fs), .go, .go_band, .num_fft, .dump, .dump_band, .hist_addr, .hist_data,
    .hist_band, .hist_ready, .acc_busy, .acc_band, .acc_done, .dump_busy, .frames_done);

  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // data of frame f (counted from the start of the stream), bin k
  function automatic int dre(int f, int k, bit big);
    if (big) return (k % 3 == 0) ? 32767 - (f % 5) : -32768 + ((k + f) % 7);
    return ((k * 37 + f * 11) % 2001) - 1000;
  endfunction
  function automatic int dim(int f, int k, bit big);
    if (big) return (k % 2 == 0) ? -32000 : 31000 + (f % 3);
    return ((k * 13 + f * 29) % 1501) - 750;
  endfunction

  int frame_no;       // frame being streamed
  bit big;
  bit streaming;
  // stream generator: one sample every two clocks
  initial begin
    in_valid = 0; xr = 0; xi = 0; bin = 0; fs = 0; frame_no = 0; streaming = 0;
    wait (!rst);
    forever begin
      for (int p = 0; p < N; p++) begin
        int k;
        k = 0;
        for (int b = 0; b < 10; b++) if (p & (1 << b)) k |= 1 << (9 - b);
        @(posedge clk);
        in_valid <= 1; fs <= (p == 0); bin <= 10'(k);
        xr <= 16'(dre(frame_no, k, big)); xi <= 16'(dim(frame_no, k, big));
        @(posedge clk);
        in_valid <= 0;
      end
      frame_no++;
    end
  end

  task automatic run_band(band_e b, int nf, bit bg);
    int go_frame, f0, bad, t0, t1;
    longint sr [NBINS], si [NBINS];
    big = bg;
    // issue GO in the middle of a frame
    wait (frame_no > 0);
    @(posedge clk); wait (bin == 10'd5); @(posedge clk);
    go <= 1; go_band <= b; num_fft <= 16'(nf);
    go_frame = frame_no;
    t0 = frame_no;
    @(posedge clk); go <= 0;
    // first accumulated frame: SKIP-th frame start after GO
    f0 = go_frame + SKIP;
    // a dump of the band being integrated is refused
    repeat (10) @(posedge clk);
    dump <= 1; dump_band <= b; @(posedge clk); dump <= 0; @(posedge clk);
    check(!dump_busy, "dump of integrating band refused");
    wait (acc_done[b]);
    t1 = frame_no;
    check(t1 - t0 == SKIP + nf, $sformatf("integration took %0d frames, want %0d", t1 - t0, SKIP + nf));
    check(!acc_busy, "idle after integration");
    for (int k = 0; k < NBINS; k++) begin
      sr[k] = 0; si[k] = 0;
      for (int f = f0; f < f0 + nf; f++) begin sr[k] += dre(f, k, bg); si[k] += dim(f, k, bg); end
    end
    @(posedge clk); dump <= 1; dump_band <= b; @(posedge clk); dump <= 0;
    @(posedge clk);
    check(dump_busy && !hist_ready, "dump started");
    wait (hist_ready);
    check(hist_band == b, "hist band");
    bad = 0;
    for (int k = 0; k < NBINS; k++) begin
      real want, err;
      hist_addr <= 9'(k); @(posedge clk); @(posedge clk); #1;
      want = $sqrt(real'(sr[k]) * real'(sr[k]) + real'(si[k]) * real'(si[k]));
      err = real'(hist_data) - want; if (err < 0) err = -err;
      checks++;
      if (err > want * 1e-4 + 2.0) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL band %0d bin %0d got %0d want %f", b, k, hist_data, want);
      end
    end
  endtask

  initial begin
    go = 0; dump = 0; go_band = BAND_HIGH; dump_band = BAND_HIGH; num_fft = 1; hist_addr = 0; big = 0;
    repeat (3) @(posedge clk); rst <= 0;
    run_band(BAND_HIGH, 300, 1'b1);
    run_band(BAND_LOW, 3, 1'b0);
    check(acc_done == 2'b11, "both bands done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
