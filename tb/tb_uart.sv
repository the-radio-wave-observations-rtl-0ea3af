// tb_uart -- self-checking testbench of the serial transmitter and receiver.
// A loop-back of uart_tx into uart_rx at 16 clocks per bit.  Sends 200
// random bytes back to back, checks each received byte and that a byte
// occupies 10 bit times; checks the line level of each bit of one frame
// against the 8N1 format; and injects a frame with a low stop bit, which
// must give frame_err and no data.
module tb_uart;
  localparam int DIV = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic tv, tready, txd, rxd, force_low, rv, ferr;
  logic [7:0] td, rd;
  uart_tx #(.DIV(DIV)) utx (.clk, .rst, .valid(tv), .data(td), .ready(tready), .txd);
  uart_rx #(.DIV(DIV)) urx (.clk, .rst, .rxd, .valid(rv), .data(rd), .frame_err(ferr));
  assign rxd = txd & !force_low;
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [7:0] sent [$];
  int nrx, bad, nferr, cyc, first_rx, last_rx;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rv && !rst) begin
      logic [7:0] w;
      if (sent.size() == 0) bad++;
      else begin w = sent.pop_front(); if (w != rd) begin bad++; $display("FAIL byte %h want %h at %0d", rd, w, nrx); end end
      nrx++;
      if (first_rx < 0) first_rx = cyc;
      last_rx = cyc;
    end
    if (ferr && !rst) nferr++;
  end

  initial begin
    tv = 0; td = 0; force_low = 0; nrx = 0; bad = 0; nferr = 0; cyc = 0; first_rx = -1;
    repeat (3) @(posedge clk); rst = 0;
    // format of one frame: 0xA5, sample each bit at its centre
    @(negedge clk); tv = 1; td = 8'hA5; sent.push_back(8'hA5);
    @(negedge clk); tv = 0;
    wait (txd == 0);
    repeat (DIV / 2) @(negedge clk);
    begin
      logic [9:0] want, got;
      want = {1'b1, 8'hA5, 1'b0};
      for (int b = 0; b < 10; b++) begin
        got[b] = txd;
        repeat (DIV) @(negedge clk);
      end
      checks++; if (got != want) begin failures++; $display("FAIL frame %b want %b", got, want); end
    end
    wait (tready);
    repeat (40) @(negedge clk);
    nrx = 0; first_rx = -1;
    for (int i = 0; i < 200; i++) begin
      logic [7:0] v;
      v = 8'($urandom);
      while (!tready) @(negedge clk);
      tv = 1; td = v; sent.push_back(v);
      @(negedge clk); tv = 0;
      @(negedge clk);
    end
    repeat (20 * DIV) @(negedge clk);
    checks++; if (nrx != 200 || bad != 0) begin failures++; $display("FAIL rx %0d bad %0d", nrx, bad); end
    // back-to-back: 199 byte intervals of 10 bit times + 2 clocks of handshake
    checks++;
    if (last_rx - first_rx < 199 * 10 * DIV || last_rx - first_rx > 199 * (10 * DIV + 3)) begin
      failures++; $display("FAIL rate: %0d clocks for 199 bytes", last_rx - first_rx);
    end
    // framing error: pull the line low through the stop bit
    @(negedge clk); tv = 1; td = 8'h3C;
    @(negedge clk); tv = 0;
    repeat (9 * DIV) @(negedge clk);
    force_low = 1;
    repeat (2 * DIV) @(negedge clk);
    force_low = 0;
    repeat (4 * DIV) @(negedge clk);
    checks++; if (nferr != 1 || nrx != 200) begin failures++; $display("FAIL framing err %0d rx %0d", nferr, nrx); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
