// tb_cordic_mag -- self-checking testbench of the CORDIC magnitude.
// Feeds one vector per clock (axes, all four quadrants, extreme values and
// random words), checks every magnitude against sqrt(re^2+im^2) computed
// in floating point (relative error below 1e-4 plus 2 LSB), checks the tag
// travels with its result and the latency is ITER+2 = 18 register stages
// (19 counted from the cycle the input is set up to the cycle the result
// is seen).
module tb_cordic_mag;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic signed [31:0] re, im;
  logic [8:0] tag, otag;
  logic [31:0] mag;
  cordic_mag dut (.clk, .rst, .in_valid, .in_re(re), .in_im(im), .in_tag(tag),
                  .out_valid, .out_mag(mag), .out_tag(otag));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NV = 300;
  longint vr [NV], vi [NV];
  int sent_at [NV];
  int nout, cyc;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      real want, err;
      want = $sqrt(real'(vr[otag]) * real'(vr[otag]) + real'(vi[otag]) * real'(vi[otag]));
      err = real'(mag) - want;
      if (err < 0) err = -err;
      checks++;
      if (err > want * 1e-4 + 2.0 || otag != 9'(nout)) begin
        failures++;
        $display("FAIL tag=%0d (%0d,%0d) got %0d want %f", otag, vr[otag], vi[otag], mag, want);
      end
      checks++;
      if (cyc - sent_at[otag] != 19) begin
        failures++; $display("FAIL latency %0d", cyc - sent_at[otag]);
      end
      nout <= nout + 1;
    end
  end

  initial begin
    vr[0] = 1000; vi[0] = 0;    vr[1] = 0; vi[1] = 1000;
    vr[2] = -1000; vi[2] = 0;   vr[3] = 0; vi[3] = -1000;
    vr[4] = 2147483647; vi[4] = 2147483647;
    vr[5] = -2147483648; vi[5] = -2147483648;
    vr[6] = -300000; vi[6] = 400000;
    vr[7] = 0; vi[7] = 0;
    for (int i = 8; i < NV; i++) begin vr[i] = $signed($urandom); vi[i] = $signed($urandom); end
    for (int i = 200; i < NV; i++) begin vr[i] = vr[i] >>> 12; vi[i] = vi[i] >>> 16; end
    in_valid = 0; re = 0; im = 0; tag = 0; nout = 0; cyc = 0;
    repeat (3) @(posedge clk); rst <= 0;
    for (int i = 0; i < NV; i++) begin
      @(posedge clk);
      in_valid <= 1; re <= 32'(vr[i]); im <= 32'(vi[i]); tag <= 9'(i); sent_at[i] = cyc;
    end
    @(posedge clk); in_valid <= 0;
    repeat (30) @(posedge clk);
    checks++; if (nout != NV) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
