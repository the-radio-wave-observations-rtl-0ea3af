// cordic_mag -- CORDIC magnitude of a complex word ("CORDIC: calculate
// magnitude").
//
// Vectoring-mode CORDIC after Volder: the vector is first folded into the
// right half plane, then ITER micro-rotations by +-atan(2^-i) drive the
// imaginary part to zero, leaving K*|z| in the real part (K = 1.64676).  A
// final multiply by round(2^16/K) = 39797 removes the gain.  Fully pipelined:
// one input per clock, result ITER+2 clocks later, with a tag carried along
// (the bin number in the DSP core).  The use of CORDIC for the magnitude is
// from the chain description; ITER and the widths are this design's choice.
//
// Interface: in_valid/in_re/in_im (signed IW)/in_tag, out_valid/out_mag
// (unsigned IW)/out_tag.
module cordic_mag #(
  parameter int unsigned IW    = 32,
  parameter int unsigned ITER  = 16,
  parameter int unsigned TAG_W = 9
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 in_valid,
  input  logic signed [IW-1:0] in_re,
  input  logic signed [IW-1:0] in_im,
  input  logic [TAG_W-1:0]     in_tag,
  output logic                 out_valid,
  output logic [IW-1:0]        out_mag,
  output logic [TAG_W-1:0]     out_tag
);
  localparam int unsigned G  = 4;        // fraction guard bits
  localparam int unsigned XW = IW + 3 + G;  // room for sqrt(2), K growth, guard

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  logic                 v [ITER+1];
  logic [TAG_W-1:0]     t [ITER+1];

  // stage 0: fold into the right half plane
  always_ff @(posedge clk) begin
    if (rst) begin
      v[0] <= 1'b0;
      x[0] <= '0;
      y[0] <= '0;
      t[0] <= '0;
    end else begin
      v[0] <= in_valid;
      t[0] <= in_tag;
      if (in_re < 0) begin
        x[0] <= -(XW'(in_re) <<< G);
        y[0] <= -(XW'(in_im) <<< G);
      end else begin
        x[0] <= XW'(in_re) <<< G;
        y[0] <= XW'(in_im) <<< G;
      end
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_it
    always_ff @(posedge clk) begin
      if (rst) begin
        v[i+1] <= 1'b0;
        x[i+1] <= '0;
        y[i+1] <= '0;
        t[i+1] <= '0;
      end else begin
        v[i+1] <= v[i];
        t[i+1] <= t[i];
        if (y[i] >= 0) begin
          x[i+1] <= x[i] + (y[i] >>> i);
          y[i+1] <= y[i] - (x[i] >>> i);
        end else begin
          x[i+1] <= x[i] - (y[i] >>> i);
          y[i+1] <= y[i] + (x[i] >>> i);
        end
      end
    end
  end

  // gain compensation
  logic [XW+16-1:0] prod;
  assign prod = (XW + 16)'(x[ITER]) * (XW + 16)'(39797) + (XW + 16)'(1 << (15 + G));
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_mag   <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= v[ITER];
      out_tag   <= t[ITER];
      out_mag   <= IW'(prod >> (16 + G));
    end
  end
endmodule
