// uart_rx -- asynchronous serial receiver (8 data bits, no parity, 1 stop).
//
// Used on the engineering bus, an RS-422 link at 115.2 kbit/s.  The line is
// synchronised with two flip-flops; a falling edge starts a bit timer of DIV
// clocks per bit which samples in the middle of each bit.  A byte with a
// valid stop bit is presented on data with a one-clock valid pulse; a bad
// stop bit raises frame_err for one clock instead.  The rate is from the
// interface description; the 8N1 framing is this design's choice.
module uart_rx #(
  parameter int unsigned DIV = 1042   // 120 MHz / 115200
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);
  localparam int unsigned CW = $clog2(DIV + 1);
  logic [1:0]    sync;
  logic          busy;
  logic [CW-1:0] cnt;
  logic [3:0]    bitn;
  logic [7:0]    sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync      <= 2'b11;
      busy      <= 1'b0;
      cnt       <= '0;
      bitn      <= '0;
      sh        <= '0;
      valid     <= 1'b0;
      data      <= '0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      if (!busy) begin
        if (!sync[1]) begin
          busy <= 1'b1;
          cnt  <= CW'(DIV / 2);
          bitn <= '0;
        end
      end else if (cnt == '0) begin
        cnt <= CW'(DIV - 1);
        if (bitn == 4'd0) begin
          if (sync[1]) busy <= 1'b0;      // false start
          bitn <= 4'd1;
        end else if (bitn <= 4'd8) begin
          sh   <= {sync[1], sh[7:1]};
          bitn <= bitn + 1'b1;
        end else begin
          busy <= 1'b0;
          if (sync[1]) begin
            valid <= 1'b1;
            data  <= sh;
          end else begin
            frame_err <= 1'b1;
          end
        end
      end else begin
        cnt <= cnt - 1'b1;
      end
    end
  end
endmodule
