// uart_tx -- asynchronous serial transmitter (8 data bits, no parity, 1 stop).
//
// Drives the science bus (packets) and the engineering bus (command
// acknowledgements), RS-422 links at 115.2 kbit/s.  A byte is accepted when
// valid and ready are both high; it is then sent LSB first after a start bit,
// DIV clocks per bit, followed by one stop bit, during which ready is low.
// The line idles high.  The rate is from the interface description; the
// framing is this design's choice.
module uart_tx #(
  parameter int unsigned DIV = 1042
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       txd
);
  localparam int unsigned CW = $clog2(DIV + 1);
  logic [CW-1:0] cnt;
  logic [3:0]    bitn;
  logic [9:0]    sh;

  assign ready = (bitn == 4'd0);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt  <= '0;
      bitn <= '0;
      sh   <= '1;
      txd  <= 1'b1;
    end else if (bitn == 4'd0) begin
      txd <= 1'b1;
      if (valid) begin
        sh   <= {1'b1, data, 1'b0};
        bitn <= 4'd11;
        cnt  <= '0;
      end
    end else if (cnt == '0) begin
      if (bitn == 4'd1) begin
        bitn <= 4'd0;                 // stop bit has lasted DIV clocks
      end else begin
        txd  <= sh[0];
        sh   <= {1'b1, sh[9:1]};
        cnt  <= CW'(DIV - 1);
        bitn <= bitn - 1'b1;
      end
    end else begin
      cnt <= cnt - 1'b1;
    end
  end
endmodule
