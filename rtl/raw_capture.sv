// raw_capture -- raw waveform memory of one ADC stream.
//
// On "GO CAPTURE RAW DATA" (capture pulse) the next DEPTH consecutive ADC
// samples are written to the memory; done is then set until the next
// capture.  Telemetry reads the waveform through rd_addr/rd_data (registered
// read, one clock).  The capture action and per-stream raw memories follow
// the description; DEPTH is this design's choice.
module raw_capture
  import rolses_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      adc_valid,
  input  logic signed [ADC_W-1:0]   adc_data,
  input  logic                      capture,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic signed [ADC_W-1:0]   rd_data,
  output logic                      busy,
  output logic                      done
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic signed [ADC_W-1:0] mem [DEPTH];
  logic [AW-1:0]           wa;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      done <= 1'b0;
      wa   <= '0;
    end else if (capture) begin
      busy <= 1'b1;
      done <= 1'b0;
      wa   <= '0;
    end else if (busy && adc_valid) begin
      wa <= wa + 1'b1;
      if (wa == AW'(DEPTH - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && adc_valid && !capture) mem[wa] <= adc_data;
    rd_data <= mem[rd_addr];
  end
endmodule
