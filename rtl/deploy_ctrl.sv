// deploy_ctrl -- antenna deployment sequencer.
//
// Each STACER antenna is released by a frangibolt.  A fire command for
// antenna k switches its frangibolt heater output fire[k] on and starts a
// timer; only one antenna can be fired at a time, and a command that
// arrives while one is firing is refused (counted in refused).  The heater
// stays on until the antenna's micro switch reports deployment, or until
// TIMEOUT_S seconds have passed.  The time from firing to the switch is kept
// per antenna in seconds (deploy_time) and the switch states are reported in
// deployed.  One-at-a-time commanding, the micro switch and the timing of the
// deployment follow the description; the timeout and the refusal rule are
// this design's choice (the heater current of the two deployments commanded
// on the Moon flowed for tens of seconds).
//
// Interface: fire_cmd/fire_ant pulse from the command decoder, sec_tick from
// the time base, switch_n[k] low when antenna k is deployed (synchronised
// here), fire[k] to the frangibolt drivers.
module deploy_ctrl #(
  parameter int unsigned TIMEOUT_S = 90
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        fire_cmd,
  input  logic [1:0]  fire_ant,
  input  logic        sec_tick,
  input  logic [3:0]  switch_n,
  output logic [3:0]  fire,
  output logic [3:0]  deployed,
  output logic [7:0]  deploy_time [4],
  output logic        timed_out,
  output logic [7:0]  refused
);
  logic [3:0] sw_s1, sw_s2;
  logic       active;
  logic [1:0] ant;
  logic [7:0] secs;

  assign deployed = ~sw_s2;

  always_ff @(posedge clk) begin
    if (rst) begin
      sw_s1 <= '1;
      sw_s2 <= '1;
    end else begin
      sw_s1 <= switch_n;
      sw_s2 <= sw_s1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      active    <= 1'b0;
      ant       <= '0;
      secs      <= '0;
      fire      <= '0;
      timed_out <= 1'b0;
      refused   <= '0;
      for (int k = 0; k < 4; k++) deploy_time[k] <= '0;
    end else if (!active) begin
      if (fire_cmd) begin
        active    <= 1'b1;
        ant       <= fire_ant;
        secs      <= '0;
        fire      <= 4'b0001 << fire_ant;
        timed_out <= 1'b0;
      end
    end else begin
      if (fire_cmd) refused <= refused + 1'b1;
      if (sec_tick && secs != 8'hFF) secs <= secs + 1'b1;
      if (!sw_s2[ant]) begin
        active           <= 1'b0;
        fire             <= '0;
        deploy_time[ant] <= secs;
      end else if (secs >= 8'(TIMEOUT_S)) begin
        active    <= 1'b0;
        fire      <= '0;
        timed_out <= 1'b1;
      end
    end
  end
endmodule
