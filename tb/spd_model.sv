// spd_model: behavioural model of the light source and single-photon
// detector, for simulation only.
//
// Each clock cycle a photon is detected with probability
// level * P_PER_LEVEL_PPM / 2^LEVEL_W / 1e6 (the LED current setting sets
// the light intensity), giving geometrically distributed waiting times,
// the discrete form of a Poisson process. Non-ideal detector behaviour is
// added on top: no click within DEAD_CYCLES of the previous one (dead
// time), and after each click, with probability AFTERPULSE_PPM, a spurious
// click AFTERPULSE_DELAY cycles later (afterpulsing). A click is a
// high pulse of PULSE_CYCLES cycles on spd_click, changed on the falling
// clock edge. Clicks are produced only while enable is high. click_now
// pulses for one cycle at the start of each click, for the reference
// model of a testbench.
module spd_model #(
  parameter int unsigned LEVEL_W          = 16,
  parameter int unsigned P_PER_LEVEL_PPM  = 39000,
  parameter int unsigned DEAD_CYCLES      = 3,
  parameter int unsigned AFTERPULSE_PPM   = 50000,
  parameter int unsigned AFTERPULSE_DELAY = 5,
  parameter int unsigned PULSE_CYCLES     = 2
) (
  input  logic               clk,
  input  logic               enable,
  input  logic [LEVEL_W-1:0] level,
  output logic               spd_click,
  output logic               click_now
);

  int unsigned since;
  int unsigned afterpulse_in;
  real         p;

  initial begin
    spd_click     = 1'b0;
    click_now     = 1'b0;
    since         = 1000;
    afterpulse_in = 0;
  end

  always @(negedge clk) begin
    p = real'(level) * real'(P_PER_LEVEL_PPM) / real'(64'd1 << LEVEL_W) / 1.0e6;
    since     = since + 1;
    click_now = 1'b0;
    if (enable && since > DEAD_CYCLES) begin
      if ((afterpulse_in == 1) ||
          (real'($urandom % 1_000_000) < p * 1.0e6)) begin
        click_now = 1'b1;
      end
    end
    if (afterpulse_in > 0) afterpulse_in = afterpulse_in - 1;
    if (click_now) begin
      since = 0;
      if (($urandom % 1_000_000) < AFTERPULSE_PPM) afterpulse_in = AFTERPULSE_DELAY;
    end
    spd_click = (since < PULSE_CYCLES);
  end

endmodule
