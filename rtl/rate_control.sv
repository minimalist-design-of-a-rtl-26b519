// rate_control: count-rate stabilisation loop.
//
// The generator needs a stationary click process: the letter statistics
// must not drift during the time it takes to see a large share of the 4^10
// possible blocks. A slow loop therefore holds the detector count rate at
// its target (1.2 million clicks per second) by adjusting the LED current.
//
// Clicks are counted over a window of WINDOW_CYCLES clock cycles (1 s at
// 62.5 MHz). At the end of each window the error e = TARGET_COUNT - count
// is integrated into the LED setting:
//
//   level <= clamp(level + (e >>> GAIN_SHIFT), 0, 2^LEVEL_W - 1)
//
// and the count restarts. Too few clicks raise the LED current, too many
// lower it. This is a pure integral loop: with a plant gain of G clicks per
// second per level step, it settles with a time constant of
// 2^GAIN_SHIFT / G windows. The paper gives only the 16 s time constant;
// GAIN_SHIFT = 4 yields it for G = 1 and must be tuned to the real LED and
// detector. The window, the integral law and the widths are this design's
// choices.
//
// Timing: update pulses for one cycle when a window closes; level changes
// on the same clock edge that raises update.
module rate_control #(
  parameter int unsigned WINDOW_CYCLES = 62_500_000,
  parameter int unsigned TARGET_COUNT  = 1_200_000,
  parameter int unsigned LEVEL_W       = 16,
  parameter int unsigned GAIN_SHIFT    = 4,
  parameter int unsigned LEVEL_INIT    = 32768
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               click,
  output logic [LEVEL_W-1:0] level,
  output logic               update
);

  localparam int unsigned WIN_W = $clog2(WINDOW_CYCLES + 1);
  // Wide enough for any count and for the signed level arithmetic.
  localparam int unsigned ACC_W = ((WIN_W > LEVEL_W) ? WIN_W : LEVEL_W) + 2;

  logic [WIN_W-1:0]       tick_q;
  logic [WIN_W-1:0]       count_q;
  logic                   window_end;
  logic [WIN_W-1:0]       count_final;
  logic signed [ACC_W-1:0] err;
  logic signed [ACC_W-1:0] next_level;

  assign window_end  = (tick_q == WIN_W'(WINDOW_CYCLES - 1));
  assign count_final = count_q + WIN_W'(click);

  always_comb begin
    err        = $signed(ACC_W'(TARGET_COUNT)) - $signed(ACC_W'(count_final));
    next_level = $signed(ACC_W'(level)) + (err >>> GAIN_SHIFT);
    if (next_level < 0)
      next_level = '0;
    else if (next_level > $signed(ACC_W'((64'd1 << LEVEL_W) - 1)))
      next_level = $signed(ACC_W'((64'd1 << LEVEL_W) - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick_q  <= '0;
      count_q <= '0;
      level   <= LEVEL_W'(LEVEL_INIT);
      update  <= 1'b0;
    end else begin
      update <= window_end;
      if (window_end) begin
        tick_q  <= '0;
        count_q <= '0;
        level   <= LEVEL_W'(next_level);
      end else begin
        tick_q  <= tick_q + 1'b1;
        count_q <= count_final;
      end
    end
  end

endmodule
