// tb_qrng_top: end-to-end test of the generator at reduced sizes, chosen
// so that every mechanism occurs often in a short run: blocks of 4 letters
// (a 256-entry table), an 8-bit interval counter (so waiting times beyond
// its range occur), a 2000-cycle rate window and an 8-bit LED setting.
//
// A detector model with dead time and afterpulsing clicks at a rate set by
// led_level. The scoreboard rebuilds the expected table entries and random
// bits from the model's click times and compares them with the design's
// outputs. The test counts, and fails if any never occurred: intervals
// discarded by the dead-time filter, letters of all four kinds on both the
// rising and falling half of the mapping, wrapped (long) intervals, letters
// dropped while the table was still loading, blocks with no output bits,
// and rate-loop updates in both directions.
module tb_qrng_top;
  localparam int unsigned N = 4, CNT_W = 8, LW = 8;

  logic clk = 0, rst_n = 0;
  logic spd_click, click_now;
  logic [LW-1:0] led_level;
  logic ready, rnd_valid, rnd_bit, click_seen, interval_dropped, block_valid, rate_update;
  logic [15:0] block_word;

  always #8 clk = ~clk;

  qrng_top #(.CNT_W(CNT_W), .N(N), .WINDOW_CYCLES(2000), .TARGET_COUNT(38), .LEVEL_W(LW),
             .GAIN_SHIFT(0)) dut (.*);

  spd_model #(.LEVEL_W(LW), .P_PER_LEVEL_PPM(40000), .DEAD_CYCLES(3), .AFTERPULSE_PPM(50000),
              .AFTERPULSE_DELAY(5)) u_spd (
    .clk, .enable(rst_n), .level(led_level), .spd_click, .click_now);

  qrng_scoreboard #(.N(N), .CNT_W(CNT_W), .CUTOFF(10)) sb (.*);

  int checks = 0, failures = 0;
  int n_level_up = 0, n_level_down = 0, n_clicks_dut = 0;
  logic [LW-1:0] last_level;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && click_seen) n_clicks_dut++;
    if (rst_n && rate_update) begin
      if (led_level > last_level) n_level_up++;
      if (led_level < last_level) n_level_down++;
    end
    last_level <= led_level;
  end

  task automatic finish();
    $display("clicks %0d intervals %0d filtered %0d long %0d letters %0d (A %0d B %0d C %0d D %0d, up %0d down %0d)",
             sb.n_clicks, sb.n_intervals, sb.n_filtered, sb.n_long, sb.n_letters, sb.n_letter[0],
             sb.n_letter[1], sb.n_letter[2], sb.n_letter[3], sb.n_up, sb.n_down);
    $display("before ready %0d blocks %0d empty %0d bits %0d level up %0d down %0d final level %0d",
             sb.n_before_ready, sb.n_blocks, sb.n_empty_blocks, sb.n_bits, n_level_up,
             n_level_down, led_level);
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb.checks, failures + sb.failures);
    $finish;
  endtask

  initial begin
    last_level = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sb.n_blocks < 1500) @(negedge clk);
    repeat (50) @(negedge clk);
    check(sb.n_clicks == n_clicks_dut, "click count differs");
    check(sb.n_filtered == sb.n_dut_dropped, $sformatf("filtered %0d, design dropped %0d",
                                                        sb.n_filtered, sb.n_dut_dropped));
    check(sb.exp_words.size() == 0 && sb.exp_bits.size() == 0, "reference output left over");
    check(sb.n_filtered > 0, "dead-time filter never used");
    check(sb.n_long > 0, "no interval beyond the counter range");
    check(sb.n_up > 0 && sb.n_down > 0, "one half of the up-down mapping never used");
    for (int l = 0; l < 4; l++) check(sb.n_letter[l] > 0, "a letter never occurred");
    check(sb.n_before_ready > 0, "no letter arrived while the table was loading");
    check(sb.n_empty_blocks > 0, "no block without output");
    check(n_level_up > 0 && n_level_down > 0, "rate loop did not move both ways");
    check(sb.n_bits > 0, "no random bits");
    finish();
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    finish();
  end
endmodule
