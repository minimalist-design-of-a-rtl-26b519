// tb_qrng_top_full: the generator at its real sizes (10-letter blocks, the
// full 2^20-entry table, 16-bit counter, 1 s rate window), with no
// parameter changed.
//
// The detector model clicks at 1.2 million clicks per second when the LED
// setting is at its reset value. After the table has loaded (2^20 cycles,
// about 17 ms), 400 blocks are generated; every table entry and every
// random bit is compared with the reference model. The run also measures
// the rates and checks them against the design's figures: about 1.2 MHz of
// clicks, about 1.0 MHz of letters after the 160 ns filter, about 1.2 bits
// per letter and so about 1.2 Mbit/s of output.
module tb_qrng_top_full;
  logic clk = 0, rst_n = 0;
  logic spd_click, click_now;
  logic [15:0] led_level;
  logic ready, rnd_valid, rnd_bit, click_seen, interval_dropped, block_valid, rate_update;
  logic [15:0] block_word;

  always #8 clk = ~clk;

  qrng_top dut (.*);

  // 0.0192 clicks per cycle of 16 ns at level 32768 = 1.2 MHz.
  spd_model #(.LEVEL_W(16), .P_PER_LEVEL_PPM(38400), .DEAD_CYCLES(3), .AFTERPULSE_PPM(10000),
              .AFTERPULSE_DELAY(5)) u_spd (
    .clk, .enable(rst_n), .level(led_level), .spd_click, .click_now);

  qrng_scoreboard #(.N(10), .CNT_W(16), .CUTOFF(10)) sb (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks + sb.checks, failures + sb.failures);
    $finish;
  endtask

  initial begin
    longint t0, t1;
    int c0, l0, b0;
    real secs, click_rate, letter_rate, bit_rate;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!ready) @(negedge clk);
    check(sb.cyc > (1 << 20) - 10 && sb.cyc < (1 << 20) + 10, "table load time");
    t0 = sb.cyc;
    c0 = sb.n_clicks;
    l0 = sb.n_letters;
    b0 = sb.n_bits;
    while (sb.n_blocks < 400) @(negedge clk);
    t1 = sb.cyc;
    repeat (50) @(negedge clk);
    secs        = real'(t1 - t0) * 16.0e-9;
    click_rate  = real'(sb.n_clicks - c0) / secs;
    letter_rate = real'(sb.n_letters - l0) / secs;
    bit_rate    = real'(sb.n_bits - b0) / secs;
    $display("clicks %0.3f MHz, letters %0.3f MHz, output %0.3f Mbit/s, %0.3f bits/letter",
             click_rate / 1e6, letter_rate / 1e6, bit_rate / 1e6,
             real'(sb.n_bits - b0) / real'(sb.n_letters - l0));
    check(sb.exp_words.size() == 0 && sb.exp_bits.size() == 0, "reference output left over");
    check(click_rate > 1.1e6 && click_rate < 1.35e6, "click rate");
    check(letter_rate > 0.9e6 && letter_rate < 1.1e6, "letter rate");
    check(bit_rate > 1.0e6 && bit_rate < 1.4e6, "output bit rate");
    check(sb.n_filtered > 0, "dead-time filter never used");
    finish();
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    finish();
  end
endmodule
