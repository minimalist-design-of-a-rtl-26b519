// tb_rate_control: runs the count-rate loop with a short window (100
// cycles, target 30 clicks, gain shift 1, 8-bit level starting at 128) and
// random click patterns, and checks each window's new level against
// clamp(level + (30 - clicks) >>> 1, 0, 255) computed in the testbench,
// the update pulse period, and saturation at both ends. A second pass closes
// the loop through a plant whose click probability grows with the level
// and checks that the rate settles near the target.
module tb_rate_control;
  localparam int unsigned WIN = 100, TARGET = 30, LW = 8;

  logic clk = 0, rst_n = 0, click = 0;
  logic [LW-1:0] level;
  logic update;

  int checks = 0, failures = 0;

  rate_control #(.WINDOW_CYCLES(WIN), .TARGET_COUNT(TARGET), .LEVEL_W(LW), .GAIN_SHIFT(1),
                 .LEVEL_INIT(128)) dut (.*);

  always #8 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  int model_level = 128;
  int n_up = 0, n_down = 0, n_sat_hi = 0, n_sat_lo = 0;

  // Drive one window with `clicks` clicks at random cycles (or from the
  // plant), then check the new level.
  task automatic window(input int clicks, input bit closed_loop);
    int cnt = 0;
    int pos [$];
    int step;
    for (int c = 0; c < WIN; c++) begin
      if (closed_loop) click = (($urandom % 1024) < 2 * level);
      else             click = (c < clicks);
      if (click) cnt++;
      @(negedge clk);
      if (c != WIN - 1) check(!update, "update inside a window");
    end
    click = 0;
    check(update, "no update at the window end");
    step = (int'(TARGET) - cnt) >>> 1;
    if (step > 0) n_up++;
    if (step < 0) n_down++;
    model_level = model_level + step;
    if (model_level > 255) begin model_level = 255; n_sat_hi++; end
    if (model_level < 0)   begin model_level = 0;   n_sat_lo++; end
    check(int'(level) == model_level, $sformatf("level %0d expected %0d (clicks %0d)",
                                                level, model_level, cnt));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    // Align to the window: after reset release the window starts at once.
    rst_n = 1;
    check(level == 8'd128, "reset level");
    // The first window starts with the first rising edge after release.
    for (int i = 0; i < 40; i++) window(0, 0);     // no light: level rises to the top
    for (int i = 0; i < 40; i++) window(100, 0);   // too bright: level falls to zero
    for (int i = 0; i < 200; i++) window($urandom % 61, 0);
    model_level = int'(level);
    for (int i = 0; i < 200; i++) window(0, 1);
    // Plant: probability 2*level/1024 per cycle, 30 clicks/window at level 154.
    check(level > 120 && level < 190, $sformatf("closed loop settled at %0d", level));
    check(n_up > 0 && n_down > 0 && n_sat_hi > 0 && n_sat_lo > 0, "a loop case never happened");
    $display("up %0d down %0d sat_hi %0d sat_lo %0d", n_up, n_down, n_sat_hi, n_sat_lo);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
