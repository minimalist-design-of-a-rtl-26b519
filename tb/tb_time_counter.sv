// tb_time_counter: drives detector pulses at known cycles and checks every
// measured interval against the difference of the drive cycles, including
// intervals beyond the counter range (wrap flag, value modulo 2^16), the
// absence of an interval for the first click, and the three-cycle latency
// from the detector edge to the click/interval pulse.
module tb_time_counter;
  localparam int unsigned CNT_W = 16;

  logic clk = 0, rst_n = 0, spd_click = 0;
  logic click, interval_valid, interval_long;
  logic [CNT_W-1:0] interval;

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint drive_cyc [$];
  longint prev_drive = -1;
  int n_intervals = 0, n_long = 0, n_clicks = 0;

  time_counter #(.CNT_W(CNT_W)) dut (.*);

  always #8 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Outputs sampled at the falling edge.
  always @(negedge clk) if (rst_n) begin
    if (click) begin
      longint d;
      n_clicks++;
      check(drive_cyc.size() > 0, "click without a detector pulse");
      if (drive_cyc.size() > 0) begin
        d = drive_cyc.pop_front();
        check(cyc - d == 3, $sformatf("latency %0d, expected 3", cyc - d));
        if (prev_drive < 0) begin
          check(!interval_valid, "interval for the first click");
        end else begin
          longint t;
          t = d - prev_drive;
          check(interval_valid, "no interval for a click");
          check(interval == CNT_W'(t), $sformatf("interval %0d expected %0d", interval, t));
          check(interval_long == (t >= (64'd1 << CNT_W)), $sformatf("long flag for %0d", t));
          n_intervals++;
          if (interval_long) n_long++;
        end
        prev_drive = d;
      end
    end else begin
      check(!interval_valid, "interval without click");
    end
  end

  task automatic pulse_after(input int gap);
    // Detector high for 2 cycles, then low until the next rising edge.
    repeat (gap - 1) @(negedge clk);
    @(negedge clk);
    spd_click = 1;
    drive_cyc.push_back(cyc);
    @(negedge clk);
    @(negedge clk);
    spd_click = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    // Gaps are measured between rising edges: pulse_after() waits gap-1+1
    // cycles after the previous pulse's two high cycles.
    for (int i = 0; i < 400; i++) pulse_after(2 + ($urandom % 60));
    pulse_after(65534 - 2);
    pulse_after(65535 - 2);
    pulse_after(65536 - 2);
    pulse_after(65537 - 2);
    pulse_after(200000);
    for (int i = 0; i < 50; i++) pulse_after(2 + ($urandom % 10));
    repeat (10) @(negedge clk);
    check(n_intervals == 454, $sformatf("%0d intervals, expected 454", n_intervals));
    check(n_long == 3, $sformatf("%0d long intervals, expected 3", n_long));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
