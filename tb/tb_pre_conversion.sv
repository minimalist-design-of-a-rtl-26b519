// tb_pre_conversion: feeds intervals 1..300, long intervals and random ones,
// and checks each against the dead-time cutoff (10 cycles) and the literal
// up-down letter table, with the one-cycle latency of the outputs.
module tb_pre_conversion;
  import qrng_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned CNT_W = 16;

  logic clk = 0, rst_n = 0;
  logic interval_valid = 0, interval_long = 0;
  logic [CNT_W-1:0] interval = '0;
  logic sym_valid, rejected;
  symbol_t sym;

  int checks = 0, failures = 0;
  int n_letter [4] = '{0, 0, 0, 0};

  pre_conversion #(.CUTOFF(10), .CNT_W(CNT_W)) dut (.*);

  always #8 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic send(input longint unsigned t);
    @(negedge clk);
    interval_valid = 1;
    interval       = CNT_W'(t);
    interval_long  = (t >= (64'd1 << CNT_W));
    @(negedge clk);
    interval_valid = 0;
    if (t < 10) begin
      check(rejected && !sym_valid, $sformatf("interval %0d not rejected", t));
    end else begin
      check(sym_valid && !rejected, $sformatf("interval %0d rejected", t));
      check(int'(sym) == ref_letter(t, 10),
            $sformatf("interval %0d -> %0d expected %0d", t, sym, ref_letter(t, 10)));
      n_letter[sym]++;
    end
    @(negedge clk);
    check(!sym_valid && !rejected, "output not a single pulse");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (longint t = 1; t <= 300; t++) send(t);
    send(65535); send(65536); send(65537); send(65536 + 9); send(1000003);
    for (int i = 0; i < 500; i++) send($urandom % 5000);
    // Printed points of the mapping figure.
    check(ref_letter(12, 10) == 2 && ref_letter(16, 10) == 1, "reference table");
    for (int l = 0; l < 4; l++) check(n_letter[l] > 50, "letter never produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
