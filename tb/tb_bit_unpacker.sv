// tb_bit_unpacker: sends coded entries 0...01 b(k-1)..b0 for every k from
// 0 to 15 and for random data, spaced like table reads, and checks that
// exactly the k data bits come out, first bit the cycle after the entry,
// most significant first, one per cycle, with busy high while sending.
module tb_bit_unpacker;
  localparam int unsigned DATA_W = 16;

  logic clk = 0, rst_n = 0;
  logic word_valid = 0;
  logic [DATA_W-1:0] word = '0;
  logic rnd_valid, rnd_bit, busy;

  int checks = 0, failures = 0;
  int expect_bits [$];
  int n_bits = 0;

  bit_unpacker #(.DATA_W(DATA_W)) dut (.*);

  always #8 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(negedge clk) if (rst_n && rnd_valid) begin
    n_bits++;
    check(expect_bits.size() > 0, "unexpected bit");
    if (expect_bits.size() > 0) begin
      int e;
      e = expect_bits.pop_front();
      check(int'(rnd_bit) == e, "wrong bit");
    end
  end

  task automatic send(input int k, input int unsigned data);
    int unsigned d;
    d = (k == 0) ? 0 : (data & ((1 << k) - 1));
    for (int i = k - 1; i >= 0; i--) expect_bits.push_back(int'((d >> i) & 1));
    @(negedge clk);
    word_valid = 1;
    word = DATA_W'((1 << k) | d);
    @(negedge clk);
    word_valid = 0;
    // One bit per cycle: after k cycles everything is out.
    repeat (k > 0 ? k - 1 : 0) begin
      check(busy || k == 1, "busy dropped early");
      @(negedge clk);
    end
    #1;
    check(expect_bits.size() == 0, $sformatf("k=%0d: %0d bits missing", k, expect_bits.size()));
    @(negedge clk);
    check(!busy && !rnd_valid, "extra output after the entry");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < DATA_W; k++) begin
      send(k, 32'hFFFF_FFFF);
      send(k, 32'h0);
      send(k, 32'hA5A5_A5A5);
    end
    for (int i = 0; i < 2000; i++) send($urandom % DATA_W, $urandom);
    $display("bits out: %0d", n_bits);
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
