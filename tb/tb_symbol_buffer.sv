// tb_symbol_buffer: sends random letters with random gaps and checks that
// every tenth letter closes a block whose 20-bit address holds the ten
// letters first-letter-high, one cycle after that letter, and that no
// address appears otherwise.
module tb_symbol_buffer;
  import qrng_pkg::*;
  localparam int unsigned N = 10;

  logic clk = 0, rst_n = 0;
  logic sym_valid = 0;
  symbol_t sym = SYM_A;
  logic addr_valid;
  logic [2*N-1:0] addr;

  int checks = 0, failures = 0;

  symbol_buffer #(.N(N)) dut (.*);

  always #8 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int blocks = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 300; b++) begin
      int letters [N];
      longint unsigned expect_addr;
      expect_addr = 0;
      for (int i = 0; i < N; i++) letters[i] = $urandom % 4;
      for (int i = 0; i < N; i++) expect_addr = expect_addr * 4 + longint'(letters[i]);
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        sym_valid = 1;
        sym = symbol_t'(letters[i]);
        @(negedge clk);
        sym_valid = 0;
        if (i == N - 1) begin
          check(addr_valid, "no address after the tenth letter");
          check(addr == (2*N)'(expect_addr), $sformatf("address %h expected %h", addr, expect_addr));
          blocks++;
        end else begin
          check(!addr_valid, "address before the block is complete");
        end
        repeat ($urandom % 3) begin
          @(negedge clk);
          check(!addr_valid, "address pulse longer than one cycle");
        end
      end
    end
    check(blocks == 300, "block count");
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
