// tb_elias_lut: checks the extraction table at two sizes.
//
// Four-letter blocks (N = 4): every one of the 256 entries is compared with
// a brute-force count over all 256 blocks, and the entries printed in the
// worked example for M = N = 4 are checked literally (BBBC -> 00, ...,
// CACA -> 0, CCAA -> 1, ABCD -> 0000, DCBA -> 111, ...). The mean output
// must be 628/256 bits per block.
//
// Ten-letter blocks (N = 10, the generator's size): all 2^20 entries are
// read. Their mean length must be 12574016 / 2^20 = 11.99 bits per block,
// i.e. 1.2 bits per letter. 16 entries are empty (one per letter pattern
// whose number of arrangements is odd, the four uniform blocks among them)
// and 229376 carry the maximum of 14 bits (16384 per pattern whose number
// of arrangements has bit 14 set). These counts were worked out apart from
// the RTL from the multinomial coefficients. 3000 random entries are compared with the
// multinomial reference, and the fill time (2^(2N) cycles) and read latency
// (6 cycles) are checked.
module tb_elias_lut;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #8 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------------------------------------------------------- N = 4
  logic        rd_en4 = 0, ready4, rd_valid4;
  logic [7:0]  rd_addr4 = '0;
  logic [15:0] rd_data4;
  elias_lut #(.N(4)) u4 (.clk, .rst_n, .ready(ready4), .rd_en(rd_en4), .rd_addr(rd_addr4),
                         .rd_valid(rd_valid4), .rd_data(rd_data4));

  // ---------------------------------------------------------------- N = 10
  logic        rd_en10 = 0, ready10, rd_valid10;
  logic [19:0] rd_addr10 = '0;
  logic [15:0] rd_data10;
  elias_lut u10 (.clk, .rst_n, .ready(ready10), .rd_en(rd_en10), .rd_addr(rd_addr10),
                 .rd_valid(rd_valid10), .rd_data(rd_data10));

  function automatic longint unsigned word_of(input string s);
    longint unsigned w = 0;
    for (int i = 0; i < s.len(); i++) w = w * 4 + longint'(s[i] - "A");
    return w;
  endfunction

  function automatic longint unsigned code_of(input string bits);
    longint unsigned c = 1;
    for (int i = 0; i < bits.len(); i++) c = c * 2 + longint'(bits[i] - "0");
    return c;
  endfunction

  longint unsigned table4 [256];
  longint unsigned sum10 = 0;
  int n_empty10 = 0, n_max10 = 0;
  longint issue_cyc [$];
  longint unsigned issue_addr [$];

  // Collect N = 10 reads.
  always @(negedge clk) begin
    if (rd_valid10) begin
      longint unsigned a;
      longint d;
      int k;
      a = issue_addr.pop_front();
      d = issue_cyc.pop_front();
      k = code_bits(longint'(rd_data10));
      sum10 += longint'(k);
      if (k == 0) n_empty10++;
      if (k == 14) n_max10++;
      if (a % 349 == 17) begin
        check(longint'(rd_data10) == ref_code(a, 10),
              $sformatf("N=10 entry %h = %h expected %h", a, rd_data10, ref_code(a, 10)));
      end
      if ((a & 20'hFF) == 0) check(cyc - d == 6, $sformatf("read latency %0d", cyc - d));
    end
  end

  initial begin
    longint unsigned reset_cyc;
    string fig_words [24] = '{"AAAA", "BBBC", "BBCB", "BCBB", "CBBB", "AACC", "ACAC", "ACCA",
                              "CAAC", "CACA", "CCAA", "ABBD", "ABDB", "BDAB", "BDBA", "DABB",
                              "DBAB", "DBBA", "ABCD", "ABDC", "CBDA", "CDAB", "CDBA", "DCBA"};
    string fig_bits  [24] = '{"", "00", "01", "10", "11", "00", "01", "10",
                              "11", "0", "1", "000", "001", "111", "00", "01",
                              "10", "11", "0000", "0001", "1111", "000", "001", "111"};
    int sum4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    reset_cyc = cyc;
    // N = 4: fill time, then read everything one entry at a time.
    while (!ready4) @(negedge clk);
    check(cyc - reset_cyc == 256 || cyc - reset_cyc == 257,
          $sformatf("N=4 fill took %0d cycles", cyc - reset_cyc));
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      rd_en4 = 1;
      rd_addr4 = 8'(a);
      @(negedge clk);
      rd_en4 = 0;
      repeat (4) begin
        @(negedge clk);
        check(!rd_valid4, "N=4 data before the read latency");
      end
      @(negedge clk);
      check(rd_valid4, "N=4 no data after 6 cycles");
      table4[a] = longint'(rd_data4);
    end
    sum4 = 0;
    for (int a = 0; a < 256; a++) begin
      check(table4[a] == brute_code(longint'(a), 4),
            $sformatf("N=4 entry %0d = %h expected %h", a, table4[a], brute_code(longint'(a), 4)));
      sum4 += code_bits(table4[a]);
    end
    check(sum4 == 628, $sformatf("N=4 total bits %0d expected 628", sum4));
    for (int i = 0; i < 24; i++) begin
      check(table4[word_of(fig_words[i])] == code_of(fig_bits[i]),
            $sformatf("%s -> %h expected %h", fig_words[i], table4[word_of(fig_words[i])],
                      code_of(fig_bits[i])));
    end
    // N = 10.
    while (!ready10) @(negedge clk);
    check(cyc - reset_cyc == (1 << 20) || cyc - reset_cyc == (1 << 20) + 1,
          $sformatf("N=10 fill took %0d cycles", cyc - reset_cyc));
    for (int a = 0; a < (1 << 20); a++) begin
      @(negedge clk);
      rd_en10 = 1;
      rd_addr10 = 20'(a);
      issue_addr.push_back(longint'(a));
      issue_cyc.push_back(cyc);
    end
    @(negedge clk);
    rd_en10 = 0;
    repeat (10) @(negedge clk);
    check(issue_addr.size() == 0, "N=10 reads lost");
    check(sum10 == 64'd12574016, $sformatf("N=10 total bits %0d expected 12574016", sum10));
    check(n_empty10 == 16, $sformatf("N=10 empty entries %0d", n_empty10));
    check(n_max10 == 229376, $sformatf("N=10 14-bit entries %0d", n_max10));
    for (longint unsigned w = 0; w < 4; w++) begin
      // AAAAAAAAAA .. DDDDDDDDDD
      check(u10.mem[20'(w * 20'h55555)] == 16'h0001, "uniform block not empty");
    end
    check(u10.mem[20'(word_of("AAABBBCCDD"))] == 16'h4000, "AAABBBCCDD");
    check(u10.mem[20'(word_of("DDCCBBBAAA"))] == 16'h001F, "DDCCBBBAAA");
    $display("mean bits per letter at N=10: %f", real'(sum10) / real'(1 << 20) / 10.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
