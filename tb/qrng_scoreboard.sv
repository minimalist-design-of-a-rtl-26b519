// qrng_scoreboard: reference model of the whole generator for the
// end-to-end testbenches.
//
// It sees the detector model's clicks (click_now, one pulse per click at
// the cycle the detector output rises) and rebuilds, independently of the
// RTL, what the generator must produce: the waiting times, the dead-time
// filter's decisions, the letters, the blocks of N letters and, through
// tb_ref_pkg::ref_code(), the table entry and the random bits of each
// block. It compares them with the generator's block_word stream and its
// serial bit stream, and counts how often each mechanism occurred.
//
// Timing it relies on: a letter leaves the pre-conversion four cycles after
// the detector edge and is collected only if ready is high in that cycle.
// All signals are sampled on the rising clock edge; the design's outputs
// only while rst_n is high.
module qrng_scoreboard #(
  parameter int unsigned N      = 10,
  parameter int unsigned CNT_W  = 16,
  parameter int unsigned CUTOFF = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        click_now,
  input  logic        ready,
  input  logic        interval_dropped,
  input  logic        block_valid,
  input  logic [15:0] block_word,
  input  logic        rnd_valid,
  input  logic        rnd_bit
);
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint prev_click = -1;
  longint due [$];
  int     due_letter [$];
  longint unsigned exp_words [$];
  int     exp_bits [$];
  longint unsigned cur_word = 0;
  int     cur_len = 0;

  // Mechanism counters.
  int n_clicks = 0, n_intervals = 0, n_filtered = 0, n_dut_dropped = 0;
  int n_letters = 0, n_up = 0, n_down = 0, n_long = 0;
  int n_before_ready = 0, n_blocks = 0, n_empty_blocks = 0, n_bits = 0;
  int n_letter [4] = '{0, 0, 0, 0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (click_now) begin
      n_clicks++;
      if (prev_click >= 0) begin
        longint t;
        t = cyc - prev_click;
        n_intervals++;
        if (t >= (64'd1 << CNT_W)) n_long++;
        if (t < longint'(CUTOFF)) begin
          n_filtered++;
        end else begin
          due.push_back(cyc + 4);
          due_letter.push_back(ref_letter(t, CUTOFF));
          if (((t - longint'(CUTOFF)) % 8) < 4) n_up++;
          else n_down++;
        end
      end
      prev_click = cyc;
    end
    if (due.size() > 0 && due[0] == cyc) begin
      int l;
      void'(due.pop_front());
      l = due_letter.pop_front();
      if (!ready) begin
        n_before_ready++;
      end else begin
        n_letters++;
        n_letter[l]++;
        cur_word = cur_word * 4 + longint'(l);
        cur_len++;
        if (cur_len == N) begin
          longint unsigned code;
          int k;
          code = ref_code(cur_word, N);
          k = code_bits(code);
          exp_words.push_back(code);
          for (int i = k - 1; i >= 0; i--) exp_bits.push_back(int'((code >> i) & 1));
          cur_word = 0;
          cur_len = 0;
        end
      end
    end
    if (rst_n && interval_dropped) n_dut_dropped++;
    if (rst_n && block_valid) begin
      n_blocks++;
      check(exp_words.size() > 0, "block without a reference block");
      if (exp_words.size() > 0) begin
        longint unsigned e;
        e = exp_words.pop_front();
        check(longint'(block_word) == e, $sformatf("block entry %h expected %h", block_word, e));
        if (e == 1) n_empty_blocks++;
      end
    end
    if (rst_n && rnd_valid) begin
      n_bits++;
      check(exp_bits.size() > 0, "random bit without a reference bit");
      if (exp_bits.size() > 0) begin
        int e;
        e = exp_bits.pop_front();
        check(int'(rnd_bit) == e, "random bit differs from the reference");
      end
    end
  end
endmodule
