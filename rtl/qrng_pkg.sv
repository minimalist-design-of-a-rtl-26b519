// qrng_pkg: types, constants and the extraction function shared by the
// generator's blocks.
//
// The generator measures waiting times between detector clicks in clock
// cycles of 16 ns, discards intervals shorter than 10 cycles (160 ns), maps
// each remaining interval onto a four-letter alphabet A..D and packs N = 10
// letters (2 bits each) into a 20-bit word. That word addresses a look-up
// table whose 16-bit entry holds the randomness extracted from the word by
// the Elias permutation-numbering method, coded as 0...0 1 b(k-1)..b0, where
// k is the number of extracted bits.
//
// elias_code() below is the rule by which the table is filled. It numbers the
// permutations of the word's multiset of letters in lexicographic order
// (A < B < C < D, first letter most significant, which is also the numeric
// order of the addresses), splits the P permutations into groups of
// decreasing powers of two following the binary digits of P, largest group
// first, and returns the word's index inside its group on as many bits as
// the group size has. A word whose letters are all equal has P = 1 and
// yields no bits (entry 16'h0001). The rule and the group order follow the
// worked example for four-letter words; the bit order inside an address
// (first letter in the top bits) is this design's choice.
package qrng_pkg;

  // Clock period of the interval counter, in ns (16 ns resolution).
  localparam int unsigned CLK_PERIOD_NS = 16;
  // Dead-time filter: intervals below this many cycles are discarded.
  localparam int unsigned CUTOFF_CYCLES = 10;
  // Letters per processing block and bits per letter (M = 4 letters).
  localparam int unsigned BLOCK_LEN     = 10;
  localparam int unsigned SYM_W         = 2;
  // Width of one look-up table entry.
  localparam int unsigned LUT_DATA_W    = 16;

  typedef enum logic [SYM_W-1:0] {
    SYM_A = 2'd0,
    SYM_B = 2'd1,
    SYM_C = 2'd2,
    SYM_D = 2'd3
  } symbol_t;

  // Largest block length the extraction function supports.
  localparam int unsigned MAX_BLOCK_LEN = 12;

  // n! for n <= 12 (fits 32 bits), as a table.
  function automatic int unsigned factorial(input int unsigned n);
    case (n)
      0, 1:    return 32'd1;
      2:       return 32'd2;
      3:       return 32'd6;
      4:       return 32'd24;
      5:       return 32'd120;
      6:       return 32'd720;
      7:       return 32'd5040;
      8:       return 32'd40320;
      9:       return 32'd362880;
      10:      return 32'd3628800;
      11:      return 32'd39916800;
      default: return 32'd479001600;
    endcase
  endfunction

  // Number of distinct arrangements of a multiset with letter counts c0..c3.
  function automatic int unsigned multinomial(input int unsigned c0, input int unsigned c1,
                                              input int unsigned c2, input int unsigned c3);
    return factorial(c0 + c1 + c2 + c3) /
           (factorial(c0) * factorial(c1) * factorial(c2) * factorial(c3));
  endfunction

  // Look-up table entry for a block of n letters (n <= 12) packed in word,
  // first letter in bits [2n-1:2n-2]. The result is 1 << k | index.
  function automatic logic [31:0] elias_code(input logic [31:0] word, input int unsigned n);
    int unsigned cnt [4];
    int unsigned rem [4];
    int unsigned sym;
    int unsigned nrem;
    int unsigned q;
    int unsigned rank;
    int unsigned base;
    int unsigned k;
    int unsigned idx;
    logic        found;
    for (int l = 0; l < 4; l++) cnt[l] = 0;
    for (int unsigned i = 0; i < MAX_BLOCK_LEN; i++) begin
      if (i < n) begin
        sym = 32'((word >> (2 * (n - 1 - i))) & 32'd3);
        cnt[sym] = cnt[sym] + 1;
      end
    end
    // Lexicographic rank. q is the number of arrangements of the letters not
    // yet visited; of those, q * rem[l] / nrem begin with letter l.
    for (int l = 0; l < 4; l++) rem[l] = cnt[l];
    q    = multinomial(cnt[0], cnt[1], cnt[2], cnt[3]);
    rank = 0;
    for (int unsigned i = 0; i < MAX_BLOCK_LEN; i++) begin
      if (i < n) begin
        sym  = 32'((word >> (2 * (n - 1 - i))) & 32'd3);
        nrem = n - i;
        for (int unsigned l = 0; l < 4; l++) begin
          if (l < sym) rank = rank + q * rem[l] / nrem;
        end
        q        = q * rem[sym] / nrem;
        rem[sym] = rem[sym] - 1;
      end
    end
    // Groups of 2^b arrangements, one per set bit b of the total, largest
    // first; the word's index inside its group is the output.
    q     = multinomial(cnt[0], cnt[1], cnt[2], cnt[3]);
    base  = 0;
    k     = 0;
    idx   = 0;
    found = 1'b0;
    for (int b = 31; b >= 0; b--) begin
      if (!found && q[b]) begin
        if (rank < base + (32'd1 << b)) begin
          k     = 32'(b);
          idx   = rank - base;
          found = 1'b1;
        end else begin
          base = base + (32'd1 << b);
        end
      end
    end
    return (32'd1 << k) | 32'(idx);
  endfunction

endpackage
