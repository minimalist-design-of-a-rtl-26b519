// tb_ref_pkg: reference models shared by the testbenches, written
// independently of the RTL.
//
// ref_letter()  maps an interval to its letter from a literal table of the
//               up-down sequence A B C D D C B A.
// ref_code()    computes a table entry the textbook way: the lexicographic
//               rank of a block among the arrangements of its letters is the
//               sum, over positions, of the arrangements of the remaining
//               letters that put a smaller letter at that position, each a
//               multinomial coefficient from 64-bit factorials; the rank is
//               then placed in power-of-two groups taken largest first.
// brute_code()  gets the same entry by enumerating every block of the same
//               length and counting those with the same letters (only for
//               short blocks).
package tb_ref_pkg;

  function automatic int ref_letter(input longint unsigned t, input int cutoff);
    int seq [8] = '{0, 1, 2, 3, 3, 2, 1, 0};
    return seq[int'((t - longint'(cutoff)) % 8)];
  endfunction

  function automatic longint unsigned fact(input int n);
    longint unsigned f = 1;
    for (int i = 2; i <= n; i++) f *= longint'(i);
    return f;
  endfunction

  function automatic longint unsigned arrangements(input int c [4]);
    longint unsigned d = 1;
    int s = 0;
    for (int l = 0; l < 4; l++) begin
      s += c[l];
      d *= fact(c[l]);
    end
    return fact(s) / d;
  endfunction

  function automatic int letter_at(input longint unsigned word, input int n, input int i);
    return int'((word >> (2 * (n - 1 - i))) & 3);
  endfunction

  // Turn (rank, number of arrangements) into 1 << k | index.
  function automatic longint unsigned group_code(input longint unsigned rank,
                                                 input longint unsigned total);
    longint unsigned rest = rank;
    for (int b = 62; b >= 0; b--) begin
      if (((total >> b) & 1) != 0) begin
        if (rest < (64'd1 << b)) return (64'd1 << b) | rest;
        rest -= (64'd1 << b);
      end
    end
    return 0;
  endfunction

  function automatic longint unsigned ref_code(input longint unsigned word, input int n);
    int c [4] = '{0, 0, 0, 0};
    longint unsigned rank = 0;
    int s;
    for (int i = 0; i < n; i++) c[letter_at(word, n, i)]++;
    begin
      int r [4] = c;
      longint unsigned total = arrangements(c);
      for (int i = 0; i < n; i++) begin
        s = letter_at(word, n, i);
        for (int l = 0; l < s; l++) begin
          if (r[l] > 0) begin
            r[l]--;
            rank += arrangements(r);
            r[l]++;
          end
        end
        r[s]--;
      end
      return group_code(rank, total);
    end
  endfunction

  function automatic longint unsigned brute_code(input longint unsigned word, input int n);
    int c [4] = '{0, 0, 0, 0};
    longint unsigned rank = 0;
    longint unsigned total = 0;
    for (int i = 0; i < n; i++) c[letter_at(word, n, i)]++;
    for (longint unsigned w = 0; w < (64'd1 << (2 * n)); w++) begin
      int d [4] = '{0, 0, 0, 0};
      for (int i = 0; i < n; i++) d[letter_at(w, n, i)]++;
      if (d == c) begin
        total++;
        if (w < word) rank++;
      end
    end
    return group_code(rank, total);
  endfunction

  // Number of data bits k in an entry 1 << k | index.
  function automatic int code_bits(input longint unsigned code);
    for (int b = 62; b >= 0; b--) if (((code >> b) & 1) != 0) return b;
    return -1;
  endfunction

endpackage
