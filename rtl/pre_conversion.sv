// pre_conversion: dead-time filter and alphabet mapping.
//
// The detector does not follow Poisson statistics right after a click (dead
// time, afterpulsing); intervals shorter than CUTOFF cycles (10 cycles =
// 160 ns) are therefore discarded. Every other interval T is turned into one
// of four letters by its offset o = (T - CUTOFF) mod 8:
//
//   o : 0 1 2 3 4 5 6 7
//   letter: A B C D D C B A
//
// i.e. the letters run up and down ("bi-directional" coding) instead of
// repeating A B C D. Waiting times are exponentially distributed, so
// neighbouring intervals are slightly more likely than later ones; running
// the letters back and forth spreads that slope evenly over the four
// letters and gives a flatter letter distribution than T mod 4. The
// extractor downstream stays correct for any letter distribution; the
// flatter one only loses less entropy.
//
// Inputs come from time_counter: interval is T modulo 2^CNT_W, interval_long
// marks T >= 2^CNT_W (always kept; the offset is still exact since 2^CNT_W
// is a multiple of 8). Outputs are registered: sym_valid or rejected pulses
// one cycle after interval_valid. The cutoff and the letter sequence follow
// the paper; the letter codes (A=0 .. D=3) are this design's choice.
module pre_conversion
  import qrng_pkg::*;
#(
  parameter int unsigned CUTOFF = qrng_pkg::CUTOFF_CYCLES,
  parameter int unsigned CNT_W  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             interval_valid,
  input  logic [CNT_W-1:0] interval,
  input  logic             interval_long,
  output logic             sym_valid,
  output symbol_t          sym,
  output logic             rejected
);

  logic             keep;
  logic [CNT_W-1:0] offset;
  logic [2:0]       phase;
  symbol_t          letter;

  always_comb begin
    keep   = interval_long || (interval >= CNT_W'(CUTOFF));
    offset = interval - CNT_W'(CUTOFF);
    phase  = offset[2:0];
    // First half of the period counts up, second half counts down.
    letter = phase[2] ? symbol_t'(~phase[1:0]) : symbol_t'(phase[1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym_valid <= 1'b0;
      sym       <= SYM_A;
      rejected  <= 1'b0;
    end else begin
      sym_valid <= interval_valid && keep;
      rejected  <= interval_valid && !keep;
      if (interval_valid && keep) sym <= letter;
    end
  end

endmodule
