// bit_unpacker: turns the coded table entries into a plain random bit
// stream.
//
// A table entry carries k extracted bits (0 <= k <= DATA_W-1) as
// 0...0 1 b(k-1) .. b0: the highest set bit is a marker and everything
// below it is data. The unpacker finds the marker and then sends
// b(k-1) first, down to b0, one bit per cycle with rnd_valid. An entry
// 16'h0001 (k = 0, a block whose letters were all equal) yields nothing.
//
// Timing: the first bit of an entry appears the cycle after word_valid;
// an entry with k bits keeps busy high for k cycles. There is no
// backpressure. In the generator an entry comes at most once per block of
// N letters, and each letter takes at least CUTOFF cycles, i.e. at least
// 100 cycles per block against at most 15 cycles of output; an assertion
// checks that no entry arrives while the previous one is being sent.
// The coding follows the paper; the serial form and bit order are this
// design's choice.
module bit_unpacker #(
  parameter int unsigned DATA_W = qrng_pkg::LUT_DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              word_valid,
  input  logic [DATA_W-1:0] word,
  output logic              rnd_valid,
  output logic              rnd_bit,
  output logic              busy
);

  localparam int unsigned CNT_W = $clog2(DATA_W + 1);

  logic [DATA_W-1:0] data_q;
  logic [CNT_W-1:0]  left_q;
  logic [CNT_W-1:0]  k;

  // Position of the marker bit = number of data bits below it.
  always_comb begin
    k = '0;
    for (int unsigned i = 0; i < DATA_W; i++) begin
      if (word[i]) k = CNT_W'(i);
    end
  end

  assign busy = (left_q != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_q    <= '0;
      left_q    <= '0;
      rnd_valid <= 1'b0;
      rnd_bit   <= 1'b0;
    end else begin
      rnd_valid <= 1'b0;
      if (word_valid && k != '0) begin
        // Left-align the data bits so the next bit is always data_q[MSB].
        data_q    <= (word << (DATA_W - 32'(k))) << 1;
        left_q    <= k - 1'b1;
        rnd_valid <= 1'b1;
        rnd_bit   <= word[k-1];
      end else if (busy) begin
        data_q    <= data_q << 1;
        left_q    <= left_q - 1'b1;
        rnd_valid <= 1'b1;
        rnd_bit   <= data_q[DATA_W-1];
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) word_valid |-> !busy)
    else $error("bit_unpacker: table entry arrived while the previous one was being sent");

endmodule
