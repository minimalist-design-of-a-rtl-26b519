// symbol_buffer: collects N successive letters into one look-up address.
//
// Each letter is two bits; N = 10 letters make the 20-bit address of the
// extraction table. Letters are shifted in from the right, so the first
// letter of a block ends up in the top two address bits. When the N-th
// letter arrives the complete address is presented with a one-cycle
// addr_valid pulse (registered, one cycle after that letter's sym_valid)
// and the buffer starts the next block empty: blocks do not overlap.
//
// The block length follows the paper; the letter order inside the address
// is this design's choice. Any fixed order gives the same randomness, as
// the table is built for the same order.
module symbol_buffer
  import qrng_pkg::*;
#(
  parameter int unsigned N = qrng_pkg::BLOCK_LEN,
  localparam int unsigned ADDR_W = 2 * N
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sym_valid,
  input  symbol_t           sym,
  output logic              addr_valid,
  output logic [ADDR_W-1:0] addr
);

  localparam int unsigned FILL_W = $clog2(N + 1);

  logic [ADDR_W-1:0] shift_q;
  logic [FILL_W-1:0] fill_q;
  logic [ADDR_W-1:0] shift_next;

  assign shift_next = (N > 1) ? {shift_q[ADDR_W-3:0], sym} : ADDR_W'(sym);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_q    <= '0;
      fill_q     <= '0;
      addr_valid <= 1'b0;
      addr       <= '0;
    end else begin
      addr_valid <= 1'b0;
      if (sym_valid) begin
        shift_q <= shift_next;
        if (fill_q == FILL_W'(N - 1)) begin
          fill_q     <= '0;
          addr_valid <= 1'b1;
          addr       <= shift_next;
        end else begin
          fill_q <= fill_q + 1'b1;
        end
      end
    end
  end

endmodule
