// elias_lut: the extraction look-up table, 2^(2N) entries of 16 bits
// (N = 10: a 20-bit address space, 2 MB), standing for the flash memory
// chip that holds the pre-calculated table.
//
// Each entry is qrng_pkg::elias_code() of its own address: the address is a
// block of N two-bit letters, the entry is the extracted bit string coded as
// 0...0 1 b(k-1)..b0. In the original system the table is calculated
// offline and programmed into an external flash chip. Here the table is a
// memory array that a fill sequencer writes after reset, one entry per
// clock cycle, computing each entry with the same function; `ready` rises
// when all 2^(2N) entries are written (2^20 cycles, about 17 ms at 16 ns).
// The fill sequencer is this design's choice: it keeps the table out of any
// data file and lets the array be an ordinary RAM.
//
// Interface: once ready, a read is requested with rd_en and rd_addr in one
// cycle; the entry appears on rd_data with rd_valid exactly READ_LATENCY
// cycles later (READ_LATENCY >= 1). Reads are fully pipelined. Reads
// requested before ready are ignored (no rd_valid). The read latency stands
// for the flash chip's access time; its value and the synchronous read port
// are this design's choice, as the flash bus is not specified.
module elias_lut #(
  parameter int unsigned N            = qrng_pkg::BLOCK_LEN,
  parameter int unsigned DATA_W       = qrng_pkg::LUT_DATA_W,
  parameter int unsigned READ_LATENCY = 6,
  localparam int unsigned ADDR_W      = 2 * N
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ready,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_valid,
  output logic [DATA_W-1:0] rd_data
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [DATA_W-1:0] mem [DEPTH];

  // ---------------------------------------------------------------- fill
  logic [ADDR_W-1:0] fill_addr;
  logic              filling;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_addr <= '0;
      filling   <= 1'b1;
    end else if (filling) begin
      fill_addr <= fill_addr + 1'b1;
      if (fill_addr == ADDR_W'(DEPTH - 1)) filling <= 1'b0;
    end
  end

  assign ready = !filling;

  always_ff @(posedge clk) begin
    if (filling) mem[fill_addr] <= DATA_W'(qrng_pkg::elias_code(32'(fill_addr), N));
  end

  // ---------------------------------------------------------------- read
  // First stage: the array read. Further stages model the access time.
  logic [DATA_W-1:0] data_q  [READ_LATENCY];
  logic              valid_q [READ_LATENCY];

  always_ff @(posedge clk) begin
    data_q[0] <= mem[rd_addr];
    for (int unsigned s = 1; s < READ_LATENCY; s++) data_q[s] <= data_q[s-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned s = 0; s < READ_LATENCY; s++) valid_q[s] <= 1'b0;
    end else begin
      valid_q[0] <= rd_en && ready;
      for (int unsigned s = 1; s < READ_LATENCY; s++) valid_q[s] <= valid_q[s-1];
    end
  end

  assign rd_valid = valid_q[READ_LATENCY-1];
  assign rd_data  = data_q[READ_LATENCY-1];

endmodule
