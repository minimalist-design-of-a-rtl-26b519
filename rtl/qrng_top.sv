// qrng_top: the digital part of the quantum random number generator.
//
// A single-photon detector, lit by an LED, clicks at random times. The
// chain below turns its clicks into unbiased, independent random bits:
//
//   spd_click -> time_counter -> pre_conversion -> symbol_buffer
//             -> elias_lut -> bit_unpacker -> rnd_bit / rnd_valid
//   spd_click -> time_counter.click -> rate_control -> led_level
//
// time_counter measures each waiting time in 16 ns cycles; pre_conversion
// drops waiting times below 160 ns and maps the rest onto letters A..D;
// symbol_buffer packs 10 letters into a 20-bit address; elias_lut holds for
// every address the bits the Elias permutation method extracts from it
// (0 to 14 bits, coded in 16); bit_unpacker strips the coding and emits the
// bits serially. rate_control keeps the click rate at 1.2 MHz by steering
// the LED current setting led_level, which goes to an external DAC.
//
// The monitoring outputs give one pulse per click (click_seen), per
// interval discarded by the dead-time filter (interval_dropped), per block
// read from the table (block_valid, with the entry on block_word) and per
// rate-loop update (rate_update).
//
// After reset the table is filled (2^(2N) cycles); ready then rises and
// letters are taken from that point on. At 1.2 MHz of clicks the design
// produces about 1.2 Mbit/s: roughly 1.0 MHz of letters survive the filter,
// and a block of 10 letters yields 12 bits on average.
//
// The chain and all numbers named above follow the paper; the handling of
// the table fill, the LED setting format and the serial output are this
// design's own choices.
module qrng_top #(
  parameter int unsigned CNT_W         = 16,
  parameter int unsigned CUTOFF        = qrng_pkg::CUTOFF_CYCLES,
  parameter int unsigned N             = qrng_pkg::BLOCK_LEN,
  parameter int unsigned READ_LATENCY  = 6,
  parameter int unsigned WINDOW_CYCLES = 62_500_000,
  parameter int unsigned TARGET_COUNT  = 1_200_000,
  parameter int unsigned LEVEL_W       = 16,
  parameter int unsigned GAIN_SHIFT    = 4,
  parameter int unsigned LEVEL_INIT    = 1 << (LEVEL_W - 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               spd_click,
  output logic [LEVEL_W-1:0] led_level,
  output logic               ready,
  output logic               rnd_valid,
  output logic               rnd_bit,
  // Monitoring: one-cycle pulses and the raw table entry.
  output logic               click_seen,
  output logic               interval_dropped,
  output logic               block_valid,
  output logic [qrng_pkg::LUT_DATA_W-1:0] block_word,
  output logic               rate_update
);

  localparam int unsigned ADDR_W = 2 * N;
  localparam int unsigned DATA_W = qrng_pkg::LUT_DATA_W;

  logic                click;
  logic                interval_valid;
  logic [CNT_W-1:0]    interval;
  logic                interval_long;
  logic                sym_valid;
  qrng_pkg::symbol_t   sym;
  logic                rejected;
  logic                addr_valid;
  logic [ADDR_W-1:0]   addr;
  logic                lut_valid;
  logic [DATA_W-1:0]   lut_data;

  time_counter #(.CNT_W(CNT_W)) u_time_counter (
    .clk, .rst_n, .spd_click,
    .click, .interval_valid, .interval, .interval_long
  );

  pre_conversion #(.CUTOFF(CUTOFF), .CNT_W(CNT_W)) u_pre_conversion (
    .clk, .rst_n, .interval_valid, .interval, .interval_long,
    .sym_valid, .sym, .rejected
  );

  // Letters are only collected once the table can be read.
  symbol_buffer #(.N(N)) u_symbol_buffer (
    .clk, .rst_n,
    .sym_valid (sym_valid && ready),
    .sym,
    .addr_valid, .addr
  );

  elias_lut #(.N(N), .DATA_W(DATA_W), .READ_LATENCY(READ_LATENCY)) u_elias_lut (
    .clk, .rst_n, .ready,
    .rd_en    (addr_valid),
    .rd_addr  (addr),
    .rd_valid (lut_valid),
    .rd_data  (lut_data)
  );

  bit_unpacker #(.DATA_W(DATA_W)) u_bit_unpacker (
    .clk, .rst_n,
    .word_valid (lut_valid),
    .word       (lut_data),
    .rnd_valid, .rnd_bit,
    .busy       ()
  );

  assign click_seen       = click;
  assign interval_dropped = rejected;
  assign block_valid      = lut_valid;
  assign block_word       = lut_data;

  rate_control #(
    .WINDOW_CYCLES (WINDOW_CYCLES),
    .TARGET_COUNT  (TARGET_COUNT),
    .LEVEL_W       (LEVEL_W),
    .GAIN_SHIFT    (GAIN_SHIFT),
    .LEVEL_INIT    (LEVEL_INIT)
  ) u_rate_control (
    .clk, .rst_n, .click,
    .level  (led_level),
    .update (rate_update)
  );

endmodule
