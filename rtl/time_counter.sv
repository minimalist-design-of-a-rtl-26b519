// time_counter: measures the waiting time between successive detector
// clicks in cycles of the 16 ns clock.
//
// The detector output is asynchronous to the clock. It passes through a
// two-flop synchroniser, and a rising edge of the synchronised signal is one
// click. A counter holds the number of cycles since the last click; at each
// click the counter value is presented as the interval and the counter
// restarts. Intervals are integers >= 1; consecutive intervals of a Poisson
// click process are independent, which is why intervals rather than free-
// running time stamps are measured.
//
// The counter is CNT_W bits wide and wraps; interval_long flags an interval
// of 2^CNT_W cycles or more. Because 2^CNT_W is a multiple of 8 (the period
// of the letter mapping that follows), the low bits of a wrapped interval
// still give the exact letter. The first click after reset only starts the
// count and produces no interval.
//
// Timing: click and interval_valid are asserted together, three cycles after
// the detector edge (two synchroniser flops plus the edge register), as
// one-cycle pulses. The 16 ns resolution follows the paper; the counter
// width, the synchroniser and the wrap handling are this design's choices.
module time_counter #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             spd_click,
  output logic             click,
  output logic             interval_valid,
  output logic [CNT_W-1:0] interval,
  output logic             interval_long
);

  logic [2:0]       sync_q;
  logic             edge_det;
  logic [CNT_W-1:0] cnt_q;
  logic             long_q;
  logic             started_q;

  // sync_q[0], sync_q[1]: synchroniser; sync_q[2]: previous level.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[1:0], spd_click};
  end

  assign edge_det = sync_q[1] && !sync_q[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q          <= '0;
      long_q         <= 1'b0;
      started_q      <= 1'b0;
      click          <= 1'b0;
      interval_valid <= 1'b0;
      interval       <= '0;
      interval_long  <= 1'b0;
    end else begin
      click          <= edge_det;
      interval_valid <= edge_det && started_q;
      if (edge_det) begin
        // The click cycle itself counts as the last cycle of this interval.
        interval      <= cnt_q + 1'b1;
        interval_long <= long_q || (cnt_q == '1);
        cnt_q         <= '0;
        long_q        <= 1'b0;
        started_q     <= 1'b1;
      end else begin
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == '1) long_q <= 1'b1;
      end
    end
  end

endmodule
