// rf_phase_detector: RF phase reference and vertex-frequency lock.
//
// There is no bunch phase probe in the ring, but the bunches are locked to
// the RF, so the RF phase tells where the bunches are. This block takes the
// RF signal as a square wave from an external comparator, synchronises it
// with two flip-flops and marks every rising edge with a one-cycle rf_rise
// pulse (the phase reference). A counter measures each RF period in 2.5 ns
// ticks and compares it with the expected period at the extraction vertex
// frequency (0.870633 MHz, 459 ticks, after reset). Every matching period
// (|period - exp_period| <= tol) adds one to match_count; a period out of the
// window, or no edge for longer than exp_period + tol ticks, clears it.
// locked is high while match_count >= lock_periods, i.e. after the frequency
// has been confirmed over that many consecutive comparisons (10000 after
// reset). Comparing the frequency over and over to find the vertex frequency
// follows the paper; the period-window test, the tolerance and the choice of
// the rising edge are this design's own.
//
// Timing: rf_rise, period, match_count and locked are registered and change
// together, 3 clocks after the RF edge reaches rf_in (synchroniser included).
module rf_phase_detector
  import kick_pkg::*;
#(
  parameter int unsigned PER_W = PERIOD_W,
  parameter int unsigned CNT_W = COUNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rf_in,
  input  logic [PER_W-1:0] exp_period,
  input  logic [PER_W-1:0] tol,
  input  logic [CNT_W-1:0] lock_periods,
  output logic             rf_rise,
  output logic [PER_W-1:0] period,
  output logic [CNT_W-1:0] match_count,
  output logic             locked
);

  logic             s1, s2, s3;
  logic             rise;
  logic             seen_edge;      // a first edge has started a period
  logic [PER_W-1:0] cnt;
  logic [PER_W:0]   hi_lim, lo_lim; // one extra bit against overflow
  logic             in_window, timed_out;

  assign rise      = s2 && !s3;
  assign hi_lim    = {1'b0, exp_period} + {1'b0, tol};
  assign lo_lim    = ({1'b0, exp_period} > {1'b0, tol}) ? ({1'b0, exp_period} - {1'b0, tol}) : '0;
  assign in_window = ({1'b0, cnt} >= lo_lim) && ({1'b0, cnt} <= hi_lim);
  assign timed_out = ({1'b0, cnt} > hi_lim);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1          <= 1'b0;
      s2          <= 1'b0;
      s3          <= 1'b0;
      rf_rise     <= 1'b0;
      seen_edge   <= 1'b0;
      cnt         <= '0;
      period      <= '0;
      match_count <= '0;
    end else begin
      s1      <= rf_in;
      s2      <= s1;
      s3      <= s2;
      rf_rise <= rise;
      if (rise) begin
        seen_edge <= 1'b1;
        cnt       <= PER_W'(1);
        if (seen_edge) begin
          period <= cnt;
          if (in_window) begin
            if (match_count != '1) match_count <= match_count + 1'b1;
          end else begin
            match_count <= '0;
          end
        end
      end else begin
        if (cnt != '1) cnt <= cnt + 1'b1;
        if (seen_edge && timed_out) match_count <= '0;
      end
    end
  end

  assign locked = seen_edge && (match_count >= lock_periods);

endmodule
