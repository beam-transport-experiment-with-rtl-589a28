`timescale 1ns/1ps
// tb_rf_phase_detector: self-checking test of RF edge marking, period
// measurement and vertex-frequency lock.
//
// The RF square wave is driven from the test bench on clock falling edges
// with an integer number of ticks per period, so every period is known
// exactly. The test walks through the shape of the ring's cycle: an RF
// plateau at 0.5 MHz (800 ticks, must not lock), the extraction vertex
// frequency 0.870633 MHz (459 ticks, must lock after exactly lock_periods
// matching periods), jitter inside the tolerance (lock held), one period
// outside it (lock lost and regained), and the RF stopping (lock lost by
// timeout). For every RF edge it checks that rf_rise comes exactly 3 cycles
// later, and that period, match_count and locked equal a reference model.
module tb_rf_phase_detector;
  import kick_pkg::*;

  localparam int LATENCY = 3;
  localparam int LOCKN   = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic rf_in = 1'b0;
  period_t exp_period = RST_VERTEX_PERIOD, tol = RST_TOL;
  count_t lock_periods = count_t'(LOCKN);
  logic rf_rise, locked;
  period_t period;
  count_t match_count;
  int checks = 0, failures = 0;
  longint cyc = 0;

  rf_phase_detector dut (.clk, .rst_n, .rf_in, .exp_period, .tol, .lock_periods,
                         .rf_rise, .period, .match_count, .locked);

  always #1.25 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at cycle %0d", what, cyc); end
  endtask

  // Reference model, fed with the cycle of each RF rising edge.
  longint edge_q[$];
  longint last_edge = -1;
  int     m_count = 0;
  int     m_period = 0;
  int     n_lock_rise = 0, n_lock_fall = 0;
  bit     prev_locked = 0;

  always @(posedge clk) begin
    #0.2;
    if (rst_n) begin
      bit exp_rise;
      exp_rise = (edge_q.size() > 0) && (edge_q[0] + longint'(LATENCY) == cyc);
      check(rf_rise == exp_rise, $sformatf("rf_rise=%b expected %b", rf_rise, exp_rise));
      if (exp_rise) begin
        longint e;
        e = edge_q.pop_front();
        if (last_edge >= 0) begin
          m_period = int'(e - last_edge);
          if (m_period >= int'(exp_period) - int'(tol) && m_period <= int'(exp_period) + int'(tol))
            m_count++;
          else
            m_count = 0;
          check(period == period_t'(m_period), $sformatf("period=%0d expected %0d", period, m_period));
        end
        last_edge = e;
        check(match_count == count_t'(m_count), $sformatf("match_count=%0d expected %0d", match_count, m_count));
        check(locked == (m_count >= LOCKN), $sformatf("locked=%b at count %0d", locked, m_count));
      end
      if (locked && !prev_locked) n_lock_rise++;
      if (!locked && prev_locked) n_lock_fall++;
      prev_locked = locked;
    end
  end

  // One RF period of p ticks, high for half of it; the edge is recorded at
  // the cycle number current when rf_in rises.
  task automatic rf_period(input int p);
    @(negedge clk);
    rf_in = 1'b1;
    edge_q.push_back(cyc);
    repeat (p / 2) @(negedge clk);
    rf_in = 1'b0;
    repeat (p - p / 2 - 1) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // injection / accumulation plateau, 0.5 MHz
    repeat (30) rf_period(800);
    check(!locked, "no lock at 0.5 MHz");
    // extraction vertex frequency, 0.870633 MHz
    repeat (LOCKN + 5) rf_period(459);
    check(locked, "locked at the vertex frequency");
    // jitter inside the window
    repeat (40) rf_period(457 + int'($urandom_range(4)));
    check(locked, "lock held under jitter");
    // one period far off, then recovery
    rf_period(470);
    repeat (3) rf_period(459);
    check(!locked, "lock lost after a bad period");
    repeat (LOCKN) rf_period(460);
    check(locked, "lock regained");
    // RF disappears: lock must drop by timeout without any edge
    repeat (LATENCY + 2) @(negedge clk);
    repeat (2 * 461) @(negedge clk);
    check(!locked && match_count == 0, "lock dropped when RF stops");
    check(n_lock_rise == 2 && n_lock_fall == 2, $sformatf("lock rises %0d falls %0d", n_lock_rise, n_lock_fall));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
