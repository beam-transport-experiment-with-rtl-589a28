`timescale 1ns/1ps
// tb_kick_sequencer: self-checking test of the kick decision FSM.
//
// Drives event_hit, rf_rise, locked, enable and a modelled chan_busy (busy
// for a random number of cycles after each fire) with random stimulus for
// many thousands of cycles, and compares fire, state and capture_count with
// a cycle-by-cycle reference model of the intended behaviour. Directed
// sequences first cover: RF edges without an event (no fire), an event
// without lock (stays armed), event then locked edge (fire one cycle later),
// events ignored while firing, and abort by clearing enable.
module tb_kick_sequencer;
  import kick_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic enable = 1'b1, event_hit = 1'b0, rf_rise = 1'b0, locked = 1'b0, chan_busy = 1'b0;
  logic fire;
  seq_state_t state;
  count_t capture_count;
  int checks = 0, failures = 0;
  int n_fire = 0, n_abort = 0, n_ignored = 0;

  kick_sequencer dut (.clk, .rst_n, .enable, .event_hit, .rf_rise, .locked, .chan_busy,
                      .fire, .state, .capture_count);

  always #1.25 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // Reference model (updated on the same edge as the DUT).
  seq_state_t m_state = SEQ_IDLE;
  bit m_fire = 0;
  int m_caps = 0;
  int busy_left = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      seq_state_t ns;
      bit cap;
      cap = (m_state == SEQ_ARMED) && enable && rf_rise && locked;
      ns = m_state;
      case (m_state)
        SEQ_IDLE:   if (enable && event_hit) ns = SEQ_ARMED;
        SEQ_ARMED:  if (!enable) begin ns = SEQ_IDLE; n_abort++; end
                    else if (cap) ns = SEQ_FIRING;
        SEQ_FIRING: begin
                      if (event_hit) n_ignored++;
                      if (!m_fire && !chan_busy) ns = SEQ_IDLE;
                    end
        default: ns = SEQ_IDLE;
      endcase
      m_fire = cap;
      if (cap) begin m_caps++; n_fire++; end
      m_state = ns;
      #0.2;
      check(state == m_state, $sformatf("state %s expected %s", state.name(), m_state.name()));
      check(fire == m_fire, $sformatf("fire %b expected %b", fire, m_fire));
      check(capture_count == count_t'(m_caps), "capture_count");
    end
  end

  // Channel-busy model: busy from the cycle after fire for a random time.
  always @(posedge clk) begin
    if (fire) busy_left <= 1 + int'($urandom_range(20));
    else if (busy_left > 0) busy_left <= busy_left - 1;
  end
  always @(negedge clk) chan_busy = (busy_left > 0);

  task automatic drive(input bit ev, input bit rr, input bit lk, input bit en);
    @(negedge clk);
    event_hit = ev; rf_rise = rr; locked = lk; enable = en;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (5) drive(0, 1, 1, 1);          // edges, no event
    check(n_fire == 0, "no fire without event");
    drive(1, 0, 0, 1);                     // event
    repeat (5) drive(0, 1, 0, 1);          // edges, not locked
    check(state == SEQ_ARMED, "armed while unlocked");
    drive(0, 0, 1, 1);
    drive(0, 1, 1, 1);                     // capture
    repeat (3) drive(1, 0, 1, 1);          // events while firing
    repeat (30) drive(0, 0, 1, 1);
    drive(1, 0, 1, 1);                     // arm, then abort
    drive(0, 0, 1, 0);
    drive(0, 1, 1, 1);
    for (int k = 0; k < 20000; k++)
      drive(($urandom_range(30) == 0), ($urandom_range(5) == 0), ($urandom_range(3) != 0),
            ($urandom_range(200) != 0));
    check(n_fire > 50, $sformatf("fires %0d", n_fire));
    check(n_abort > 0, "abort exercised");
    check(n_ignored > 0, "ignored events exercised");
    $display("fires=%0d aborts=%0d ignored_events=%0d", n_fire, n_abort, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
