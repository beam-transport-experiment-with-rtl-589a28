`timescale 1ns/1ps
// tb_machine_cycle: the controller through whole machine cycles of the main
// ring, frequency ramps included, at its reset settings.
//
// One cycle has seven steps: preparation (no RF), injection and a frequency
// sweep up to the accumulation plateau (0.5 MHz, 800 ticks per period),
// accumulation, a sweep up to the extraction vertex frequency (0.870633 MHz,
// 459 ticks), storage, extraction and recovery (sweep down, RF off). Each
// step is announced with an event code; only the extraction step carries the
// kicker code 0xC00F0001, the others use codes of this test's own choosing.
// Time is compressed (a few thousand RF periods per step) but the lock
// count is the reset value, 10000 periods. The sweeps pass through the
// lock window, so the test checks that no sweep ever locks, that lock
// comes exactly 10000 matching periods into the plateau, and that each
// cycle gives exactly one shot whose 18 outputs rise at edge + 5 + delay
// (delay from the reset settings: charge and pre-triggers 0, CSRm 600,
// CSRe 272 ticks). Two cycles are run; a watchdog ends a stuck run.
module tb_machine_cycle;
  import kick_pkg::*;

  localparam int NOUT   = 2 * N_CSRM + N_CSRE + 2;
  localparam int RF_LAT = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic evt_valid = 1'b0;
  code_t evt_code = '0;
  logic rf_in = 1'b0;
  logic bus_we = 1'b0;
  logic [ADDR_W-1:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic [N_CSRM-1:0] csrm_charge, csrm_discharge;
  logic [N_CSRE-1:0] csre_discharge;
  logic pretrig_diag, pretrig_phys;

  kicker_ctrl_top dut (.*);

  always #1.25 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at cycle %0d", what, cyc); end
  endtask

  // Output monitor: rise cycle and count per output.
  logic [NOUT-1:0] outs, outs_q = '0;
  assign outs = {pretrig_phys, pretrig_diag, csre_discharge, csrm_discharge, csrm_charge};
  longint rise_at [NOUT];
  int     nrise   [NOUT];
  always @(posedge clk) begin
    #0.2;
    for (int i = 0; i < NOUT; i++)
      if (outs[i] && !outs_q[i]) begin rise_at[i] = cyc; nrise[i]++; end
    outs_q = outs;
  end

  // Lock monitor: lock may only rise on the vertex plateau.
  bit on_plateau = 1'b0;
  int plateau_edges = 0;        // matching periods seen on the plateau
  int lock_rises = 0, bad_lock = 0, lock_at_edge = -1;
  bit prev_lock = 1'b0;
  always @(posedge clk) begin
    if (dut.u_rf.locked && !prev_lock) begin
      lock_rises++;
      if (!on_plateau) bad_lock++;
      lock_at_edge = plateau_edges;
    end
    prev_lock = dut.u_rf.locked;
  end

  // RF: one period of p ticks.
  longint last_edge = 0;
  task automatic rf_period(input int p);
    @(negedge clk);
    rf_in = 1'b1;
    last_edge = cyc;
    if (on_plateau) plateau_edges++;
    repeat (p / 2) @(negedge clk);
    rf_in = 1'b0;
    repeat (p - p / 2 - 1) @(negedge clk);
  endtask

  // Linear sweep of the period from p0 to p1 over n periods.
  task automatic sweep(input int p0, input int p1, input int n);
    for (int k = 0; k < n; k++) rf_period(p0 + (p1 - p0) * k / n);
  endtask

  task automatic send_event(input code_t c);
    @(negedge clk); evt_valid = 1'b1; evt_code = c;
    @(negedge clk); evt_valid = 1'b0;
  endtask

  task automatic machine_cycle(input int n);
    int prev_n [NOUT];
    int exp_d [NOUT];
    longint t0_edge;
    for (int i = 0; i < NOUT; i++) prev_n[i] = nrise[i];
    for (int i = 0; i < int'(N_CSRM); i++) begin exp_d[i] = 0; exp_d[N_CSRM + i] = 600; end
    for (int j = 0; j < int'(N_CSRE); j++) exp_d[2 * N_CSRM + j] = 272;
    exp_d[NOUT - 2] = 0; exp_d[NOUT - 1] = 0;
    // preparation: RF off
    send_event(32'hC00F_0010);
    repeat (3000) @(negedge clk);
    // injection with sweep up to the accumulation plateau
    send_event(32'hC00F_0011);
    sweep(2000, 800, 300);
    // accumulation
    send_event(32'hC00F_0012);
    repeat (2000) rf_period(800);
    // acceleration: sweep to the vertex frequency, slowly enough to cross
    // the 459 +/- 2 window over several periods
    send_event(32'hC00F_0013);
    sweep(800, 459, 3000);
    // storage on the vertex plateau
    send_event(32'hC00F_0014);
    on_plateau = 1'b1;
    plateau_edges = 0;
    lock_at_edge = -1;
    repeat (10100) rf_period(459);
    check(dut.u_rf.locked, $sformatf("cycle %0d: locked on the plateau", n));
    // the first plateau edge still closes the last sweep period
    check(lock_at_edge == 10001, $sformatf("cycle %0d: lock at plateau edge %0d", n, lock_at_edge));
    for (int i = 0; i < NOUT; i++)
      check(nrise[i] == prev_n[i], $sformatf("cycle %0d: no trigger before extraction", n));
    // extraction: kicker event code, sent just after an RF edge
    rf_period(459);
    send_event(RST_EVENT_CODE);
    rf_period(459);
    t0_edge = last_edge;
    repeat (20) rf_period(459);   // 20 x 459 ticks covers delays + 1 us pulses
    on_plateau = 1'b0;
    for (int i = 0; i < NOUT; i++) begin
      check(nrise[i] == prev_n[i] + 1, $sformatf("cycle %0d: output %0d fired %0d times", n, i, nrise[i] - prev_n[i]));
      check(rise_at[i] == t0_edge + longint'(RF_LAT) + longint'(exp_d[i]),
            $sformatf("cycle %0d: output %0d at +%0d", n, i, rise_at[i] - t0_edge));
    end
    // recovery: sweep down, RF off, a late kicker event must not fire
    send_event(32'hC00F_0015);
    sweep(459, 2000, 200);
    send_event(RST_EVENT_CODE);
    repeat (5000) @(negedge clk);
    check(!dut.u_rf.locked, $sformatf("cycle %0d: lock dropped in recovery", n));
    for (int i = 0; i < NOUT; i++)
      check(nrise[i] == prev_n[i] + 1, $sformatf("cycle %0d: no trigger in recovery", n));
    // the stray event left the controller armed: disable clears it
    @(negedge clk); bus_we = 1'b1; bus_addr = A_CTRL; bus_wdata = 0;
    @(negedge clk); bus_wdata = 1;
    @(negedge clk); bus_we = 1'b0;
  endtask

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    machine_cycle(1);
    machine_cycle(2);
    check(bad_lock == 0, $sformatf("%0d locks off the plateau", bad_lock));
    check(lock_rises == 2, $sformatf("lock rose %0d times", lock_rises));
    $display("machine cycles=2 lock_rises=%0d off_plateau_locks=%0d", lock_rises, bad_lock);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
