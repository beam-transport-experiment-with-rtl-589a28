`timescale 1ns/1ps
// tb_kicker_ctrl_top: end-to-end test of the kicker controller at its
// default size (no parameter overrides), through whole extraction cycles.
//
// A stimulus process plays the ring cycle against the controller: RF at the
// 0.5 MHz plateau (800 ticks per period), then at the extraction vertex
// frequency 0.870633 MHz (459 ticks), timing events for the other cycle
// steps and the kicker event code 0xC00F0001. Shots:
//   1. reset settings (lock after 10000 matching periods, CSRm 1500 ns,
//      CSRe 680 ns, pre-triggers 0 ns, all channel delays 0);
//   2. per-supply CSRm delays 2068/2128/2095/2208/2468/2008 ns (rounded to
//      2.5 ns ticks) and individual CSRe delays, with a 1 us charge/discharge
//      interval, written over the register bus;
//   3. random delays.
// For each shot the test predicts, from the cycle of the RF edge it drove,
// when every one of the 18 trigger outputs must rise: edge + 5 + its total
// delay in ticks (3 cycles of RF synchroniser and edge register, 1 of the
// fire register, 1 of the output register), and checks rise time, pulse
// width (1 us = 400 ticks) and that each output fires once. It also counts
// the mechanisms the controller has (foreign event codes ignored, event
// while not locked, lock gained, lock lost, phase capture, abort by
// disable) and fails if one never happened.
module tb_kicker_ctrl_top;
  import kick_pkg::*;

  localparam int NOUT    = 2 * N_CSRM + N_CSRE + 2;
  localparam int RF_LAT  = 5;
  localparam int VERTEX  = 459;   // ticks per RF period at 0.870633 MHz
  localparam int PLATEAU = 800;   // ticks per RF period at 0.5 MHz

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

  always #1.25 clk = ~clk;   // 400 MHz

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at cycle %0d", what, cyc); end
  endtask

  // ---------------- output monitor ----------------
  logic [NOUT-1:0] outs, outs_q = '0;
  assign outs = {pretrig_phys, pretrig_diag, csre_discharge, csrm_discharge, csrm_charge};
  longint rise_at [NOUT];
  int     nrise   [NOUT];
  int     width_m [NOUT];
  int     cur_w   [NOUT];

  always @(posedge clk) begin
    #0.2;
    for (int i = 0; i < NOUT; i++) begin
      if (outs[i] && !outs_q[i]) begin rise_at[i] = cyc; nrise[i]++; cur_w[i] = 0; end
      if (outs[i]) cur_w[i]++;
      if (!outs[i] && outs_q[i]) width_m[i] = cur_w[i];
    end
    outs_q = outs;
  end

  // ---------------- RF generator ----------------
  int     rf_ticks = PLATEAU;
  bit     rf_on = 1'b1;
  longint last_edge = 0;
  event   rf_edge;

  initial begin
    @(posedge rst_n);
    forever begin
      if (rf_on) begin
        @(negedge clk);
        rf_in = 1'b1;
        last_edge = cyc;
        -> rf_edge;
        repeat (rf_ticks / 2) @(negedge clk);
        rf_in = 1'b0;
        repeat (rf_ticks - rf_ticks / 2 - 1) @(negedge clk);
      end else @(negedge clk);
    end
  end

  // ---------------- bus and events ----------------
  task automatic wr(input logic [ADDR_W-1:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1'b1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 1'b0;
  endtask

  logic [31:0] r;
  task automatic rd(input logic [ADDR_W-1:0] a);
    @(negedge clk); bus_addr = a; #0.1; r = bus_rdata;
  endtask

  task automatic send_event(input code_t c);
    @(negedge clk); evt_valid = 1'b1; evt_code = c;
    @(negedge clk); evt_valid = 1'b0;
  endtask

  // mechanism counters
  int n_foreign = 0, n_unlocked_wait = 0, n_lock_gain = 0, n_lock_loss = 0;
  int n_capture = 0, n_abort = 0;

  // Expected total delay (ticks) of every output for the current settings.
  int exp_d [NOUT];
  int cfg_interval, cfg_csrm, cfg_csre, cfg_diag, cfg_phys;
  int cfg_m [N_CSRM];
  int cfg_e [N_CSRE];

  task automatic program_delays();
    wr(A_INTERVAL,   32'(cfg_interval));
    wr(A_CSRM_DELAY, 32'(cfg_csrm));
    wr(A_CSRE_DELAY, 32'(cfg_csre));
    wr(A_DIAG_DELAY, 32'(cfg_diag));
    wr(A_PHYS_DELAY, 32'(cfg_phys));
    for (int i = 0; i < int'(N_CSRM); i++) wr(A_CSRM_CH0 + ADDR_W'(i), 32'(cfg_m[i]));
    for (int j = 0; j < int'(N_CSRE); j++) wr(A_CSRE_CH0 + ADDR_W'(j), 32'(cfg_e[j]));
  endtask

  task automatic expect_delays();
    for (int i = 0; i < int'(N_CSRM); i++) begin
      exp_d[i] = 0;                                            // charge at T0
      exp_d[N_CSRM + i] = cfg_interval + cfg_csrm + cfg_m[i];  // CSRm discharge
    end
    for (int j = 0; j < int'(N_CSRE); j++)
      exp_d[2 * N_CSRM + j] = cfg_interval + cfg_csre + cfg_e[j];
    exp_d[2 * N_CSRM + N_CSRE]     = cfg_diag;
    exp_d[2 * N_CSRM + N_CSRE + 1] = cfg_phys;
  endtask

  // One extraction: wait for lock, send the kicker event just after an RF
  // edge, then check every output against the edge that follows.
  task automatic shot(input string name);
    longint t0_edge;
    int prev_n [NOUT];
    int maxd;
    expect_delays();
    for (int i = 0; i < NOUT; i++) prev_n[i] = nrise[i];
    @(rf_edge);
    repeat (50) @(negedge clk);
    send_event(RST_EVENT_CODE);
    @(rf_edge);
    t0_edge = last_edge;
    maxd = 0;
    foreach (exp_d[i]) if (exp_d[i] > maxd) maxd = exp_d[i];
    repeat (maxd + RF_LAT + 400 + 20) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < NOUT; i++) begin
      check(nrise[i] == prev_n[i] + 1, $sformatf("%s: output %0d fired %0d times", name, i, nrise[i] - prev_n[i]));
      check(rise_at[i] == t0_edge + longint'(RF_LAT) + longint'(exp_d[i]),
            $sformatf("%s: output %0d rose at +%0d, expected +%0d", name, i, rise_at[i] - t0_edge, RF_LAT + exp_d[i]));
      check(width_m[i] == 400, $sformatf("%s: output %0d width %0d", name, i, width_m[i]));
    end
    n_capture++;
    rd(A_STATUS);
    check(r[31:30] == SEQ_IDLE, "back to idle after the shot");
  endtask

  bit prev_lock = 0;
  always @(posedge clk) begin
    if (dut.u_rf.locked && !prev_lock) n_lock_gain++;
    if (!dut.u_rf.locked && prev_lock) n_lock_loss++;
    prev_lock = dut.u_rf.locked;
  end

  initial begin
    int before_cnt;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Reset settings read back over the bus.
    rd(A_EVENT_CODE); check(r == 32'hC00F_0001, "event code 0xC00F0001");
    rd(A_VERTEX_PER); check(r == 32'd459, "vertex period 459 ticks");
    rd(A_CSRM_DELAY); check(r == 32'd600, "CSRm 1500 ns");
    rd(A_CSRE_DELAY); check(r == 32'd272, "CSRe 680 ns");
    rd(A_LOCK_PER);   check(r == 32'd10000, "lock periods");

    // Accumulation plateau: other steps' event codes, then the kicker code
    // while the RF is not at the vertex frequency.
    repeat (5) @(rf_edge);
    send_event(32'hC00F_0002);
    send_event(32'hC00F_0003);
    repeat (3) @(posedge clk);
    rd(A_STATUS);
    check(r[31:30] == SEQ_IDLE, "foreign event codes ignored");
    if (r[31:30] == SEQ_IDLE) n_foreign++;
    send_event(RST_EVENT_CODE);
    repeat (20) @(rf_edge);
    rd(A_STATUS);
    check(r[31:30] == SEQ_ARMED && !r[29], "armed, waiting for lock");
    if (r[31:30] == SEQ_ARMED) n_unlocked_wait++;
    check(nrise[0] == 0, "no trigger before lock");
    // Abort the pending arm by clearing enable, then re-enable.
    wr(A_CTRL, 0);
    rd(A_STATUS);
    check(r[31:30] == SEQ_IDLE, "disable aborts the arm");
    if (r[31:30] == SEQ_IDLE) n_abort++;
    wr(A_CTRL, 1);

    // Storage / extraction plateau at the vertex frequency: full lock count.
    rf_ticks = VERTEX;
    cfg_interval = 0; cfg_csrm = 600; cfg_csre = 272; cfg_diag = 0; cfg_phys = 0;
    foreach (cfg_m[i]) cfg_m[i] = 0;
    foreach (cfg_e[j]) cfg_e[j] = 0;
    repeat (10001) @(rf_edge);   // the first edge still ends an 800-tick period
    repeat (10) @(posedge clk);
    check(dut.u_rf.locked, "locked after 10000 vertex periods");
    rd(A_MEAS_PER); check(r == 32'd459, "measured period 459");
    shot("reset settings");

    // Per-supply delays as on the operator page, 1 us interval.
    cfg_interval = 400;
    cfg_m = '{827, 851, 838, 883, 987, 803};
    cfg_e = '{0, 4, 8, 12};
    program_delays();
    shot("per-supply delays");

    // Loss of lock: RF ramps away, then back; shorter lock count for speed.
    wr(A_LOCK_PER, 32'd64);
    rf_ticks = PLATEAU;
    repeat (5) @(rf_edge);
    check(!dut.u_rf.locked, "lock lost off the vertex frequency");
    rf_ticks = VERTEX;
    repeat (70) @(rf_edge);
    for (int k = 0; k < 3; k++) begin
      cfg_interval = int'($urandom_range(2000));
      cfg_csrm = int'($urandom_range(1000));
      cfg_csre = int'($urandom_range(1000));
      cfg_diag = int'($urandom_range(500));
      cfg_phys = int'($urandom_range(500));
      foreach (cfg_m[i]) cfg_m[i] = int'($urandom_range(1000));
      foreach (cfg_e[j]) cfg_e[j] = int'($urandom_range(1000));
      program_delays();
      shot($sformatf("random %0d", k));
    end
    rd(A_COUNTS);
    check(r[15:0] == 16'(n_capture), $sformatf("capture count %0d", r[15:0]));

    $display("mechanisms: foreign_events=%0d unlocked_wait=%0d lock_gain=%0d lock_loss=%0d captures=%0d aborts=%0d",
             n_foreign, n_unlocked_wait, n_lock_gain, n_lock_loss, n_capture, n_abort);
    check(n_foreign > 0, "foreign event codes exercised");
    check(n_unlocked_wait > 0, "wait for lock exercised");
    check(n_lock_gain > 1, "lock gained");
    check(n_lock_loss > 0, "lock lost");
    check(n_capture > 0, "phase capture");
    check(n_abort > 0, "abort");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
