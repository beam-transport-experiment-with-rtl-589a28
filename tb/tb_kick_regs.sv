`timescale 1ns/1ps
// tb_kick_regs: self-checking test of the configuration/status registers.
//
// Checks the reset values against the extraction run's settings worked out
// by hand (event code 0xC00F0001; 400 MHz / 0.870633 MHz = 459 ticks;
// 1500 ns = 600 ticks; 680 ns = 272 ticks; pre-trigger delays 0), then
// writes random values to every writable register and compares both the bus
// read-back and the cfg struct with a shadow copy. Status fields are driven
// from the test bench and read back; unmapped addresses must read 0 and
// writes to read-only addresses must change nothing.
module tb_kick_regs;
  import kick_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic bus_we = 1'b0;
  logic [ADDR_W-1:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  kick_cfg_t cfg;
  kick_status_t status;
  int checks = 0, failures = 0;
  logic [31:0] shadow [64];
  logic [31:0] mask   [64];

  kick_regs dut (.clk, .rst_n, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .cfg, .status);

  always #1.25 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); bus_we = 1'b1; bus_addr = ADDR_W'(a); bus_wdata = d;
    @(negedge clk); bus_we = 1'b0;
  endtask

  // Combinational read: set the address, let it settle, sample the data.
  logic [31:0] r;
  task automatic rd(input int a);
    bus_addr = ADDR_W'(a);
    #0.1;
    r = bus_rdata;
  endtask

  // Value a register should hold, taken from the cfg struct.
  function automatic logic [31:0] cfg_field(input int a);
    if (a == 0) return 32'(cfg.enable);
    if (a == 1) return cfg.event_code;
    if (a == 2) return 32'(cfg.vertex_period);
    if (a == 3) return 32'(cfg.period_tol);
    if (a == 4) return 32'(cfg.lock_periods);
    if (a == 5) return cfg.interval;
    if (a == 6) return cfg.csrm_delay;
    if (a == 7) return cfg.csre_delay;
    if (a == 8) return cfg.diag_delay;
    if (a == 9) return cfg.phys_delay;
    if (a == 10) return 32'(cfg.pulse_width);
    if (a >= 16 && a < 22) return cfg.csrm_ch[a-16];
    if (a >= 24 && a < 28) return cfg.csre_ch[a-24];
    return 32'hDEAD_BEEF;
  endfunction

  initial begin
    for (int a = 0; a < 64; a++) mask[a] = '0;
    mask[0] = 32'h1; mask[1] = '1; mask[2] = 32'hFFFF; mask[3] = 32'hFFFF; mask[4] = 32'hFFFF;
    for (int a = 5; a < 10; a++) mask[a] = '1;
    mask[10] = 32'hFFFF;
    for (int a = 16; a < 22; a++) mask[a] = '1;
    for (int a = 24; a < 28; a++) mask[a] = '1;
    status = '{state: SEQ_ARMED, locked: 1'b1, meas_period: 16'd459, match_count: 16'd1234,
               capture_count: 16'd7, event_count: 16'd9};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // reset values
    begin rd(1); check(r == 32'hC00F0001, "reset event code"); end
    begin rd(2); check(r == 32'd459, "reset vertex period"); end
    begin rd(6); check(r == 32'd600, "reset CSRm delay 1500 ns"); end
    begin rd(7); check(r == 32'd272, "reset CSRe delay 680 ns"); end
    begin rd(8); check(r == 0, "reset diagnostics pre-trigger 0 ns"); rd(9); check(r == 0, "reset physics pre-trigger 0 ns"); end
    begin rd(4); check(r == 32'd10000, "reset lock periods"); end
    begin rd(0); check(r == 1, "reset enable"); end
    for (int a = 0; a < 64; a++) if (mask[a] != 0) begin rd(a); shadow[a] = r; end
    for (int a = 16; a < 28; a++) if (mask[a] != 0) check(shadow[a] == 0, "channel delay reset 0");
    // random writes
    for (int k = 0; k < 2000; k++) begin
      int a;
      logic [31:0] d;
      a = int'($urandom_range(63));
      d = $urandom;
      wr(a, d);
      if (mask[a] != 0) shadow[a] = d & mask[a];
      if (mask[a] != 0) begin
        begin rd(a); check(r == shadow[a], $sformatf("read-back addr %0h", a)); end
        check(cfg_field(a) == shadow[a], $sformatf("cfg field addr %0h", a));
      end
    end
    for (int a = 0; a < 64; a++) begin
      if (mask[a] != 0) begin rd(a); check(r == shadow[a], $sformatf("final read addr %0h", a)); end
      else if (a == 32) begin rd(a); check(r == {2'b01, 1'b1, 13'd0, 16'd1234}, "status word"); end
      else if (a == 33) begin rd(a); check(r == 32'd459, "measured period"); end
      else if (a == 34) begin rd(a); check(r == {16'd9, 16'd7}, "counts"); end
      else begin rd(a); check(r == 0, $sformatf("unmapped addr %0h reads 0", a)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
