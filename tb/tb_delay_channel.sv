// tb_delay_channel: self-checking test of one digital-delay channel.
//
// Starts the channel with random delays (0..300 ticks) and widths (0..40),
// records the clock cycle of the start strobe and checks that the output
// rises exactly delay+1 cycles later and stays high for max(width,1) cycles,
// and that busy covers the whole run. Also restarts a channel while it is
// counting and checks that the new delay wins. A watchdog ends the run.
`timescale 1ns/1ps
module tb_delay_channel;
  import kick_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  delay_t delay = '0;
  width_t width = '0;
  logic pulse, busy;
  int checks = 0, failures = 0;
  longint cyc = 0;

  delay_channel dut (.clk, .rst_n, .start, .delay, .width, .pulse, .busy);

  always #1.25 clk = ~clk;   // 400 MHz
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at cycle %0d", what, cyc); end
  endtask

  // Start and measure: returns rise cycle offset and pulse length.
  task automatic run_one(input int d, input int w);
    longint t0, trise;
    int len;
    @(negedge clk); start = 1'b1; delay = delay_t'(d); width = width_t'(w);
    @(posedge clk); t0 = cyc;  // edge that samples start
    @(negedge clk); start = 1'b0;
    while (!pulse) begin
      check(busy, "busy while counting");
      @(posedge clk); #0.1;
    end
    trise = cyc;
    len = 0;
    while (pulse) begin len++; @(posedge clk); #0.1; end
    check(trise - t0 == longint'(d) + 1, $sformatf("rise after %0d cycles, expected %0d", trise - t0, d + 1));
    check(len == ((w == 0) ? 1 : w), $sformatf("width %0d expected %0d", len, (w == 0) ? 1 : w));
    check(!busy, "idle after pulse");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    check(!pulse && !busy, "idle after reset");
    run_one(0, 1);
    run_one(0, 0);
    run_one(1, 3);
    run_one(600, 400);  // CSRm group delay 1500 ns, 1 us pulse
    run_one(272, 5);    // CSRe group delay 680 ns
    for (int k = 0; k < 30; k++) run_one(int'($urandom_range(300)), int'($urandom_range(40)));
    // restart while counting: second start re-times the channel
    begin
      longint t1;
      int n;
      @(negedge clk); start = 1'b1; delay = 50; width = 2;
      @(posedge clk);
      @(negedge clk); start = 1'b0;
      repeat (10) @(negedge clk);
      start = 1'b1; delay = 20;
      @(posedge clk); t1 = cyc;
      @(negedge clk); start = 1'b0;
      n = 0;
      while (!pulse && n < 100) begin @(posedge clk); #0.1; n++; end
      check(cyc - t1 == 21, $sformatf("restart rise after %0d", cyc - t1));
      repeat (5) @(posedge clk);
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
