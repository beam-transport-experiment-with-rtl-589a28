`timescale 1ns/1ps
// tb_event_code_match: self-checking test of the kicker event-code matcher.
//
// Sends a stream of event codes: the kicker code 0xC00F0001, the other
// steps' codes, codes differing from it in one bit, and random words, with
// random gaps. A reference model counts the expected matches; the test checks
// that hit is high exactly one cycle after each matching strobe and never
// otherwise, and that hit_count agrees. It then reprograms the match code.
module tb_event_code_match;
  import kick_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic code_valid = 1'b0;
  code_t code = '0, match_code = RST_EVENT_CODE;
  logic hit;
  count_t hit_count;
  int checks = 0, failures = 0;
  int expected = 0;
  bit exp_hit = 1'b0;

  event_code_match dut (.clk, .rst_n, .code_valid, .code, .match_code, .hit, .hit_count);

  always #1.25 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // Reference: hit one cycle after a matching strobe.
  always @(posedge clk) begin
    #0.2;
    if (rst_n) begin
      check(hit == exp_hit, $sformatf("hit=%b expected %b", hit, exp_hit));
      check(hit_count == count_t'(expected), $sformatf("hit_count=%0d expected %0d", hit_count, expected));
    end
  end

  task automatic send(input code_t c, input bit v);
    @(negedge clk);
    code_valid = v; code = c;
    @(posedge clk);
    exp_hit = v && (c == match_code);
    if (exp_hit) expected++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    send(32'hC00F_0001, 1'b1);
    send(32'hC00F_0001, 1'b0);          // code on the bus but no strobe
    send(32'hC00F_0002, 1'b1);
    send(32'hC00F_0001, 1'b1);          // back-to-back matches
    send(32'hC00F_0001, 1'b1);
    for (int b = 0; b < 32; b++) send(32'hC00F_0001 ^ (32'd1 << b), 1'b1);
    for (int k = 0; k < 400; k++) begin
      case ($urandom_range(3))
        0: send(32'hC00F_0001, 1'($urandom_range(1)));
        1: send(32'hC00F_0000 | 32'($urandom_range(7)), 1'b1);
        default: send($urandom, 1'($urandom_range(1)));
      endcase
    end
    send(32'h0, 1'b0);
    @(negedge clk) match_code = 32'h1234_5678;
    @(posedge clk) exp_hit = 1'b0;
    send(32'hC00F_0001, 1'b1);
    send(32'h1234_5678, 1'b1);
    send(32'h0, 1'b0);
    send(32'h0, 1'b0);
    check(expected > 50, "enough matches exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
