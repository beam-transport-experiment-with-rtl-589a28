// event_code_match: recognises the kicker event code.
//
// The timing system gives every step of the ring cycle (injection,
// accumulation, acceleration, storage, extraction, recovery) its own event
// code. This block compares each received code with the programmed kicker
// event code (0xC00F0001 after reset, see kick_pkg) and emits a one-cycle
// hit, one clock after the code's valid strobe. It also counts matches for
// read-back. The event link itself is outside this design: codes arrive as a
// 32-bit word with a valid strobe, already in the controller's clock domain
// (this interface is an assumption of this design).
module event_code_match
  import kick_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   code_valid,
  input  code_t  code,
  input  code_t  match_code,
  output logic   hit,
  output count_t hit_count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit       <= 1'b0;
      hit_count <= '0;
    end else begin
      hit <= code_valid && (code == match_code);
      if (code_valid && (code == match_code))
        hit_count <= hit_count + 1'b1;
    end
  end

endmodule
