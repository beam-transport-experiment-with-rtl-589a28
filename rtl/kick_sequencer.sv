// kick_sequencer: the kick controller's decision logic.
//
// A kick happens when two conditions meet: the timing system has sent the
// kicker event code for the extraction step, and the RF has been confirmed at
// the extraction vertex frequency. In IDLE the sequencer waits for event_hit
// (ignored while enable is low). In ARMED it waits for the first RF rising
// edge (rf_rise) with locked high, and on that edge issues fire, a one-cycle
// strobe one clock later that starts every delay channel at once (T0). In
// FIRING it waits until no channel is busy any more and returns to IDLE.
// Events arriving in ARMED or FIRING are ignored; clearing enable in ARMED
// drops back to IDLE. capture_count counts the phase captures. The three
// states, the abort and the ignore rules are this design's own choices.
// Two assertions state the strobe rule: fire lasts one cycle and comes only
// with the entry into FIRING. Lint reports rst_n as both an asynchronous and
// a synchronous signal: the synchronous use is the assertions' disable iff,
// and no flip-flop uses the reset synchronously.
module kick_sequencer
  import kick_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       enable,
  input  logic       event_hit,
  input  logic       rf_rise,
  input  logic       locked,
  input  logic       chan_busy,
  output logic       fire,
  output seq_state_t state,
  output count_t     capture_count
);

  seq_state_t next;
  logic       capture;

  assign capture = (state == SEQ_ARMED) && enable && rf_rise && locked;

  always_comb begin
    next = state;
    unique case (state)
      SEQ_IDLE:   if (enable && event_hit) next = SEQ_ARMED;
      SEQ_ARMED:  if (!enable)             next = SEQ_IDLE;
                  else if (capture)        next = SEQ_FIRING;
      // fire is issued on entry; the channels report busy from the next clock.
      SEQ_FIRING: if (!fire && !chan_busy) next = SEQ_IDLE;
      default:                             next = SEQ_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= SEQ_IDLE;
      fire          <= 1'b0;
      capture_count <= '0;
    end else begin
      state <= next;
      fire  <= capture;
      if (capture) capture_count <= capture_count + 1'b1;
    end
  end

  // The start strobe is a single cycle and is only issued on entry to FIRING.
  a_fire_single: assert property (@(posedge clk) disable iff (!rst_n) fire |=> !fire);
  a_fire_state:  assert property (@(posedge clk) disable iff (!rst_n) fire |-> state == SEQ_FIRING);

endmodule
