// delay_channel: one channel of the digital delayer.
//
// A start strobe (T0) loads a down-counter with the programmed delay; the
// counter runs on the 400 MHz clock, so one count is 2.5 ns. When it has run
// out the channel drives its trigger output high for the programmed pulse
// width. Timing is exact and registered: if start is high in clock cycle n,
// the output is high from cycle n+D+1 (it rises D edges after the edge that
// samples start) and stays high for max(width,1) cycles. Counting clock ticks rather than using a monostable is
// what gives the controller its drift-free, individually adjustable delays;
// the pulse width, the restart-on-start behaviour and the widths of the
// counters are this design's own choices.
//
// Ports: start (1-cycle strobe), delay / width (sampled at start),
// pulse (trigger output), busy (counting or pulsing).
module delay_channel
  import kick_pkg::*;
#(
  parameter int unsigned DLY_W = DELAY_W,
  parameter int unsigned PW_W  = WIDTH_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DLY_W-1:0] delay,
  input  logic [PW_W-1:0]  width,
  output logic             pulse,
  output logic             busy
);

  typedef enum logic [1:0] {CH_IDLE, CH_COUNT, CH_PULSE} ch_state_t;

  ch_state_t        state;
  logic [DLY_W-1:0] dcnt;
  logic [PW_W-1:0]  wcnt;
  logic [PW_W-1:0]  width_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= CH_IDLE;
      dcnt    <= '0;
      wcnt    <= '0;
      width_q <= '0;
      pulse   <= 1'b0;
    end else if (start) begin
      width_q <= (width == '0) ? PW_W'(1) : width;
      if (delay == '0) begin
        state <= CH_PULSE;
        wcnt  <= (width == '0) ? PW_W'(1) : width;
        pulse <= 1'b1;
      end else begin
        state <= CH_COUNT;
        dcnt  <= delay;
        pulse <= 1'b0;
      end
    end else begin
      unique case (state)
        CH_IDLE: pulse <= 1'b0;
        CH_COUNT: begin
          dcnt <= dcnt - 1'b1;
          if (dcnt == DLY_W'(1)) begin
            state <= CH_PULSE;
            wcnt  <= width_q;
            pulse <= 1'b1;
          end
        end
        CH_PULSE: begin
          wcnt <= wcnt - 1'b1;
          if (wcnt == PW_W'(1)) begin
            state <= CH_IDLE;
            pulse <= 1'b0;
          end
        end
        default: state <= CH_IDLE;
      endcase
    end
  end

  assign busy = (state != CH_IDLE);

endmodule
