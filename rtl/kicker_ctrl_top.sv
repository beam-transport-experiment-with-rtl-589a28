// kicker_ctrl_top: FPGA logic of the CSRm extraction / CSRe injection kicker
// controller.
//
// The controller fires the kicker power supplies of two storage rings in one
// shot. When the timing system delivers the kicker event code and the RF is
// confirmed at the extraction vertex frequency, the first RF rising edge
// becomes T0. From T0, on the 400 MHz clock (2.5 ns per tick):
//   * csrm_charge[5:0]     all six CSRm supplies are told to charge at T0;
//   * pretrig_diag / _phys pre-triggers for beam diagnostics and physics
//                          experiments, each after its own delay;
//   * csrm_discharge[i]    after interval + CSRm group delay + channel delay;
//   * csre_discharge[j]    after interval + CSRe group delay + channel delay.
// The CSRe group delay is set shorter than the CSRm one, so that the
// injection kicker of the second ring is triggered early enough to meet the
// bunches after their flight through the transfer line. Every trigger is a
// delay_channel counting ticks from the same T0, so all are phase-locked to
// the captured RF edge with 2.5 ns resolution; an output with delay D rises
// D+1 clocks after the fire strobe, i.e. D+5 clocks after the RF edge arrives
// at rf_in.
//
// Blocks: event_code_match, rf_phase_detector, kick_sequencer, kick_regs and
// 2 + N_CSRM + N_CSRE + 1 delay_channel instances. The host processor, the
// PLL that makes the 400 MHz clock, the event receiver, the RF front end and
// the optical fibre drivers are outside; their signals are ports. Summing the
// interval, group and channel delays, and firing the charge triggers at T0,
// are this design's own choices.
module kicker_ctrl_top
  import kick_pkg::*;
(
  input  logic              clk,          // 400 MHz
  input  logic              rst_n,
  // timing-system event codes
  input  logic              evt_valid,
  input  code_t             evt_code,
  // RF square wave from the comparator
  input  logic              rf_in,
  // host register bus
  input  logic              bus_we,
  input  logic [ADDR_W-1:0] bus_addr,
  input  logic [31:0]       bus_wdata,
  output logic [31:0]       bus_rdata,
  // triggers to the fibre transmitters
  output logic [N_CSRM-1:0] csrm_charge,
  output logic [N_CSRM-1:0] csrm_discharge,
  output logic [N_CSRE-1:0] csre_discharge,
  output logic              pretrig_diag,
  output logic              pretrig_phys
);

  kick_cfg_t    cfg;
  kick_status_t status;

  logic       event_hit;
  count_t     event_count;
  logic       rf_rise, locked;
  period_t    meas_period;
  count_t     match_count;
  logic       fire;
  seq_state_t state;
  count_t     capture_count;

  logic                charge_pulse, charge_busy;
  logic                diag_busy, phys_busy;
  logic [N_CSRM-1:0]   csrm_busy;
  logic [N_CSRE-1:0]   csre_busy;
  logic                chan_busy;

  kick_regs u_regs (
    .clk, .rst_n, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .cfg, .status
  );

  event_code_match u_evt (
    .clk, .rst_n,
    .code_valid (evt_valid),
    .code       (evt_code),
    .match_code (cfg.event_code),
    .hit        (event_hit),
    .hit_count  (event_count)
  );

  rf_phase_detector u_rf (
    .clk, .rst_n, .rf_in,
    .exp_period   (cfg.vertex_period),
    .tol          (cfg.period_tol),
    .lock_periods (cfg.lock_periods),
    .rf_rise,
    .period       (meas_period),
    .match_count,
    .locked
  );

  kick_sequencer u_seq (
    .clk, .rst_n,
    .enable    (cfg.enable),
    .event_hit,
    .rf_rise,
    .locked,
    .chan_busy,
    .fire,
    .state,
    .capture_count
  );

  // Charge triggers: one counter, zero delay, fanned out to every CSRm supply.
  delay_channel u_charge (
    .clk, .rst_n, .start(fire), .delay('0), .width(cfg.pulse_width),
    .pulse(charge_pulse), .busy(charge_busy)
  );
  assign csrm_charge = {N_CSRM{charge_pulse}};

  delay_channel u_diag (
    .clk, .rst_n, .start(fire), .delay(cfg.diag_delay), .width(cfg.pulse_width),
    .pulse(pretrig_diag), .busy(diag_busy)
  );

  delay_channel u_phys (
    .clk, .rst_n, .start(fire), .delay(cfg.phys_delay), .width(cfg.pulse_width),
    .pulse(pretrig_phys), .busy(phys_busy)
  );

  for (genvar i = 0; i < N_CSRM; i++) begin : g_csrm
    delay_t total;
    assign total = cfg.interval + cfg.csrm_delay + cfg.csrm_ch[i];
    delay_channel u_dis (
      .clk, .rst_n, .start(fire), .delay(total), .width(cfg.pulse_width),
      .pulse(csrm_discharge[i]), .busy(csrm_busy[i])
    );
  end

  for (genvar j = 0; j < N_CSRE; j++) begin : g_csre
    delay_t total;
    assign total = cfg.interval + cfg.csre_delay + cfg.csre_ch[j];
    delay_channel u_dis (
      .clk, .rst_n, .start(fire), .delay(total), .width(cfg.pulse_width),
      .pulse(csre_discharge[j]), .busy(csre_busy[j])
    );
  end

  assign chan_busy = charge_busy | diag_busy | phys_busy | (|csrm_busy) | (|csre_busy);

  assign status = '{state:         state,
                    locked:        locked,
                    meas_period:   meas_period,
                    match_count:   match_count,
                    capture_count: capture_count,
                    event_count:   event_count};

endmodule
