// kick_pkg: constants and types shared by the kicker controller.
//
// The controller runs on one 400 MHz clock, so every delay is counted in
// ticks of 2.5 ns, the time resolution the controller is built around. The
// configuration held by kick_regs and the status it reads back are passed as
// packed structs. Reset values follow the parameter set used for the CSRm
// extraction / CSRe injection run: event code 0xC00F0001, extraction vertex
// frequency 0.870633 MHz, CSRm discharge 1500 ns, CSRe discharge 680 ns and
// both pre-trigger delays 0 ns. The pulse width, period tolerance and the
// register map are this design's own choices.
package kick_pkg;

  // Channel counts: six extraction supplies on the CSRm, four injection
  // supplies on the CSRe.
  localparam int unsigned N_CSRM = 6;
  localparam int unsigned N_CSRE = 4;

  localparam int unsigned DELAY_W  = 32;            // delay counters, ticks
  localparam int unsigned WIDTH_W  = 16;            // pulse width, ticks
  localparam int unsigned PERIOD_W = 16;            // RF period, ticks
  localparam int unsigned COUNT_W  = 16;            // lock / event counters
  localparam int unsigned CODE_W   = 32;            // timing event code
  localparam int unsigned ADDR_W   = 6;             // register word address

  typedef logic [DELAY_W-1:0]  delay_t;
  typedef logic [WIDTH_W-1:0]  width_t;
  typedef logic [PERIOD_W-1:0] period_t;
  typedef logic [COUNT_W-1:0]  count_t;
  typedef logic [CODE_W-1:0]   code_t;

  // Sequencer states.
  typedef enum logic [1:0] {
    SEQ_IDLE   = 2'd0,   // waiting for the kicker event code
    SEQ_ARMED  = 2'd1,   // waiting for an RF edge at the vertex frequency
    SEQ_FIRING = 2'd2    // delay channels running
  } seq_state_t;

  // Register map (32-bit words).
  localparam logic [ADDR_W-1:0] A_CTRL        = 6'h00; // bit0 enable
  localparam logic [ADDR_W-1:0] A_EVENT_CODE  = 6'h01;
  localparam logic [ADDR_W-1:0] A_VERTEX_PER  = 6'h02; // ticks per RF period
  localparam logic [ADDR_W-1:0] A_PERIOD_TOL  = 6'h03; // ticks
  localparam logic [ADDR_W-1:0] A_LOCK_PER    = 6'h04; // matching periods
  localparam logic [ADDR_W-1:0] A_INTERVAL    = 6'h05; // charge->discharge
  localparam logic [ADDR_W-1:0] A_CSRM_DELAY  = 6'h06; // CSRm group delay
  localparam logic [ADDR_W-1:0] A_CSRE_DELAY  = 6'h07; // CSRe group delay
  localparam logic [ADDR_W-1:0] A_DIAG_DELAY  = 6'h08; // diagnostics pre-trigger
  localparam logic [ADDR_W-1:0] A_PHYS_DELAY  = 6'h09; // physics pre-trigger
  localparam logic [ADDR_W-1:0] A_PULSE_W     = 6'h0A; // trigger pulse width
  localparam logic [ADDR_W-1:0] A_CSRM_CH0    = 6'h10; // 0x10..0x15
  localparam logic [ADDR_W-1:0] A_CSRE_CH0    = 6'h18; // 0x18..0x1B
  localparam logic [ADDR_W-1:0] A_STATUS      = 6'h20; // read only
  localparam logic [ADDR_W-1:0] A_MEAS_PER    = 6'h21; // read only
  localparam logic [ADDR_W-1:0] A_COUNTS      = 6'h22; // read only

  // Reset values, in ticks where they are times.
  localparam code_t   RST_EVENT_CODE    = 32'hC00F_0001;
  localparam period_t RST_VERTEX_PERIOD = 16'd459;    // 400 MHz / 0.870633 MHz
  localparam period_t RST_TOL           = 16'd2;
  localparam count_t  RST_LOCK_PERIODS  = 16'd10000;  // "tens of thousands"
  localparam delay_t  RST_INTERVAL      = '0;         // 0 us
  localparam delay_t  RST_CSRM_DELAY    = 32'd600;    // 1500 ns
  localparam delay_t  RST_CSRE_DELAY    = 32'd272;    // 680 ns
  localparam delay_t  RST_DIAG_DELAY    = '0;         // 0 ns
  localparam delay_t  RST_PHYS_DELAY    = '0;         // 0 ns
  localparam width_t  RST_PULSE_WIDTH   = 16'd400;    // 1 us

  typedef struct packed {
    logic    enable;
    code_t   event_code;
    period_t vertex_period;
    period_t period_tol;
    count_t  lock_periods;
    delay_t  interval;
    delay_t  csrm_delay;
    delay_t  csre_delay;
    delay_t  diag_delay;
    delay_t  phys_delay;
    width_t  pulse_width;
    delay_t [N_CSRM-1:0] csrm_ch;
    delay_t [N_CSRE-1:0] csre_ch;
  } kick_cfg_t;

  typedef struct packed {
    seq_state_t state;
    logic       locked;
    period_t    meas_period;
    count_t     match_count;
    count_t     capture_count;
    count_t     event_count;
  } kick_status_t;

endpackage
