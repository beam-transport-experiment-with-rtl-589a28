// kick_regs: configuration and status registers of the kicker controller.
//
// The host processor (which serves the operator's web page) writes every
// setting of the controller here and reads back its status. The register set
// mirrors the operator page: kicker event code, extraction vertex frequency
// (held as an RF period in 2.5 ns ticks), charge/discharge interval, a group
// discharge delay for the CSRm and one for the CSRe, a delay for each of the
// six CSRm and four CSRe supplies, and the beam-diagnostics and
// physics-experiment pre-trigger delays. All times are in 2.5 ns ticks; the
// host converts from ns or us. Reset values are those of kick_pkg.
//
// Bus (this design's own choice): synchronous writes on bus_we with a 6-bit
// word address; bus_rdata is a combinational read of bus_addr. Map:
//   0x00 CTRL      bit0 enable          0x06 CSRm group delay
//   0x01 event code                     0x07 CSRe group delay
//   0x02 vertex period                  0x08 diagnostics pre-trigger delay
//   0x03 period tolerance               0x09 physics pre-trigger delay
//   0x04 lock periods                   0x0A trigger pulse width
//   0x05 charge->discharge interval     0x10-0x15 CSRm channel delays
//   0x18-0x1B CSRe channel delays
//   0x20 STATUS (ro) {state[1:0] at 31:30, locked at 29, match_count[15:0]}
//   0x21 measured RF period (ro)        0x22 {event_count, capture_count} (ro)
// Unmapped addresses read 0 and ignore writes.
module kick_regs
  import kick_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bus_we,
  input  logic [ADDR_W-1:0] bus_addr,
  input  logic [31:0]       bus_wdata,
  output logic [31:0]       bus_rdata,
  output kick_cfg_t         cfg,
  input  kick_status_t      status
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.enable        <= 1'b1;
      cfg.event_code    <= RST_EVENT_CODE;
      cfg.vertex_period <= RST_VERTEX_PERIOD;
      cfg.period_tol    <= RST_TOL;
      cfg.lock_periods  <= RST_LOCK_PERIODS;
      cfg.interval      <= RST_INTERVAL;
      cfg.csrm_delay    <= RST_CSRM_DELAY;
      cfg.csre_delay    <= RST_CSRE_DELAY;
      cfg.diag_delay    <= RST_DIAG_DELAY;
      cfg.phys_delay    <= RST_PHYS_DELAY;
      cfg.pulse_width   <= RST_PULSE_WIDTH;
      cfg.csrm_ch       <= '0;
      cfg.csre_ch       <= '0;
    end else if (bus_we) begin
      unique case (bus_addr)
        A_CTRL:       cfg.enable        <= bus_wdata[0];
        A_EVENT_CODE: cfg.event_code    <= bus_wdata;
        A_VERTEX_PER: cfg.vertex_period <= bus_wdata[PERIOD_W-1:0];
        A_PERIOD_TOL: cfg.period_tol    <= bus_wdata[PERIOD_W-1:0];
        A_LOCK_PER:   cfg.lock_periods  <= bus_wdata[COUNT_W-1:0];
        A_INTERVAL:   cfg.interval      <= bus_wdata;
        A_CSRM_DELAY: cfg.csrm_delay    <= bus_wdata;
        A_CSRE_DELAY: cfg.csre_delay    <= bus_wdata;
        A_DIAG_DELAY: cfg.diag_delay    <= bus_wdata;
        A_PHYS_DELAY: cfg.phys_delay    <= bus_wdata;
        A_PULSE_W:    cfg.pulse_width   <= bus_wdata[WIDTH_W-1:0];
        default: begin
          for (int i = 0; i < int'(N_CSRM); i++)
            if (bus_addr == A_CSRM_CH0 + ADDR_W'(i)) cfg.csrm_ch[i] <= bus_wdata;
          for (int i = 0; i < int'(N_CSRE); i++)
            if (bus_addr == A_CSRE_CH0 + ADDR_W'(i)) cfg.csre_ch[i] <= bus_wdata;
        end
      endcase
    end
  end

  always_comb begin
    bus_rdata = '0;
    unique case (bus_addr)
      A_CTRL:       bus_rdata = {31'd0, cfg.enable};
      A_EVENT_CODE: bus_rdata = cfg.event_code;
      A_VERTEX_PER: bus_rdata = 32'(cfg.vertex_period);
      A_PERIOD_TOL: bus_rdata = 32'(cfg.period_tol);
      A_LOCK_PER:   bus_rdata = 32'(cfg.lock_periods);
      A_INTERVAL:   bus_rdata = cfg.interval;
      A_CSRM_DELAY: bus_rdata = cfg.csrm_delay;
      A_CSRE_DELAY: bus_rdata = cfg.csre_delay;
      A_DIAG_DELAY: bus_rdata = cfg.diag_delay;
      A_PHYS_DELAY: bus_rdata = cfg.phys_delay;
      A_PULSE_W:    bus_rdata = 32'(cfg.pulse_width);
      A_STATUS:     bus_rdata = {status.state, status.locked, 13'd0, status.match_count};
      A_MEAS_PER:   bus_rdata = 32'(status.meas_period);
      A_COUNTS:     bus_rdata = {status.event_count, status.capture_count};
      default: begin
        for (int i = 0; i < int'(N_CSRM); i++)
          if (bus_addr == A_CSRM_CH0 + ADDR_W'(i)) bus_rdata = cfg.csrm_ch[i];
        for (int i = 0; i < int'(N_CSRE); i++)
          if (bus_addr == A_CSRE_CH0 + ADDR_W'(i)) bus_rdata = cfg.csre_ch[i];
      end
    endcase
  end

endmodule
