// obs_control -- top state machine of an observation.
//
// States: IDLE -> ARMED -> RUN. A new instruction word (instr_valid) is
// latched as the active configuration. A word with bin width 0 is a stop
// command: it returns to IDLE. Any other word arms the logic (also from RUN,
// which restarts with the new settings). In ARMED the logic waits for a 1PPS
// edge at which the IRIG-B decoder holds a valid time whose second of day equals
// the instructed start second; at that edge it pulses start and enters RUN, so
// binning starts exactly on the UT second asked for. run is high in RUN.
// Timing: start is a one-clock pulse in the clock after the qualifying
// pps_rise; run rises in the clock after start.
// The comparison of decoded IRIG-B time with the start time is as the
// instrument is described; the stop word and re-arming are this design's own.
module obs_control
  import chisdas_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             instr_valid,
  input  instr_t           instr,
  input  logic             pps_rise,
  input  logic             time_valid,
  input  logic [SOD_W-1:0] sod_next,
  output obs_state_e       state,
  output logic             start,
  output logic             run,
  output instr_t           cfg
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= OBS_IDLE;
      start <= 1'b0;
      cfg   <= '0;
    end else begin
      start <= 1'b0;
      if (instr_valid) begin
        if (instr.res_us == '0) begin
          state <= OBS_IDLE;
        end else begin
          cfg   <= instr;
          state <= OBS_ARMED;
        end
      end else if (state == OBS_ARMED && pps_rise && time_valid && sod_next == cfg.start_sod) begin
        start <= 1'b1;
        state <= OBS_RUN;
      end
    end
  end

  assign run = (state == OBS_RUN) && !start;

  // The observation only starts on a 1PPS edge with a matching decoded time.
  property p_start_on_pps;
    @(posedge clk) disable iff (!rst_n) $rose(state == OBS_RUN) |-> $past(pps_rise && time_valid);
  endproperty
  a_start_on_pps: assert property (p_start_on_pps);

endmodule
