// bb_controller: the closed body-bias regulation loop of one power domain.
//
// The loop follows the paper's controller structure: a feedback path (the
// domain's PMB plus the PMB model), a subtractor against the frequency
// set-point, a PID, and an actuator (the VBB model plus the body-bias
// generator). The paper runs everything except the PMB and the generator as
// software on the chip; here the whole loop is hardware, with the same order
// of operations:
//   1. On enable and on every new set-point the body bias is reset to 0 V in
//      one step and the PID is cleared (as in the paper), then the loop waits
//      for the generator to settle.
//   2. MEASURE: start a PMB measurement and wait for it.
//   3. COMPUTE: F_MAX = PMB model(F_PMB); e = F_target + F_margin - F_MAX;
//      F_gap = PID(e); VBB = VBB model(F_gap) (pmb_model -> freq_error ->
//      pid_controller -> vbb_model, chained by their valid strobes).
//   4. APPLY: write VBB to the generator and wait until both wells settled.
//   5. PAUSE for period_i reference cycles (the paper activates its software
//      controller every few seconds), then go back to 2.
// A new set-point or a disable is acted on at the end of the current
// iteration, in PAUSE (or at once in IDLE). Disabling leaves the last VBB in
// place.
//
// Interface: the PMB controller and the generator are reached through
// start/done and write/ready handshakes, which the top level routes to this
// block while the calibration engine is idle. idle_o is high only in IDLE.
// One iteration costs one PMB window, about 90 cycles of arithmetic, one
// generator transition and period_i cycles.
module bb_controller
  import bbreg_pkg::*;
#(
  parameter int SLOPE_PCT = SLOPE_PCT_PER_100MV,  // VBB model, % per 100 mV
  parameter int VBB_MAX   = CTRL_VBB_MAX_MV       // upper VBB limit, mV
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  // control and model registers
  input  logic       enable_i,
  input  logic       new_setpoint_i,   // pulse: set-point register written
  input  freq_t      f_target_khz_i,
  input  vbb_t       margin_mv_i,
  input  ccorr_t     c_corr_i,
  input  sfreq_t     f0_khz_i,
  input  gain_t      kp_i,
  input  gain_t      ki_i,
  input  gain_t      kd_i,
  input  logic [31:0] period_i,
  // PMB controller
  output logic       pmb_start_o,
  input  logic       pmb_done_i,
  input  freq_t      f_pmb_khz_i,
  // body-bias generator
  output logic       gen_wr_o,
  output vbb_t       gen_vbb_mv_o,
  input  logic       gen_ready_i,
  // status
  output reg_state_e state_o,
  output logic       idle_o,
  output freq_t      f_max_khz_o,
  output sfreq_t     err_khz_o,
  output vbb_t       vbb_mv_o,
  output logic       sat_hi_o,
  output logic       sat_lo_o,
  output logic [31:0] iter_o,
  output logic       iter_done_o       // pulse per finished iteration
);
  reg_state_e   state_q;
  logic         restart_q;
  logic [31:0]  pause_q;

  // datapath chain
  logic   mdl_valid, err_valid, pid_valid, vbb_done, vbb_busy;
  logic   pid_clear;
  freq_t  f_max, f_margin;
  sfreq_t err, f_gap;
  vbb_t   vbb_new;
  logic   sat_hi, sat_lo;

  pmb_model u_pmb_model (
    .clk_i, .rst_ni,
    .valid_i(state_q == RS_WAIT_PMB && pmb_done_i), .f_pmb_khz_i,
    .c_corr_i, .f0_khz_i,
    .valid_o(mdl_valid), .f_max_khz_o(f_max)
  );

  freq_error u_freq_error (
    .clk_i, .rst_ni,
    .valid_i(mdl_valid), .f_target_khz_i, .f_margin_khz_i(f_margin),
    .f_max_khz_i(f_max),
    .valid_o(err_valid), .err_khz_o(err)
  );

  pid_controller u_pid (
    .clk_i, .rst_ni,
    .clear_i(pid_clear), .valid_i(err_valid), .err_khz_i(err),
    .kp_i, .ki_i, .kd_i, .sat_hi_i(sat_hi), .sat_lo_i(sat_lo),
    .valid_o(pid_valid), .f_gap_khz_o(f_gap)
  );

  vbb_model #(.SLOPE_PCT(SLOPE_PCT), .VBB_MAX(VBB_MAX)) u_vbb_model (
    .clk_i, .rst_ni,
    .start_i(pid_valid), .f_gap_khz_i(f_gap), .f_target_khz_i,
    .margin_mv_i,
    .busy_o(vbb_busy), .done_o(vbb_done), .vbb_mv_o(vbb_new),
    .f_margin_khz_o(f_margin), .sat_hi_o(sat_hi), .sat_lo_o(sat_lo)
  );

  assign pid_clear = (state_q == RS_RESET_VBB);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= RS_IDLE;
      restart_q    <= 1'b0;
      pause_q      <= '0;
      pmb_start_o  <= 1'b0;
      gen_wr_o     <= 1'b0;
      gen_vbb_mv_o <= '0;
      vbb_mv_o     <= '0;
      iter_o       <= '0;
      iter_done_o  <= 1'b0;
    end else begin
      pmb_start_o <= 1'b0;
      gen_wr_o    <= 1'b0;
      iter_done_o <= 1'b0;
      if (new_setpoint_i) restart_q <= 1'b1;
      unique case (state_q)
        RS_IDLE: if (enable_i) state_q <= RS_RESET_VBB;
        RS_RESET_VBB: begin
          restart_q    <= 1'b0;
          gen_wr_o     <= 1'b1;
          gen_vbb_mv_o <= '0;
          vbb_mv_o     <= '0;
          state_q      <= RS_WAIT_GEN0;
        end
        RS_WAIT_GEN0: if (gen_ready_i && !gen_wr_o) state_q <= RS_MEASURE;
        RS_MEASURE: begin
          pmb_start_o <= 1'b1;
          state_q     <= RS_WAIT_PMB;
        end
        RS_WAIT_PMB: if (pmb_done_i) state_q <= RS_COMPUTE;
        RS_COMPUTE:  if (vbb_done)   state_q <= RS_APPLY;
        RS_APPLY: begin
          gen_wr_o     <= 1'b1;
          gen_vbb_mv_o <= vbb_new;
          vbb_mv_o     <= vbb_new;
          state_q      <= RS_WAIT_GEN;
        end
        RS_WAIT_GEN: if (gen_ready_i && !gen_wr_o) begin
          pause_q     <= period_i;
          iter_o      <= iter_o + 1'b1;
          iter_done_o <= 1'b1;
          state_q     <= RS_PAUSE;
        end
        RS_PAUSE: begin
          if (!enable_i)                     state_q <= RS_IDLE;
          else if (restart_q || new_setpoint_i) state_q <= RS_RESET_VBB;
          else if (pause_q == '0)            state_q <= RS_MEASURE;
          else                               pause_q <= pause_q - 1'b1;
        end
        default: state_q <= RS_IDLE;
      endcase
    end
  end

  assign state_o     = state_q;
  assign idle_o      = (state_q == RS_IDLE);
  assign f_max_khz_o = f_max;
  assign err_khz_o   = err;
  assign sat_hi_o    = sat_hi;
  assign sat_lo_o    = sat_lo;

  // the arithmetic chain must never be restarted while it is busy
  a_vbb_not_busy: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   pid_valid |-> !vbb_busy);

endmodule
