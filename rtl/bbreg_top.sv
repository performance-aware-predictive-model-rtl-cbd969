// bbreg_top: the body-bias regulation subsystem of the chip's always-on
// ("safe") power domain, with the hardware it steers.
//
// Contents, following the chip's block diagram: the PMB controller reading
// the ring oscillators of the three power domains (safe, SoC, cluster), the
// two body-bias generators (cluster and SoC), and, in place of the paper's
// software, the regulation loop (bb_controller) and the boot-time calibration
// engine (calibration_fsm) behind one APB register file (bbreg_regs).
//   * Regulation: with CTRL.enable set, the loop keeps the cluster's
//     PMB-predicted maximum frequency at F_TARGET plus the margin's worth by
//     moving the cluster body bias between -1 V and VDD/2 + 300 mV.
//   * Calibration: CTRL.start_cal, accepted only while the loop is stopped,
//     sweeps the cluster body bias and the cluster clock set-point, runs the
//     benchmark on the cluster at each step, and loads the fitted PMB model
//     into the registers.
//   * The SoC generator holds the VBB written to SOC_VBB (0 V out of reset),
//     as in the paper's experiments, which regulate the cluster only.
// Arbitration: the calibration engine owns the PMB controller and the cluster
// generator while it is busy; the loop is held off meanwhile.
// Not inside: the ring oscillators (analog; their outputs come in on
// pmb_ring_clk_i, index 0 safe, 1 SoC, 2 cluster), the cluster's clock
// generator (its set-point during calibration leaves on cal_fop_khz_o) and
// the cores that run the calibration benchmark (bench_* handshake).
// Well voltages leave as signed mV numbers from the generator models.
// The defaults are the 0.7 V operating point (VDD 700 mV, 5 %/100 mV, upper
// VBB limit VDD/2 + 300 mV = 650 mV); the paper's 0.5 V and 0.9 V points use
// VDD 500 / 900 with SLOPE_PCT 11 / 3, and at 0.5 V a calibration search
// start CAL_F_START below the paper's 100 MHz.
// Timing: everything runs on the 50 MHz reference clock; APB is zero-wait
// (PREADY is tied high) and bench_iters_o is the constant 10000 the paper
// names, so those 33 output bits are constant by design. The calibration
// engine's state and point count and the SoC generator's ready flag are not
// brought out.
module bbreg_top
  import bbreg_pkg::*;
#(
  parameter int VDD           = VDD_MV,               // cluster/SoC supply, mV
  parameter int SLOPE_PCT     = SLOPE_PCT_PER_100MV,  // VBB model at that supply
  parameter int CAL_F_START   = CAL_F_START_KHZ,      // calibration search start, kHz
  parameter int PMB_WINDOW    = 1000,
  parameter int BENCH_TIMEOUT = 1_000_000
) (
  input  logic        clk_i,          // safe-domain reference clock, 50 MHz
  input  logic        rst_ni,
  // APB slave (register file)
  input  logic [7:0]  paddr_i,
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  output logic        pslverr_o,
  // PMB ring oscillators
  input  logic [2:0]  pmb_ring_clk_i,
  // cluster clock set-point and benchmark handshake (calibration)
  output logic        cal_active_o,
  output freq_t       cal_fop_khz_o,
  output logic        bench_start_o,
  output logic [31:0] bench_iters_o,
  input  logic        bench_done_i,
  input  logic        bench_pass_i,
  // well voltages
  output vbb_t        cl_vpwell_mv_o,
  output vbb_t        cl_vnwell_mv_o,
  output vbb_t        soc_vpwell_mv_o,
  output vbb_t        soc_vnwell_mv_o,
  // event strobes, for observation
  output logic        iter_done_o,
  output logic        cal_done_o,
  output logic        cal_fail_o,     // a calibration benchmark run failed
  output logic        cal_timeout_o   // a calibration benchmark run hung
);
  localparam int PMB_SAFE = 0, PMB_SOC = 1, PMB_CL = 2;

  // register file outputs
  logic        enable, cal_start, new_sp, soc_wr;
  freq_t       f_target;
  vbb_t        margin, soc_vbb;
  ccorr_t      c_corr;
  sfreq_t      f0;
  gain_t       kp, ki, kd;
  logic [31:0] period;

  // PMB controller
  logic  pmb_start, pmb_busy, pmb_done;
  freq_t f_pmb [3];

  // loop
  logic        ctl_pmb_start, ctl_gen_wr, ctl_idle, sat_hi, sat_lo;
  vbb_t        ctl_gen_vbb;
  reg_state_e  ctl_state;
  freq_t       f_max;
  sfreq_t      err;
  logic [31:0] iter;

  // calibration
  logic        cal_busy, cal_done, cal_ok, cal_pmb_start, cal_gen_wr;
  vbb_t        cal_gen_vbb;
  ccorr_t      cal_cc;
  sfreq_t      cal_f0;

  // generators
  logic  cl_wr, cl_ready;
  vbb_t  cl_vbb_req, cl_code;

  bbreg_regs u_regs (
    .clk_i, .rst_ni,
    .paddr_i, .psel_i, .penable_i, .pwrite_i, .pwdata_i,
    .prdata_o, .pready_o, .pslverr_o,
    .enable_o(enable), .cal_start_o(cal_start), .new_setpoint_o(new_sp),
    .f_target_khz_o(f_target), .margin_mv_o(margin), .c_corr_o(c_corr),
    .f0_khz_o(f0), .kp_o(kp), .ki_o(ki), .kd_o(kd), .period_o(period),
    .soc_wr_o(soc_wr), .soc_vbb_mv_o(soc_vbb),
    .cal_busy_i(cal_busy), .cal_done_i(cal_done), .cal_fit_ok_i(cal_ok),
    .cal_c_corr_i(cal_cc), .cal_f0_khz_i(cal_f0), .cal_fop_khz_i(cal_fop_khz_o),
    .sat_hi_i(sat_hi), .sat_lo_i(sat_lo), .loop_running_i(!ctl_idle),
    .gen_ready_i(cl_ready), .loop_state_i(ctl_state),
    .f_pmb_cl_khz_i(f_pmb[PMB_CL]), .f_pmb_soc_khz_i(f_pmb[PMB_SOC]),
    .f_pmb_safe_khz_i(f_pmb[PMB_SAFE]), .f_max_khz_i(f_max),
    .vbb_cl_mv_i(cl_code), .err_khz_i(err), .iter_i(iter)
  );

  pmb_ctrl #(.N_PMB(3), .WINDOW(PMB_WINDOW)) u_pmb_ctrl (
    .clk_i, .rst_ni, .ring_clk_i(pmb_ring_clk_i),
    .start_i(pmb_start), .busy_o(pmb_busy), .done_o(pmb_done),
    .f_pmb_khz_o(f_pmb)
  );

  bb_controller #(.SLOPE_PCT(SLOPE_PCT), .VBB_MAX(VDD/2 + 300)) u_ctrl (
    .clk_i, .rst_ni,
    .enable_i(enable && !cal_busy), .new_setpoint_i(new_sp),
    .f_target_khz_i(f_target), .margin_mv_i(margin),
    .c_corr_i(c_corr), .f0_khz_i(f0), .kp_i(kp), .ki_i(ki), .kd_i(kd),
    .period_i(period),
    .pmb_start_o(ctl_pmb_start), .pmb_done_i(pmb_done && !cal_busy),
    .f_pmb_khz_i(f_pmb[PMB_CL]),
    .gen_wr_o(ctl_gen_wr), .gen_vbb_mv_o(ctl_gen_vbb), .gen_ready_i(cl_ready),
    .state_o(ctl_state), .idle_o(ctl_idle), .f_max_khz_o(f_max),
    .err_khz_o(err), .vbb_mv_o(), .sat_hi_o(sat_hi), .sat_lo_o(sat_lo),
    .iter_o(iter), .iter_done_o(iter_done_o)
  );

  calibration_fsm #(.F_START_KHZ(CAL_F_START), .BENCH_TIMEOUT(BENCH_TIMEOUT)) u_cal (
    .clk_i, .rst_ni,
    .start_i(cal_start && ctl_idle),
    .fop_khz_o(cal_fop_khz_o), .bench_start_o, .bench_iters_o,
    .bench_done_i, .bench_pass_i,
    .pmb_start_o(cal_pmb_start), .pmb_done_i(pmb_done && cal_busy),
    .f_pmb_khz_i(f_pmb[PMB_CL]),
    .gen_wr_o(cal_gen_wr), .gen_vbb_mv_o(cal_gen_vbb), .gen_ready_i(cl_ready),
    .busy_o(cal_busy), .done_o(cal_done), .fit_ok_o(cal_ok),
    .c_corr_o(cal_cc), .f0_khz_o(cal_f0), .state_o(),
    .points_o(), .fail_seen_o(cal_fail_o), .timeout_seen_o(cal_timeout_o)
  );

  assign pmb_start  = cal_busy ? cal_pmb_start : ctl_pmb_start;
  assign cl_wr      = cal_busy ? cal_gen_wr    : ctl_gen_wr;
  assign cl_vbb_req = cal_busy ? cal_gen_vbb   : ctl_gen_vbb;

  bbgen #(.VDD(VDD)) u_bbgen_cluster (
    .clk_i, .rst_ni, .wr_i(cl_wr), .vbb_mv_i(cl_vbb_req),
    .code_mv_o(cl_code), .vpwell_mv_o(cl_vpwell_mv_o),
    .vnwell_mv_o(cl_vnwell_mv_o), .ready_o(cl_ready)
  );

  bbgen #(.VDD(VDD)) u_bbgen_soc (
    .clk_i, .rst_ni, .wr_i(soc_wr), .vbb_mv_i(soc_vbb),
    .code_mv_o(), .vpwell_mv_o(soc_vpwell_mv_o),
    .vnwell_mv_o(soc_vnwell_mv_o), .ready_o()
  );

  assign cal_active_o = cal_busy;
  assign cal_done_o   = cal_done;

  // only one master may start a PMB measurement, and never while it runs
  a_pmb_one_master: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                     !(ctl_pmb_start && cal_pmb_start));
  a_pmb_not_busy:   assert property (@(posedge clk_i) disable iff (!rst_ni)
                                     pmb_start |-> !pmb_busy);

endmodule
