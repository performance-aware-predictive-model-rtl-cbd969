// bbreg_pkg: types and constants shared by the body-bias regulation subsystem.
//
// All frequencies inside the subsystem are integers in kHz, all voltages are
// signed integers in mV. The PMB model slope C_corr is an unsigned Q2.14
// fixed-point number and the PID gains are signed Q8.8 numbers.
//
// Numbers taken from the paper: the 0.7 V operating point, the process- and
// temperature-unaware PMB model (C_corr = 0.614, F0 = 6.86 MHz), the
// 5 %/100 mV body-bias sensitivity, the 50 mV generator step, the generator
// range -1.5 V .. VDD/2 + 300 mV, the -1 V controller floor, the 150 mV margin
// of the uncalibrated model and the calibration sweep (100 MHz start,
// 1 MHz step, 50 mV VBB step, 30 points, 10000 benchmark iterations).
// The reference clock frequency of the safe domain, the fixed-point formats
// and the PID gains are choices of this design.
package bbreg_pkg;

  // ---------------------------------------------------------------- formats
  localparam int unsigned FREQ_W  = 20;   // kHz, up to 1.048 GHz
  localparam int unsigned SFREQ_W = 24;   // signed kHz
  localparam int unsigned VBB_W   = 13;   // signed mV, -4096 .. 4095
  localparam int unsigned CC_W    = 16;   // Q2.14 model slope
  localparam int unsigned CC_FRAC = 14;
  localparam int unsigned GAIN_W  = 16;   // Q8.8 PID gain
  localparam int unsigned GAIN_FRAC = 8;

  typedef logic        [FREQ_W-1:0]  freq_t;   // unsigned kHz
  typedef logic signed [SFREQ_W-1:0] sfreq_t;  // signed kHz
  typedef logic signed [VBB_W-1:0]   vbb_t;    // signed mV
  typedef logic        [CC_W-1:0]    ccorr_t;  // Q2.14
  typedef logic signed [GAIN_W-1:0]  gain_t;   // Q8.8

  // ------------------------------------------------------- paper constants
  localparam int VDD_MV          = 700;            // cluster supply of the main experiments
  localparam int VBB_STEP_MV     = 50;             // generator resolution
  localparam int BBGEN_MIN_MV    = -1500;          // generator range, low end
  localparam int BBGEN_MAX_MV    = VDD_MV/2 + 300; // generator range, high end
  localparam int CTRL_VBB_MIN_MV = -1000;          // full RBB used by the controller
  localparam int CTRL_VBB_MAX_MV = VDD_MV/2 + 300; // full FBB used by the controller
  localparam int SLOPE_PCT_PER_100MV = 5;          // Fmax gain of body bias at 0.7 V

  // Process-unaware, temperature-unaware PMB model at 0.7 V
  localparam ccorr_t CCORR_DEFAULT = 16'd10060;    // 0.614 * 2^14
  localparam int     F0_DEFAULT_KHZ = 6860;        // 6.86 MHz
  localparam int     MARGIN_DEFAULT_MV = 150;      // margin of that model at 0.7 V
  localparam int     MARGIN_CAL_MV     = 100;      // margin once the chip is calibrated
  localparam int     F_TARGET_DEFAULT_KHZ = 170_000; // operating point of the results

  // Calibration sweep
  localparam int CAL_F_START_KHZ = 100_000;
  localparam int CAL_F_STEP_KHZ  = 1_000;
  localparam int CAL_VBB_MIN_MV  = -800;            // 30 points end at +650 mV
  localparam int CAL_POINTS      = 30;
  localparam int CAL_BENCH_ITERS = 10_000;

  // --------------------------------------------------------- design choices
  localparam int REF_CLK_KHZ = 50_000;             // safe-domain reference clock

  // Regulation-loop state, exported for status and coverage
  typedef enum logic [3:0] {
    RS_IDLE, RS_RESET_VBB, RS_WAIT_GEN0, RS_MEASURE, RS_WAIT_PMB, RS_COMPUTE,
    RS_APPLY, RS_WAIT_GEN, RS_PAUSE
  } reg_state_e;

  // Calibration state (Fig. 13 flow)
  typedef enum logic [3:0] {
    CS_IDLE, CS_VBB_STEP, CS_WAIT_GEN, CS_F_STEP, CS_BENCH, CS_WAIT_BENCH,
    CS_F_BACK, CS_PMB, CS_WAIT_PMB, CS_APPEND, CS_FIT_NUM, CS_FIT_SLOPE,
    CS_FIT_ICPT_START, CS_FIT_ICPT, CS_DONE
  } cal_state_e;

  // Saturating conversion of a wide signed value to vbb_t range
  function automatic vbb_t clamp_vbb(input logic signed [31:0] v,
                                     input int lo, input int hi);
    if (v < lo)      return vbb_t'(lo);
    else if (v > hi) return vbb_t'(hi);
    else             return vbb_t'(v);
  endfunction

endpackage
