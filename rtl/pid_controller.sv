// pid_controller: discrete PID of the body-bias regulation loop.
//
// Each valid_i step computes, from the mismatch e[k] in kHz,
//     I[k]   = I[k-1] + e[k]                     (conditional integration)
//     u[k]   = Kp*e[k] + Ki*I[k] + Kd*(e[k] - e[k-1])
// with Q8.8 gains, and outputs u[k] as the frequency gap F_Gap in signed kHz
// (rounded toward minus infinity by the >>8, saturated to sfreq_t).
// The paper uses a textbook PID in software, tuned empirically for short
// settling without undershoot, and does not print the gains; the default
// register defaults (Kp = 0.125, Ki = 0.375, Kd = 0.03125) are this
// design's choice and are writable at run time. They keep the loop stable
// for a plant-to-model gain ratio up to about 3: the body-bias model scales
// by F_target while the chip's sensitivity scales with its unbiased
// frequency, so the ratio reaches about 2 at 100 MHz on a 175 MHz chip.
// Anti-windup (this design's choice): while the body-bias output is pinned
// at its upper limit (sat_hi_i) positive errors are not integrated, and while
// it is pinned at the lower limit (sat_lo_i) negative errors are not.
// clear_i empties the integrator and the derivative history, so that after a
// new set-point the loop restarts from F_Gap = 0, i.e. VBB = 0 V, as the
// paper's controller does. The first step after a clear has no derivative.
//
// Timing: valid_i to valid_o one cycle.
module pid_controller
  import bbreg_pkg::*;
#(
  parameter int unsigned IW = 32             // integrator width
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   clear_i,
  input  logic   valid_i,
  input  sfreq_t err_khz_i,
  input  gain_t  kp_i,
  input  gain_t  ki_i,
  input  gain_t  kd_i,
  input  logic   sat_hi_i,
  input  logic   sat_lo_i,
  output logic   valid_o,
  output sfreq_t f_gap_khz_o
);
  localparam int unsigned AW = IW + GAIN_W + 2;
  localparam logic signed [IW-1:0] IMAX = {1'b0, {(IW-1){1'b1}}};
  localparam logic signed [IW-1:0] IMIN = {1'b1, {(IW-1){1'b0}}};
  localparam logic signed [AW-1:0] UMAX = AW'((1 <<< (SFREQ_W-1)) - 1);
  localparam logic signed [AW-1:0] UMIN = -AW'(1 <<< (SFREQ_W-1));

  logic signed [IW-1:0] integ_q, integ_d;
  sfreq_t               eprev_q;
  logic                 first_q;
  logic signed [IW:0]   isum;
  logic signed [AW-1:0] dterm, acc, u;
  logic                 hold;

  always_comb begin
    hold = (sat_hi_i && err_khz_i > 0) || (sat_lo_i && err_khz_i < 0);
    isum = (IW+1)'(integ_q) + (IW+1)'(err_khz_i);
    if (hold)                          integ_d = integ_q;
    else if (isum > (IW+1)'(IMAX))     integ_d = IMAX;
    else if (isum < (IW+1)'(IMIN))     integ_d = IMIN;
    else                               integ_d = IW'(isum);
    if (first_q) dterm = '0;
    else         dterm = AW'(kd_i) * (AW'(err_khz_i) - AW'(eprev_q));
    acc = AW'(kp_i) * AW'(err_khz_i) + AW'(ki_i) * AW'(integ_d) + dterm;
    u   = acc >>> GAIN_FRAC;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      integ_q     <= '0;
      eprev_q     <= '0;
      first_q     <= 1'b1;
      valid_o     <= 1'b0;
      f_gap_khz_o <= '0;
    end else begin
      valid_o <= 1'b0;
      if (clear_i) begin
        integ_q     <= '0;
        eprev_q     <= '0;
        first_q     <= 1'b1;
        f_gap_khz_o <= '0;
      end else if (valid_i) begin
        integ_q <= integ_d;
        eprev_q <= err_khz_i;
        first_q <= 1'b0;
        valid_o <= 1'b1;
        if (u > UMAX)      f_gap_khz_o <= sfreq_t'(UMAX);
        else if (u < UMIN) f_gap_khz_o <= sfreq_t'(UMIN);
        else               f_gap_khz_o <= sfreq_t'(u);
      end
    end
  end

endmodule
