// pmb_model: converts a raw PMB reading into an estimate of the maximum
// frequency of the monitored domain.
//
// The paper fits the PMB reading against the measured maximum frequency with
// the linear model F_MAX = C_corr * F_PMB + F0 (its eq. 1) and runs it in
// software; here it is one registered multiply-add. C_corr is unsigned Q2.14,
// F0 is signed kHz, so the computation is
//     F_MAX = (C_corr * F_PMB + 2^13) >> 14 + F0
// (the low 14 bits of the rounded product are dropped, so they are unused),
// rounded to the nearest kHz and saturated to 0 .. 2^20-1 kHz.
// The coefficients come from registers: out of reset they hold the
// process-unaware, temperature-unaware fit (0.614, 6.86 MHz); the calibration
// engine overwrites them with the chip's own fit.
//
// Timing: valid_i to valid_o one cycle; fully pipelined.
module pmb_model
  import bbreg_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   valid_i,
  input  freq_t  f_pmb_khz_i,
  input  ccorr_t c_corr_i,       // Q2.14
  input  sfreq_t f0_khz_i,       // signed kHz
  output logic   valid_o,
  output freq_t  f_max_khz_o
);
  localparam int unsigned PW = FREQ_W + CC_W;

  logic [PW-1:0]      prod;
  logic signed [31:0] est;

  always_comb begin
    prod = PW'(f_pmb_khz_i) * PW'(c_corr_i) + PW'(1 << (CC_FRAC - 1));
    est  = 32'(signed'({1'b0, prod[PW-1:CC_FRAC]})) + 32'(f0_khz_i);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o     <= 1'b0;
      f_max_khz_o <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        if (est < 0)                         f_max_khz_o <= '0;
        else if (est > 32'((1 << FREQ_W) - 1)) f_max_khz_o <= '1;
        else                                 f_max_khz_o <= freq_t'(est);
      end
    end
  end

endmodule
