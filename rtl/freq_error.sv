// freq_error: the subtractor of the regulation loop.
//
// Computes the frequency mismatch between the set-point and the feedback,
//     e = (F_target + F_margin) - F_MAX,
// in signed kHz, saturated to the sfreq_t range. Positive e means the domain
// is too slow and needs more forward body bias.
// F_margin is the frequency that the body-bias margin is worth (worked out by
// vbb_model). Adding it to the set-point is this design's choice: the paper
// adds a fixed margin on VBB after the model, and with an integrating PID in
// the loop that margin would otherwise be cancelled by the integrator, while
// the paper reports that in steady state near the natural maximum frequency
// "the only body bias voltage applied is the body bias margin".
//
// Timing: registered, valid_i to valid_o one cycle.
module freq_error
  import bbreg_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   valid_i,
  input  freq_t  f_target_khz_i,
  input  freq_t  f_margin_khz_i,
  input  freq_t  f_max_khz_i,
  output logic   valid_o,
  output sfreq_t err_khz_o
);
  logic signed [SFREQ_W+1:0] diff;
  localparam logic signed [SFREQ_W+1:0] EMAX = (SFREQ_W+2)'((1 <<< (SFREQ_W-1)) - 1);
  localparam logic signed [SFREQ_W+1:0] EMIN = -(SFREQ_W+2)'(1 <<< (SFREQ_W-1));

  always_comb
    diff = (SFREQ_W+2)'(f_target_khz_i) + (SFREQ_W+2)'(f_margin_khz_i)
         - (SFREQ_W+2)'(f_max_khz_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_o   <= 1'b0;
      err_khz_o <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) begin
        if (diff > EMAX)      err_khz_o <= sfreq_t'(EMAX);
        else if (diff < EMIN) err_khz_o <= sfreq_t'(EMIN);
        else                  err_khz_o <= sfreq_t'(diff);
      end
    end
  end

endmodule
