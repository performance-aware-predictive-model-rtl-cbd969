// vbb_model: the actuator model of the regulation loop. Turns the frequency
// gap asked for by the PID into the body-bias voltage to program.
//
// The paper linearises the relative frequency change against VBB: at 0.7 V
// the maximum frequency moves by 5 % per 100 mV (11 % at 0.5 V, 3 % at 0.9 V),
// whatever the temperature. Hence, with s = SLOPE_PCT % per 100 mV,
//     VBB_reg = F_gap / F_target * 10000/s   [mV]
// The forward-bias margin V_BB,Margin is added, the sum is rounded up to the
// generator's 50 mV step (toward forward bias: the paper stresses that
// undershoot, too little forward bias, is the dangerous direction) and
// clamped to the controller's range, -1 V (full reverse bias used by
// the paper's controller) to VDD/2 + 300 mV (full forward bias). sat_hi_o /
// sat_lo_o tell the PID that the output is pinned at a limit.
// The block also returns the frequency the margin is worth,
//     F_margin = F_target * margin * s / 10000   [kHz],
// which the subtractor adds to the set-point (see freq_error).
//
// Both divisions share one sequential divider (seq_divider, DW cycles each).
// Interface: start_i samples all inputs; done_o pulses when vbb_mv_o,
// f_margin_khz_o and the saturation flags are valid, 2*DW + 5 clock edges
// after the edge that samples start_i (85 with DW = 40).
// The rounding directions, the divider and the ordering are this design's
// choices; the slope, step, range and margin are the paper's.
module vbb_model
  import bbreg_pkg::*;
#(
  parameter int SLOPE_PCT = SLOPE_PCT_PER_100MV,
  parameter int VBB_MIN   = CTRL_VBB_MIN_MV,
  parameter int VBB_MAX   = CTRL_VBB_MAX_MV,
  parameter int STEP_MV   = VBB_STEP_MV
) (
  input  logic   clk_i,
  input  logic   rst_ni,
  input  logic   start_i,
  input  sfreq_t f_gap_khz_i,
  input  freq_t  f_target_khz_i,
  input  vbb_t   margin_mv_i,
  output logic   busy_o,
  output logic   done_o,
  output vbb_t   vbb_mv_o,
  output freq_t  f_margin_khz_o,
  output logic   sat_hi_o,
  output logic   sat_lo_o
);
  localparam int unsigned DW = 40;
  localparam int GAIN_MV = 10000 / SLOPE_PCT;   // mV per 100 % of F_target

  typedef enum logic [2:0] {VM_IDLE, VM_DIV1, VM_WAIT1, VM_DIV2, VM_WAIT2, VM_OUT} vm_state_e;
  vm_state_e state_q;

  sfreq_t  gap_q;
  freq_t   tgt_q;
  vbb_t    mrg_q;
  logic    neg_q;

  logic          div_start, div_done;
  logic [DW-1:0] div_a, div_b, div_q, div_r;

  seq_divider #(.W(DW)) u_div (
    .clk_i, .rst_ni,
    .start_i(div_start), .dividend_i(div_a), .divisor_i(div_b),
    .busy_o(), .done_o(div_done), .quotient_o(div_q), .remainder_o(div_r)
  );

  logic [DW-1:0]      gap_abs;
  logic signed [31:0] vreg_q, vquant, vsum;
  logic signed [31:0] vreg_d;

  always_comb begin
    gap_abs = gap_q[SFREQ_W-1] ? DW'(-32'(gap_q)) : DW'(gap_q);
    div_a   = '0;
    div_b   = '0;
    div_start = 1'b0;
    if (state_q == VM_DIV1) begin
      div_start = 1'b1;
      div_a     = gap_abs * DW'(GAIN_MV);
      div_b     = DW'(tgt_q);
    end else if (state_q == VM_DIV2) begin
      div_start = 1'b1;
      div_a     = DW'(tgt_q) * DW'(mrg_q < 0 ? 12'sd0 : mrg_q) * DW'(SLOPE_PCT);
      div_b     = DW'(10000);
    end
    // rounding of the first quotient toward +infinity
    if (neg_q) vreg_d = -32'(div_q[30:0]);
    else       vreg_d = 32'(div_q[30:0]) + ((div_r != '0) ? 32'sd1 : 32'sd0);
    // add the margin, then quantise to the generator step, toward forward bias
    vquant = vreg_q + 32'(mrg_q);
    if (vquant > 0) vsum = ((vquant + 32'(STEP_MV - 1)) / 32'(STEP_MV)) * 32'(STEP_MV);
    else            vsum = -(((-vquant) / 32'(STEP_MV)) * 32'(STEP_MV));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q        <= VM_IDLE;
      gap_q          <= '0;
      tgt_q          <= '0;
      mrg_q          <= '0;
      neg_q          <= 1'b0;
      vreg_q         <= '0;
      done_o         <= 1'b0;
      vbb_mv_o       <= '0;
      f_margin_khz_o <= '0;
      sat_hi_o       <= 1'b0;
      sat_lo_o       <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        VM_IDLE: if (start_i) begin
          gap_q   <= f_gap_khz_i;
          tgt_q   <= f_target_khz_i;
          mrg_q   <= margin_mv_i;
          neg_q   <= f_gap_khz_i[SFREQ_W-1];
          state_q <= VM_DIV1;
        end
        VM_DIV1: state_q <= VM_WAIT1;
        VM_WAIT1: if (div_done) begin
          // clamp the raw model output well inside 32 bits before quantising
          if (vreg_d > 32'sd4000)       vreg_q <= 32'sd4000;
          else if (vreg_d < -32'sd4000) vreg_q <= -32'sd4000;
          else                          vreg_q <= vreg_d;
          state_q <= VM_DIV2;
        end
        VM_DIV2: state_q <= VM_WAIT2;
        VM_WAIT2: if (div_done) begin
          f_margin_khz_o <= (div_q > DW'((1 << FREQ_W) - 1)) ? '1 : freq_t'(div_q);
          state_q        <= VM_OUT;
        end
        VM_OUT: begin
          vbb_mv_o <= clamp_vbb(vsum, VBB_MIN, VBB_MAX);
          sat_hi_o <= (vsum >= 32'(VBB_MAX));
          sat_lo_o <= (vsum <= 32'(VBB_MIN));
          done_o   <= 1'b1;
          state_q  <= VM_IDLE;
        end
        default: state_q <= VM_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != VM_IDLE);

endmodule
