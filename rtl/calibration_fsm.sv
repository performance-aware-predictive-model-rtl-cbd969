// calibration_fsm: on-chip version of the paper's boot-time calibration,
// which fits the PMB model to the individual chip (its process corner).
//
// The flow is the paper's (its calibration flow chart):
//   for each of POINTS body-bias values, VBB_MIN, VBB_MIN + 50 mV, ...:
//     program VBB and wait for the generator;
//     repeat: raise the operating frequency F_OP by 1 MHz and run N
//             benchmark iterations, until the chip fails;
//     lower F_OP by one step (last passing frequency = F_MAX here);
//     read the cluster PMB and append the pair (F_PMB, F_MAX);
//   fit F_MAX = C_corr * F_PMB + F0 by least squares.
// F_OP starts at 100 MHz and is not reset between VBB points, as in the flow
// chart (there is no such arrow); since VBB rises monotonically the maximum
// frequency does too.
//
// Running the benchmark is the cluster's job: bench_start_o asks for
// bench_iters_o iterations at F_OP (fop_khz_o, the set-point of the cluster
// frequency-locked loop); the cluster answers bench_done_i with bench_pass_i.
// A chip that never answers within BENCH_TIMEOUT cycles has failed completely
// (the paper counts both wrong results and complete failure as failure).
//
// The fit keeps running sums Sx, Sy, Sxx, Sxy over the n points (x = F_PMB,
// y = F_MAX, both kHz) and then computes, with one sequential divider,
//     C_corr = round( (n*Sxy - Sx*Sy) * 2^14 / (n*Sxx - Sx^2) )   (Q2.14)
//     F0     = round( (Sy*2^14 - C_corr*Sx) / (n*2^14) )            (kHz)
// fit_ok_o is low if the slope came out negative, too large for Q2.14, or the
// PMB readings had no spread. Keeping sums instead of the two lists of the
// flow chart is this design's choice (it gives the same fit).
// done_o pulses once the results are valid; they then hold.
module calibration_fsm
  import bbreg_pkg::*;
#(
  parameter int F_START_KHZ   = CAL_F_START_KHZ,
  parameter int F_STEP_KHZ    = CAL_F_STEP_KHZ,
  parameter int VBB_MIN       = CAL_VBB_MIN_MV,
  parameter int VBB_STEP      = VBB_STEP_MV,
  parameter int POINTS        = CAL_POINTS,
  parameter int BENCH_ITERS   = CAL_BENCH_ITERS,
  parameter int BENCH_TIMEOUT = 1_000_000
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  // cluster benchmark and clock
  output freq_t       fop_khz_o,
  output logic        bench_start_o,
  output logic [31:0] bench_iters_o,
  input  logic        bench_done_i,
  input  logic        bench_pass_i,
  // PMB controller
  output logic        pmb_start_o,
  input  logic        pmb_done_i,
  input  freq_t       f_pmb_khz_i,
  // body-bias generator
  output logic        gen_wr_o,
  output vbb_t        gen_vbb_mv_o,
  input  logic        gen_ready_i,
  // results and status
  output logic        busy_o,
  output logic        done_o,
  output logic        fit_ok_o,
  output ccorr_t      c_corr_o,
  output sfreq_t      f0_khz_o,
  output cal_state_e  state_o,
  output logic [7:0]  points_o,
  output logic        fail_seen_o,     // pulse: a benchmark run failed
  output logic        timeout_seen_o   // pulse: a benchmark run never ended
);
  localparam int unsigned DW = 80;
  localparam int unsigned SW = 56;       // width of the sums

  cal_state_e          state_q;
  vbb_t                vbb_q;
  freq_t               fop_q;
  logic [7:0]          k_q;
  logic [31:0]         tmr_q;
  logic [SW-1:0]       sx_q, sy_q, sxx_q, sxy_q;
  logic signed [DW-1:0] num_q, den_q;
  logic                neg_q;
  logic signed [DW-1:0] slope_q;

  // divider
  logic          div_start, div_busy, div_done;
  logic [DW-1:0] div_a, div_b, div_q;

  seq_divider #(.W(DW)) u_div (
    .clk_i, .rst_ni,
    .start_i(div_start), .dividend_i(div_a), .divisor_i(div_b),
    .busy_o(div_busy), .done_o(div_done), .quotient_o(div_q), .remainder_o()
  );

  // fit arithmetic, all of it at DW bits
  logic signed [DW-1:0] n_s, sx_s, sy_s, sxx_s, sxy_s, num_d, den_d, icpt_num;
  always_comb begin
    n_s   = DW'(k_q);
    sx_s  = DW'(sx_q);
    sy_s  = DW'(sy_q);
    sxx_s = DW'(sxx_q);
    sxy_s = DW'(sxy_q);
    num_d = n_s * sxy_s - sx_s * sy_s;
    den_d = n_s * sxx_s - sx_s * sx_s;
    icpt_num = (sy_s <<< CC_FRAC) - slope_q * sx_s;
    div_start = 1'b0;
    div_a     = '0;
    div_b     = '0;
    if (state_q == CS_FIT_SLOPE && !div_busy && !div_done) begin
      div_start = 1'b1;
      div_a     = (num_q <<< CC_FRAC) + (den_q >>> 1);   // rounded
      div_b     = den_q;
    end else if (state_q == CS_FIT_ICPT_START) begin
      div_start = 1'b1;
      div_a     = ((icpt_num < 0) ? -icpt_num : icpt_num) + (n_s <<< (CC_FRAC - 1));
      div_b     = n_s <<< CC_FRAC;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q        <= CS_IDLE;
      vbb_q          <= '0;
      fop_q          <= '0;
      k_q            <= '0;
      tmr_q          <= '0;
      sx_q           <= '0;
      sy_q           <= '0;
      sxx_q          <= '0;
      sxy_q          <= '0;
      num_q          <= '0;
      den_q          <= '0;
      neg_q          <= 1'b0;
      slope_q        <= '0;
      bench_start_o  <= 1'b0;
      pmb_start_o    <= 1'b0;
      gen_wr_o       <= 1'b0;
      gen_vbb_mv_o   <= '0;
      done_o         <= 1'b0;
      fit_ok_o       <= 1'b0;
      c_corr_o       <= '0;
      f0_khz_o       <= '0;
      fail_seen_o    <= 1'b0;
      timeout_seen_o <= 1'b0;
    end else begin
      bench_start_o  <= 1'b0;
      pmb_start_o    <= 1'b0;
      gen_wr_o       <= 1'b0;
      done_o         <= 1'b0;
      fail_seen_o    <= 1'b0;
      timeout_seen_o <= 1'b0;
      unique case (state_q)
        CS_IDLE: if (start_i) begin
          vbb_q   <= vbb_t'(VBB_MIN - VBB_STEP);
          fop_q   <= freq_t'(F_START_KHZ);
          k_q     <= '0;
          sx_q    <= '0;
          sy_q    <= '0;
          sxx_q   <= '0;
          sxy_q   <= '0;
          state_q <= CS_VBB_STEP;
        end
        CS_VBB_STEP: begin                       // "VBB + 1 step"
          vbb_q        <= vbb_q + vbb_t'(VBB_STEP);
          gen_vbb_mv_o <= vbb_q + vbb_t'(VBB_STEP);
          gen_wr_o     <= 1'b1;
          state_q      <= CS_WAIT_GEN;
        end
        CS_WAIT_GEN: if (gen_ready_i && !gen_wr_o) state_q <= CS_F_STEP;
        CS_F_STEP: begin                         // "Set (F_OP + 1 step)"
          fop_q   <= fop_q + freq_t'(F_STEP_KHZ);
          state_q <= CS_BENCH;
        end
        CS_BENCH: begin                          // "Run N benchmark iterations"
          bench_start_o <= 1'b1;
          tmr_q         <= 32'(BENCH_TIMEOUT);
          state_q       <= CS_WAIT_BENCH;
        end
        CS_WAIT_BENCH: begin                     // "Chip failure?"
          if (bench_done_i && bench_pass_i) state_q <= CS_F_STEP;
          else if (bench_done_i) begin
            fail_seen_o <= 1'b1;
            state_q     <= CS_F_BACK;
          end else if (tmr_q == '0) begin
            timeout_seen_o <= 1'b1;
            state_q        <= CS_F_BACK;
          end else tmr_q <= tmr_q - 1'b1;
        end
        CS_F_BACK: begin                         // "Set (F_OP - 1 step)"
          fop_q   <= fop_q - freq_t'(F_STEP_KHZ);
          state_q <= CS_PMB;
        end
        CS_PMB: begin                            // "Read F_PMB"
          pmb_start_o <= 1'b1;
          state_q     <= CS_WAIT_PMB;
        end
        CS_WAIT_PMB: if (pmb_done_i) begin       // append the pair
          sx_q  <= sx_q  + SW'(f_pmb_khz_i);
          sy_q  <= sy_q  + SW'(fop_q);
          sxx_q <= sxx_q + SW'(f_pmb_khz_i) * SW'(f_pmb_khz_i);
          sxy_q <= sxy_q + SW'(f_pmb_khz_i) * SW'(fop_q);
          k_q   <= k_q + 1'b1;
          state_q <= CS_APPEND;
        end
        CS_APPEND:                               // "VBB range covered?"
          state_q <= (k_q == 8'(POINTS)) ? CS_FIT_NUM : CS_VBB_STEP;
        CS_FIT_NUM: begin                        // linear regression
          num_q   <= num_d;
          den_q   <= den_d;
          state_q <= CS_FIT_SLOPE;
        end
        CS_FIT_SLOPE: begin
          if (num_d <= 0 || den_d <= 0) begin    // degenerate fit
            fit_ok_o <= 1'b0;
            state_q  <= CS_DONE;
          end else if (div_done) begin
            if (div_q > DW'((1 << CC_W) - 1)) begin
              fit_ok_o <= 1'b0;
              state_q  <= CS_DONE;
            end else begin
              slope_q  <= signed'(div_q);
              c_corr_o <= ccorr_t'(div_q);
              state_q  <= CS_FIT_ICPT_START;
            end
          end
        end
        CS_FIT_ICPT_START: begin
          neg_q   <= icpt_num < 0;
          state_q <= CS_FIT_ICPT;
        end
        CS_FIT_ICPT: if (div_done) begin
          f0_khz_o <= neg_q ? -sfreq_t'(div_q) : sfreq_t'(div_q);
          fit_ok_o <= 1'b1;
          state_q  <= CS_DONE;
        end
        CS_DONE: begin
          done_o  <= 1'b1;
          state_q <= CS_IDLE;
        end
        default: state_q <= CS_IDLE;
      endcase
    end
  end

  assign busy_o        = (state_q != CS_IDLE);
  assign fop_khz_o     = fop_q;
  // constant by design: the run length the paper uses (its 32 bits are idle
  // outputs of this block)
  assign bench_iters_o = 32'(BENCH_ITERS);
  assign state_o       = state_q;
  assign points_o      = k_q;

endmodule
