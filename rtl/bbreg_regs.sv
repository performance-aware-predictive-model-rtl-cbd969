// bbreg_regs: memory-mapped control and status registers of the body-bias
// regulation subsystem, on an AMBA APB (v3) slave port.
//
// The paper's controller talks to the hardware through control registers (the
// body-bias generator set-point) and status registers (the PMB readings).
// With the loop in hardware, the registers instead hold the loop's inputs and
// report its state. The map (byte addresses, 32-bit words) is this design's:
//   0x00 CTRL      [0] loop enable (RW)  [1] start calibration (W, pulse)
//   0x04 F_TARGET  frequency set-point, kHz (RW); a write restarts the loop
//   0x08 MARGIN    forward-bias margin V_BB,Margin, signed mV (RW)
//   0x0C C_CORR    PMB model slope, Q2.14 (RW; loaded by calibration)
//   0x10 F0        PMB model offset, signed kHz (RW; loaded by calibration)
//   0x14 KP 0x18 KI 0x1C KD   PID gains, signed Q8.8 (RW)
//   0x20 PERIOD    pause between loop iterations, reference cycles (RW)
//   0x24 SOC_VBB   VBB of the SoC domain, signed mV (RW; a write programs
//                  the SoC generator)
//   0x28 STATUS    [0] calibration busy [1] calibration done (sticky, cleared
//                  by a new start) [2] fit ok [3] VBB at upper limit
//                  [4] VBB at lower limit [5] loop running [6] cluster
//                  generator ready [11:8] loop state (RO)
//   0x2C F_PMB cluster, 0x30 F_MAX estimate, 0x34 cluster VBB code (mV),
//   0x38 F_PMB SoC, 0x3C F_PMB safe, 0x40 last error e (signed kHz),
//   0x44 loop iterations, 0x48 calibration F_OP (kHz)           (all RO)
// Reset values: loop off, set-point 170 MHz, margin 150 mV, the
// process-unaware 0.7 V model (C_corr 0.614, F0 6.86 MHz), Kp 0.125,
// Ki 0.375, Kd 0.03125, period 50e6 cycles (1 s at 50 MHz), SoC VBB 0 V.
// When a calibration ends with a good fit, C_CORR and F0 take the fitted
// values and MARGIN drops to 100 mV, the margin the paper uses for a
// calibrated (process-aware) model. A software write in the same cycle loses.
// Timing: zero-wait-state APB; PREADY is always high; PSLVERR flags an
// unmapped address or a write to a read-only register.
module bbreg_regs
  import bbreg_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // APB slave
  input  logic [7:0]  paddr_i,
  input  logic        psel_i,
  input  logic        penable_i,
  input  logic        pwrite_i,
  input  logic [31:0] pwdata_i,
  output logic [31:0] prdata_o,
  output logic        pready_o,
  output logic        pslverr_o,
  // control outputs
  output logic        enable_o,
  output logic        cal_start_o,
  output logic        new_setpoint_o,
  output freq_t       f_target_khz_o,
  output vbb_t        margin_mv_o,
  output ccorr_t      c_corr_o,
  output sfreq_t      f0_khz_o,
  output gain_t       kp_o,
  output gain_t       ki_o,
  output gain_t       kd_o,
  output logic [31:0] period_o,
  output logic        soc_wr_o,
  output vbb_t        soc_vbb_mv_o,
  // status inputs
  input  logic        cal_busy_i,
  input  logic        cal_done_i,
  input  logic        cal_fit_ok_i,
  input  ccorr_t      cal_c_corr_i,
  input  sfreq_t      cal_f0_khz_i,
  input  freq_t       cal_fop_khz_i,
  input  logic        sat_hi_i,
  input  logic        sat_lo_i,
  input  logic        loop_running_i,
  input  logic        gen_ready_i,
  input  reg_state_e  loop_state_i,
  input  freq_t       f_pmb_cl_khz_i,
  input  freq_t       f_pmb_soc_khz_i,
  input  freq_t       f_pmb_safe_khz_i,
  input  freq_t       f_max_khz_i,
  input  vbb_t        vbb_cl_mv_i,
  input  sfreq_t      err_khz_i,
  input  logic [31:0] iter_i
);
  logic        wr_en, rd_en;
  logic        cal_done_q, cal_ok_q;
  logic [31:0] rdata;
  logic        addr_ok, addr_ro;

  assign wr_en = psel_i && penable_i && pwrite_i;
  assign rd_en = psel_i && !pwrite_i;

  always_comb begin
    addr_ok = (paddr_i[1:0] == 2'b00) && (paddr_i <= 8'h48);
    addr_ro = (paddr_i >= 8'h28);
    unique case (paddr_i)
      8'h00: rdata = {31'b0, enable_o};
      8'h04: rdata = 32'(f_target_khz_o);
      8'h08: rdata = 32'(margin_mv_o);
      8'h0C: rdata = 32'(c_corr_o);
      8'h10: rdata = 32'(f0_khz_o);
      8'h14: rdata = 32'(kp_o);
      8'h18: rdata = 32'(ki_o);
      8'h1C: rdata = 32'(kd_o);
      8'h20: rdata = period_o;
      8'h24: rdata = 32'(soc_vbb_mv_o);
      8'h28: rdata = {20'b0, 4'(loop_state_i), 1'b0, gen_ready_i, loop_running_i,
                      sat_lo_i, sat_hi_i, cal_ok_q, cal_done_q, cal_busy_i};
      8'h2C: rdata = 32'(f_pmb_cl_khz_i);
      8'h30: rdata = 32'(f_max_khz_i);
      8'h34: rdata = 32'(vbb_cl_mv_i);
      8'h38: rdata = 32'(f_pmb_soc_khz_i);
      8'h3C: rdata = 32'(f_pmb_safe_khz_i);
      8'h40: rdata = 32'(err_khz_i);
      8'h44: rdata = iter_i;
      8'h48: rdata = 32'(cal_fop_khz_i);
      default: rdata = 32'hDEAD_BEEF;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      enable_o       <= 1'b0;
      cal_start_o    <= 1'b0;
      new_setpoint_o <= 1'b0;
      f_target_khz_o <= freq_t'(F_TARGET_DEFAULT_KHZ);
      margin_mv_o    <= vbb_t'(MARGIN_DEFAULT_MV);
      c_corr_o       <= CCORR_DEFAULT;
      f0_khz_o       <= sfreq_t'(F0_DEFAULT_KHZ);
      kp_o           <= 16'sd32;
      ki_o           <= 16'sd96;
      kd_o           <= 16'sd8;
      period_o       <= 32'd50_000_000;
      soc_wr_o       <= 1'b0;
      soc_vbb_mv_o   <= '0;
      cal_done_q     <= 1'b0;
      cal_ok_q       <= 1'b0;
      prdata_o       <= '0;
    end else begin
      cal_start_o    <= 1'b0;
      new_setpoint_o <= 1'b0;
      soc_wr_o       <= 1'b0;
      if (rd_en && !penable_i) prdata_o <= rdata;
      if (wr_en && addr_ok && !addr_ro) begin
        unique case (paddr_i)
          8'h00: begin
            enable_o    <= pwdata_i[0];
            cal_start_o <= pwdata_i[1];
            if (pwdata_i[1]) cal_done_q <= 1'b0;
          end
          8'h04: begin
            f_target_khz_o <= freq_t'(pwdata_i);
            new_setpoint_o <= 1'b1;
          end
          8'h08: margin_mv_o  <= vbb_t'(pwdata_i);
          8'h0C: c_corr_o     <= ccorr_t'(pwdata_i);
          8'h10: f0_khz_o     <= sfreq_t'(pwdata_i);
          8'h14: kp_o         <= gain_t'(pwdata_i);
          8'h18: ki_o         <= gain_t'(pwdata_i);
          8'h1C: kd_o         <= gain_t'(pwdata_i);
          8'h20: period_o     <= pwdata_i;
          8'h24: begin
            soc_vbb_mv_o <= vbb_t'(pwdata_i);
            soc_wr_o     <= 1'b1;
          end
          default: ;
        endcase
      end
      if (cal_done_i) begin
        cal_done_q <= 1'b1;
        cal_ok_q   <= cal_fit_ok_i;
        if (cal_fit_ok_i) begin
          c_corr_o    <= cal_c_corr_i;
          f0_khz_o    <= cal_f0_khz_i;
          margin_mv_o <= vbb_t'(MARGIN_CAL_MV);
        end
      end
    end
  end

  assign pready_o  = 1'b1;
  assign pslverr_o = psel_i && penable_i && (!addr_ok || (pwrite_i && addr_ro));

  // APB protocol: the access phase always follows a setup phase
  a_apb_setup: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                (psel_i && penable_i) |-> $past(psel_i));

endmodule
