// tb_bb_controller: closed-loop test of the regulation controller with the
// PMB controller, the generator model and a behavioural chip.
// Phase 1 (frequency tracking, as in the paper's set-point sequence
// 175 -> 200 -> 100 -> 150 MHz at 25 C, plus 85 MHz to reach
// the -1 V floor): after each set-point change the
// controller must first reset VBB to 0 V, and after settling the applied VBB
// must lie within one 50 mV step of the value that makes the chip run at the
// set-point raised by the margin's worth (reference worked out from the chip
// model), or at -1 V where the ideal
// is below that floor, and the chip must always reach the set-point.
// Phase 2 (temperature tracking at 170 MHz): VBB must fall as the chip
// warms from 10 C to 80 C and rise again as it cools.
// The PMB model is loaded with the chip's own coefficients (calibrated case)
// and a 100 mV margin.
module tb_bb_controller;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10ns clk = ~clk;

  logic   enable = 0, new_sp = 0;
  freq_t  f_target = 175_000;
  vbb_t   margin = 100;
  logic   pmb_start, pmb_done, pmb_busy, gen_wr, gen_ready;
  vbb_t   gen_vbb, code, vp, vn, vbb;
  freq_t  f_pmb [3];
  reg_state_e st;
  logic   idle, shi, slo, itd;
  freq_t  fmax_est;
  sfreq_t err;
  logic [31:0] iter;
  real    temp = 25.0, fmax_true;
  logic [2:0] ring;
  logic   bd, bp;
  int checks = 0, failures = 0;

  bb_controller dut (
    .clk_i(clk), .rst_ni(rst_n), .enable_i(enable), .new_setpoint_i(new_sp),
    .f_target_khz_i(f_target), .margin_mv_i(margin),
    .c_corr_i(ccorr_t'(9667)), .f0_khz_i(sfreq_t'(5190)),
    .kp_i(16'sd32), .ki_i(16'sd96), .kd_i(16'sd8), .period_i(32'd50),
    .pmb_start_o(pmb_start), .pmb_done_i(pmb_done), .f_pmb_khz_i(f_pmb[2]),
    .gen_wr_o(gen_wr), .gen_vbb_mv_o(gen_vbb), .gen_ready_i(gen_ready),
    .state_o(st), .idle_o(idle), .f_max_khz_o(fmax_est), .err_khz_o(err),
    .vbb_mv_o(vbb), .sat_hi_o(shi), .sat_lo_o(slo), .iter_o(iter), .iter_done_o(itd)
  );
  pmb_ctrl u_pmb (.clk_i(clk), .rst_ni(rst_n), .ring_clk_i(ring), .start_i(pmb_start),
                  .busy_o(pmb_busy), .done_o(pmb_done), .f_pmb_khz_o(f_pmb));
  bbgen u_gen (.clk_i(clk), .rst_ni(rst_n), .wr_i(gen_wr), .vbb_mv_i(gen_vbb),
               .code_mv_o(code), .vpwell_mv_o(vp), .vnwell_mv_o(vn), .ready_o(gen_ready));
  tb_chip_plant u_chip (.clk_i(clk), .vbb_cl_mv_i(vp), .vbb_soc_mv_i(vbb_t'(0)),
                        .temp_c_i(temp), .hang_khz_i(1.0e6), .fop_khz_i(freq_t'(0)), .bench_start_i(1'b0),
                        .bench_done_o(bd), .bench_pass_o(bp), .ring_clk_o(ring),
                        .fmax_khz_o(fmax_true));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ideal VBB (mV, real) that makes the chip run at f, from the chip model
  function automatic real ideal_vbb(input real f, input real t);
    real fn = 170_000.0 * (1.0 + 0.35 / 100.0 * (t - 17.0));
    return (f / fn - 1.0) * 2000.0;
  endfunction

  task automatic run_iters(input int n);
    repeat (n) @(posedge itd);
    @(negedge clk);
  endtask

  bit saw_zero;
  always @(posedge clk) if (gen_wr && gen_vbb == 0) saw_zero <= 1;

  task automatic setpoint(input int f_khz);
    real id, lo, hi;
    saw_zero = 0;
    @(negedge clk) begin f_target = freq_t'(f_khz); new_sp = 1; end
    @(negedge clk) new_sp = 0;
    run_iters(25);
    check(saw_zero, $sformatf("VBB reset to 0 V on set-point %0d", f_khz));
    // the loop aims at the set-point raised by the margin's worth,
    // F_target * (1 + margin * 5 %/100 mV); +-1 step of limit cycling allowed
    id = ideal_vbb(real'(f_khz) * (1.0 + real'(margin) * 0.0005), temp);
    lo = id - 55.0; hi = id + 105.0;
    if (id < -1000.0) check(vbb == -1000 && slo, $sformatf("floor at %0d: %0d", f_khz, vbb));
    else check(real'(vbb) >= lo && real'(vbb) <= hi,
               $sformatf("set-point %0d: vbb %0d, aim %f", f_khz, vbb, id));
    check(fmax_true >= real'(f_khz), $sformatf("chip reaches %0d (fmax %f)", f_khz, fmax_true));
    $display("set-point %0d kHz -> VBB %0d mV (aim %f), fmax %f", f_khz, vbb, id, fmax_true);
  endtask

  int v_hot, v_cold, v_mid;
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk) enable = 1;
    run_iters(20);
    setpoint(175_000);
    setpoint(200_000);
    check(vbb > 200, "boost applies forward bias");
    setpoint(100_000);
    check(vbb <= -700, "slow set-point applies strong reverse bias");
    setpoint(85_000);
    check(vbb == -1000 && slo, "very slow set-point: pinned at the -1 V floor");
    setpoint(150_000);
    check(vbb < 0 && vbb > -1000, "partial reverse bias");
    // temperature tracking at 170 MHz
    setpoint(170_000);
    for (int t = 25; t <= 80; t += 11) begin temp = real'(t); run_iters(3); end
    run_iters(15);
    v_hot = vbb;
    check(fmax_true >= 170_000.0, "hot: target kept");
    for (int t = 80; t >= 10; t -= 10) begin temp = real'(t); run_iters(3); end
    run_iters(15);
    v_cold = vbb;
    check(fmax_true >= 170_000.0, "cold: target kept");
    check(v_cold > v_hot + 200, $sformatf("VBB follows temperature: hot %0d cold %0d", v_hot, v_cold));
    $display("170 MHz: VBB %0d mV at 80 C, %0d mV at 10 C", v_hot, v_cold);
    // disable: the loop stops and holds VBB
    @(negedge clk) enable = 0;
    repeat (5000) @(negedge clk);
    check(idle, "stopped when disabled");
    v_mid = vbb;
    repeat (3000) @(negedge clk);
    check(vbb == v_mid && code == v_mid, "VBB held while stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
