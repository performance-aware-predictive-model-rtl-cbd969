// tb_calibration_fsm: runs the calibration flow on a behavioural chip
// (true model F_MAX = 0.59*F_PMB + 5.19 MHz) through the PMB controller and
// the generator model.
// Run 1: the cluster reports wrong results just above its maximum frequency.
//   Checks: 30 points at VBB = -800, -750, ..., +650 mV; at each point the
//   recorded F_OP is the highest 1 MHz step at or below the chip's true
//   maximum frequency; the fitted C_corr and F0 match a real-number least-
//   squares fit of the same pairs (within 1 LSB / 2 kHz) and come within 2 %
//   / 1 MHz of the chip's true model.
// Run 2: the cluster hangs instead (complete failure): every failing run is
//   caught by the time-out and the fit is the same.
module tb_calibration_fsm;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10ns clk = ~clk;

  logic start = 0, bstart, bdone, bpass, pstart, pdone, pbusy, gwr, gready;
  logic busy, done, ok, fail_seen, tmo_seen;
  logic [31:0] iters;
  freq_t fop, f_pmb [3];
  vbb_t gvbb, code, vp, vn;
  ccorr_t cc;
  sfreq_t f0;
  cal_state_e st;
  logic [7:0] pts;
  logic [2:0] ring;
  real temp = 25.0, fmax_true, hang = 1.0e6;
  int checks = 0, failures = 0;

  calibration_fsm #(.BENCH_TIMEOUT(300)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .fop_khz_o(fop), .bench_start_o(bstart), .bench_iters_o(iters),
    .bench_done_i(bdone), .bench_pass_i(bpass),
    .pmb_start_o(pstart), .pmb_done_i(pdone), .f_pmb_khz_i(f_pmb[2]),
    .gen_wr_o(gwr), .gen_vbb_mv_o(gvbb), .gen_ready_i(gready),
    .busy_o(busy), .done_o(done), .fit_ok_o(ok), .c_corr_o(cc), .f0_khz_o(f0),
    .state_o(st), .points_o(pts), .fail_seen_o(fail_seen), .timeout_seen_o(tmo_seen)
  );
  pmb_ctrl u_pmb (.clk_i(clk), .rst_ni(rst_n), .ring_clk_i(ring), .start_i(pstart),
                  .busy_o(pbusy), .done_o(pdone), .f_pmb_khz_o(f_pmb));
  bbgen u_gen (.clk_i(clk), .rst_ni(rst_n), .wr_i(gwr), .vbb_mv_i(gvbb),
               .code_mv_o(code), .vpwell_mv_o(vp), .vnwell_mv_o(vn), .ready_o(gready));
  tb_chip_plant u_chip (.clk_i(clk), .vbb_cl_mv_i(vp), .vbb_soc_mv_i(vbb_t'(0)),
                        .temp_c_i(temp), .hang_khz_i(hang), .fop_khz_i(fop),
                        .bench_start_i(bstart), .bench_done_o(bdone), .bench_pass_o(bpass),
                        .ring_clk_o(ring), .fmax_khz_o(fmax_true));

  task automatic check(input bit ok_, input string msg);
    checks++;
    if (!ok_) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // pairs seen by the engine
  real xs [$], ys [$];
  int  n_fail, n_tmo;
  always @(posedge clk) if (rst_n) begin
    if (st == CS_WAIT_PMB && pdone) begin
      xs.push_back(real'(f_pmb[2]));
      ys.push_back(real'(fop));
      checks++;
      if (!(real'(fop) <= fmax_true && real'(fop) + 1000.0 > fmax_true)) begin
        failures++;
        $display("FAIL: point %0d F_OP %0d vs fmax %f", xs.size(), fop, fmax_true);
      end
      checks++;
      if (int'(vp) != -800 + 50 * (xs.size() - 1)) begin
        failures++;
        $display("FAIL: point %0d at VBB %0d", xs.size(), vp);
      end
    end
    if (fail_seen) n_fail++;
    if (tmo_seen)  n_tmo++;
  end

  task automatic run_cal(input string tag);
    real sx = 0, sy = 0, sxx = 0, sxy = 0, n, m, q;
    xs.delete(); ys.delete(); n_fail = 0; n_tmo = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(busy, "busy after start");
    check(iters == 10_000, "10000 benchmark iterations per run");
    wait (done);
    @(negedge clk);
    check(xs.size() == 30, $sformatf("%s: %0d points", tag, xs.size()));
    foreach (xs[i]) begin
      sx += xs[i]; sy += ys[i]; sxx += xs[i] * xs[i]; sxy += xs[i] * ys[i];
    end
    n = real'(xs.size());
    m = (n * sxy - sx * sy) / (n * sxx - sx * sx);
    q = (sy - $floor(m * 16384.0 + 0.5) / 16384.0 * sx) / n;
    check(ok, "fit ok");
    check(fabs(real'(cc) - m * 16384.0) <= 1.0,
          $sformatf("%s: C_corr %0d vs %f", tag, cc, m * 16384.0));
    check(fabs(real'(f0) - q) <= 2.0, $sformatf("%s: F0 %0d vs %f", tag, f0, q));
    check(fabs(real'(cc) / 16384.0 - 0.59) < 0.012, "close to the true slope");
    check(fabs(real'(f0) - 5190.0) < 1000.0, "close to the true offset");
    $display("%s: C_corr = %f, F0 = %0d kHz, %0d failed runs, %0d hung runs",
             tag, real'(cc) / 16384.0, f0, n_fail, n_tmo);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    run_cal("wrong results");
    check(n_fail == 30 && n_tmo == 0, "one failing run per point");
    hang = 0.0;
    run_cal("hangs");
    check(n_tmo == 30 && n_fail == 0, "one hung run per point");
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
