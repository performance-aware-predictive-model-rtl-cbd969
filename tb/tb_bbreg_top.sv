// tb_bbreg_top: end-to-end test of the body-bias regulation subsystem at its
// default parameters (PMB window 1000 reference cycles, benchmark time-out
// 1e6 cycles, 30-point calibration with 10000-iteration benchmark runs),
// driven only through its APB port and wired to a behavioural chip
// (tb_chip_plant: a typical chip, true PMB model 0.59 / 5.19 MHz, 25 C).
// Sequence:
//   1. register reset values and an unmapped access (PSLVERR);
//   2. regulation at 170 MHz with the reset-time process-unaware model and
//      its 150 mV margin: the chip must reach 170 MHz;
//   3. a calibration request while the loop runs is ignored; after stopping
//      the loop, calibration runs: benchmark failures at every point, one
//      hang (time-out) at the first point, and the fitted model (near 0.59
//      and 5.19 MHz) with the 100 mV margin lands in the registers;
//   4. the set-point sequence 175 -> 200 -> 100 -> 150 MHz with the
//      calibrated model, plus 85 MHz (-1 V floor) and 260 MHz (upper limit),
//      checking the reset of VBB to 0 V on each new set-point, forward and
//      reverse bias and that the chip always reaches the set-point;
//   5. temperature tracking at 170 MHz (25 -> 80 -> 10 C);
//   6. the SoC body bias written through SOC_VBB.
// Each mechanism is counted; one that never happened is a failure.
module tb_bbreg_top;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10ns clk = ~clk;   // 50 MHz reference clock

  logic [7:0] paddr = 0; logic psel = 0, penable = 0, pwrite = 0;
  logic [31:0] pwdata = 0, prdata; logic pready, pslverr;
  logic [2:0] ring;
  logic cal_active, bench_start, bench_done, bench_pass;
  freq_t fop;
  logic [31:0] bench_iters;
  vbb_t cl_vp, cl_vn, soc_vp, soc_vn;
  logic iter_done, cal_done, cal_fail, cal_timeout;
  real temp = 25.0, hang_khz = 0.0, fmax_true;

  int checks = 0, failures = 0;

  bbreg_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .paddr_i(paddr), .psel_i(psel), .penable_i(penable), .pwrite_i(pwrite),
    .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready), .pslverr_o(pslverr),
    .pmb_ring_clk_i(ring),
    .cal_active_o(cal_active), .cal_fop_khz_o(fop), .bench_start_o(bench_start),
    .bench_iters_o(bench_iters), .bench_done_i(bench_done), .bench_pass_i(bench_pass),
    .cl_vpwell_mv_o(cl_vp), .cl_vnwell_mv_o(cl_vn),
    .soc_vpwell_mv_o(soc_vp), .soc_vnwell_mv_o(soc_vn),
    .iter_done_o(iter_done), .cal_done_o(cal_done), .cal_fail_o(cal_fail),
    .cal_timeout_o(cal_timeout)
  );

  tb_chip_plant u_chip (
    .clk_i(clk), .vbb_cl_mv_i(cl_vp), .vbb_soc_mv_i(soc_vp), .temp_c_i(temp),
    .hang_khz_i(hang_khz), .fop_khz_i(fop), .bench_start_i(bench_start),
    .bench_done_o(bench_done), .bench_pass_o(bench_pass), .ring_clk_o(ring),
    .fmax_khz_o(fmax_true)
  );

  // ---------------------------------------------------------------- counters
  int n_iter, n_cal_fail, n_cal_timeout, n_cal_done, n_fbb, n_rbb, n_sat_hi,
      n_sat_lo, n_vbb_reset, n_bench, n_soc, n_pslverr, n_cal_reject,
      n_temp_track, n_target_met;
  always @(posedge clk) if (rst_n) begin
    if (iter_done)   n_iter++;
    if (cal_fail)    n_cal_fail++;
    if (cal_timeout) n_cal_timeout++;
    if (bench_start) n_bench++;
    if (pslverr && psel && penable) n_pslverr++;
  end
  // count a hang once, then let the chip answer: one time-out is enough
  always @(posedge clk) if (rst_n && cal_timeout) hang_khz <= 1.0e6;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ------------------------------------------------------------------- APB
  task automatic apb_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk) begin paddr = a; pwdata = d; pwrite = 1; psel = 1; penable = 0; end
    @(negedge clk) penable = 1;
    @(posedge clk) #1ns;
    check(pready && !pslverr, $sformatf("write %h accepted", a));
    @(negedge clk) begin psel = 0; penable = 0; pwrite = 0; end
  endtask

  task automatic apb_read(input logic [7:0] a, output logic [31:0] d, output logic err);
    @(negedge clk) begin paddr = a; pwrite = 0; psel = 1; penable = 0; end
    @(negedge clk) penable = 1;
    @(posedge clk) #1ns;
    d = prdata; err = pslverr;
    @(negedge clk) begin psel = 0; penable = 0; end
  endtask

  function automatic int sx(input logic [31:0] v);
    return int'(signed'(v));
  endfunction

  logic [31:0] rd; logic er;
  int vbb_now;

  task automatic read_vbb();
    apb_read(8'h34, rd, er);
    vbb_now = sx(rd);
  endtask

  task automatic run_iters(input int n);
    repeat (n) @(posedge iter_done);
    @(negedge clk);
  endtask

  bit saw_zero;
  always @(posedge clk)
    if (dut.u_ctrl.gen_wr_o && dut.u_ctrl.gen_vbb_mv_o == 0) saw_zero <= 1;

  task automatic setpoint(input int f_khz, input int iters);
    saw_zero = 0;
    apb_write(8'h04, 32'(f_khz));
    run_iters(iters);
    if (saw_zero) n_vbb_reset++;
    check(saw_zero, $sformatf("VBB reset to 0 V on set-point %0d kHz", f_khz));
    read_vbb();
    apb_read(8'h28, rd, er);
    if (vbb_now > 0) n_fbb++;
    if (vbb_now < 0) n_rbb++;
    if (rd[3]) n_sat_hi++;
    if (rd[4]) n_sat_lo++;
    if (fmax_true >= real'(f_khz)) n_target_met++;
    else if (!rd[3]) check(0, $sformatf("chip misses %0d kHz (fmax %f)", f_khz, fmax_true));
    $display("set-point %0d kHz: VBB %0d mV, chip Fmax %0.0f kHz, status %h",
             f_khz, vbb_now, fmax_true, rd[11:0]);
  endtask

  int v_hot, v_cold, cc, f0;
  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    // 1. reset values, bus errors
    apb_read(8'h0C, rd, er); check(rd == 10060, "C_CORR resets to 0.614 (Q2.14)");
    apb_read(8'h08, rd, er); check(rd == 150, "margin resets to 150 mV");
    apb_read(8'h90, rd, er); check(er, "unmapped address: PSLVERR");
    // 2. uncalibrated regulation at 170 MHz
    apb_write(8'h20, 32'd200);            // short pause between iterations
    apb_write(8'h00, 32'h1);
    run_iters(20);
    read_vbb();
    check(fmax_true >= 170_000.0, $sformatf("uncalibrated: chip reaches 170 MHz (%f)", fmax_true));
    $display("uncalibrated model at 170 MHz: VBB %0d mV, chip Fmax %0.0f kHz", vbb_now, fmax_true);
    apb_read(8'h3C, rd, er);
    check(rd >= 399_000 && rd <= 401_000, $sformatf("safe-domain PMB reads 400 MHz (%0d)", rd));
    apb_read(8'h38, rd, er);
    check(rd > 250_000 && rd < 320_000, $sformatf("SoC PMB reading (%0d)", rd));
    // 3. calibration
    apb_write(8'h00, 32'h3);             // start request while the loop runs
    repeat (10) @(negedge clk);
    apb_read(8'h28, rd, er);
    if (!rd[0] && !cal_active) n_cal_reject++;
    check(!cal_active, "calibration refused while the loop runs");
    apb_write(8'h00, 32'h0);
    wait (dut.u_ctrl.idle_o);
    @(negedge clk);
    apb_write(8'h00, 32'h2);
    wait (cal_active);
    check(bench_iters == 10000, "benchmark runs 10000 iterations");
    wait (cal_done);
    n_cal_done++;
    repeat (3) @(negedge clk);
    apb_read(8'h28, rd, er);
    check(rd[1] && rd[2], $sformatf("calibration done with a good fit (status %h)", rd));
    apb_read(8'h0C, rd, er); cc = sx(rd);
    apb_read(8'h10, rd, er); f0 = sx(rd);
    $display("calibration: %0d benchmark runs, C_corr %0d/16384 = %f, F0 %0d kHz",
             n_bench, cc, real'(cc) / 16384.0, f0);
    check(cc > 9500 && cc < 9830, "fitted C_corr near the chip's 0.59");
    check(f0 > 3000 && f0 < 7000, "fitted F0 near the chip's 5.19 MHz");
    apb_read(8'h08, rd, er); check(rd == 100, "calibrated margin 100 mV");
    apb_read(8'h48, rd, er); check(rd >= 100_000, "last calibration F_OP readable");
    // 4. set-point sequence with the calibrated model
    apb_write(8'h00, 32'h1);
    run_iters(5);
    setpoint(175_000, 20);
    setpoint(200_000, 20);
    setpoint(100_000, 25);
    setpoint(150_000, 25);
    setpoint(85_000, 25);
    check(vbb_now == -1000, "85 MHz: VBB pinned at the -1 V floor");
    setpoint(260_000, 25);
    check(vbb_now == 650, "260 MHz: VBB pinned at VDD/2 + 300 mV");
    // 5. temperature tracking at 170 MHz
    setpoint(170_000, 20);
    for (int t = 25; t <= 80; t += 11) begin temp = real'(t); run_iters(3); end
    run_iters(12);
    read_vbb(); v_hot = vbb_now;
    check(fmax_true >= 170_000.0, "hot: 170 MHz kept");
    for (int t = 80; t >= 10; t -= 10) begin temp = real'(t); run_iters(3); end
    run_iters(12);
    read_vbb(); v_cold = vbb_now;
    check(fmax_true >= 170_000.0, "cold: 170 MHz kept");
    if (v_cold > v_hot + 200) n_temp_track++;
    $display("170 MHz: VBB %0d mV at 80 C, %0d mV at 10 C", v_hot, v_cold);
    // 6. SoC body bias
    apb_write(8'h24, 32'(-300));
    repeat (1300) @(negedge clk);
    if (soc_vp == -300 && soc_vn == 1000) n_soc++;
    check(soc_vp == -300 && soc_vn == 1000, "SoC wells at -300 mV / VDD+300 mV");
    // ------------------------------------------------------- mechanism tally
    $display("mechanisms: iterations %0d, benchmark runs %0d, cal fails %0d, cal time-outs %0d,",
             n_iter, n_bench, n_cal_fail, n_cal_timeout);
    $display("  cal done %0d, cal refused %0d, VBB resets %0d, FBB %0d, RBB %0d, upper limit %0d,",
             n_cal_done, n_cal_reject, n_vbb_reset, n_fbb, n_rbb, n_sat_hi);
    $display("  floor %0d, target met %0d, temperature tracking %0d, SoC writes %0d, PSLVERR %0d",
             n_sat_lo, n_target_met, n_temp_track, n_soc, n_pslverr);
    check(n_iter > 0,        "mechanism: loop iteration");
    check(n_bench > 0,       "mechanism: calibration benchmark run");
    check(n_cal_fail > 0,    "mechanism: calibration benchmark failure");
    check(n_cal_timeout > 0, "mechanism: calibration benchmark time-out");
    check(n_cal_done > 0,    "mechanism: calibration fit loaded");
    check(n_cal_reject > 0,  "mechanism: calibration refused while regulating");
    check(n_vbb_reset > 0,   "mechanism: VBB reset on a new set-point");
    check(n_fbb > 0,         "mechanism: forward body bias");
    check(n_rbb > 0,         "mechanism: reverse body bias");
    check(n_sat_hi > 0,      "mechanism: upper VBB limit");
    check(n_sat_lo > 0,      "mechanism: -1 V floor");
    check(n_target_met > 0,  "mechanism: set-point reached");
    check(n_temp_track > 0,  "mechanism: temperature tracking");
    check(n_soc > 0,         "mechanism: SoC body-bias write");
    check(n_pslverr > 0,     "mechanism: bus error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
