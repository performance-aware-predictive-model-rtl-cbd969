// tb_bbreg_regs: APB register file test. Checks reset values, write/read
// of every read-write register, the pulses produced by CTRL.start_cal,
// F_TARGET and SOC_VBB writes, the read-only status words, PSLVERR on
// unmapped and read-only addresses, and the hardware update of C_CORR, F0
// and MARGIN (100 mV) when a calibration ends with a good fit (and not with a
// bad one).
module tb_bbreg_regs;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10ns clk = ~clk;

  logic [7:0] paddr = 0; logic psel = 0, penable = 0, pwrite = 0;
  logic [31:0] pwdata = 0, prdata; logic pready, pslverr;
  logic en, cal_start, new_sp, soc_wr;
  freq_t ft; vbb_t mar, soc_vbb; ccorr_t cc; sfreq_t f0; gain_t kp, ki, kd;
  logic [31:0] period;
  logic cal_done = 0, cal_ok = 0;
  int checks = 0, failures = 0;
  int n_cal = 0, n_sp = 0, n_soc = 0;

  bbreg_regs dut (
    .clk_i(clk), .rst_ni(rst_n), .paddr_i(paddr), .psel_i(psel), .penable_i(penable),
    .pwrite_i(pwrite), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .pslverr_o(pslverr),
    .enable_o(en), .cal_start_o(cal_start), .new_setpoint_o(new_sp),
    .f_target_khz_o(ft), .margin_mv_o(mar), .c_corr_o(cc), .f0_khz_o(f0),
    .kp_o(kp), .ki_o(ki), .kd_o(kd), .period_o(period),
    .soc_wr_o(soc_wr), .soc_vbb_mv_o(soc_vbb),
    .cal_busy_i(1'b1), .cal_done_i(cal_done), .cal_fit_ok_i(cal_ok),
    .cal_c_corr_i(ccorr_t'(9700)), .cal_f0_khz_i(-sfreq_t'(1234)),
    .cal_fop_khz_i(freq_t'(123_000)), .sat_hi_i(1'b0), .sat_lo_i(1'b1),
    .loop_running_i(1'b1), .gen_ready_i(1'b0), .loop_state_i(RS_PAUSE),
    .f_pmb_cl_khz_i(freq_t'(300_000)), .f_pmb_soc_khz_i(freq_t'(280_000)),
    .f_pmb_safe_khz_i(freq_t'(400_000)), .f_max_khz_i(freq_t'(182_000)),
    .vbb_cl_mv_i(-vbb_t'(350)), .err_khz_i(-sfreq_t'(2500)), .iter_i(32'd77)
  );

  always @(posedge clk) if (rst_n) begin
    if (cal_start) n_cal++;
    if (new_sp) n_sp++;
    if (soc_wr) n_soc++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apb_write(input logic [7:0] a, input logic [31:0] d, output logic err);
    @(negedge clk) begin paddr = a; pwdata = d; pwrite = 1; psel = 1; penable = 0; end
    @(negedge clk) penable = 1;
    @(posedge clk) #1ns;
    err = pslverr;
    check(pready, "pready");
    @(negedge clk) begin psel = 0; penable = 0; pwrite = 0; end
    @(negedge clk);  // one idle cycle: pulses raised by the write are counted
  endtask

  task automatic apb_read(input logic [7:0] a, output logic [31:0] d, output logic err);
    @(negedge clk) begin paddr = a; pwrite = 0; psel = 1; penable = 0; end
    @(negedge clk) penable = 1;
    @(posedge clk) #1ns;
    d = prdata; err = pslverr;
    @(negedge clk) begin psel = 0; penable = 0; end
  endtask

  logic [31:0] d; logic e;
  task automatic expect_rd(input logic [7:0] a, input logic [31:0] v, input string name);
    apb_read(a, d, e);
    check(d == v && !e, $sformatf("%s read %h exp %h", name, d, v));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // reset values
    expect_rd(8'h00, 0, "CTRL");
    expect_rd(8'h04, 170_000, "F_TARGET");
    expect_rd(8'h08, 150, "MARGIN");
    expect_rd(8'h0C, 10060, "C_CORR");
    expect_rd(8'h10, 6860, "F0");
    expect_rd(8'h14, 32, "KP"); expect_rd(8'h18, 96, "KI"); expect_rd(8'h1C, 8, "KD");
    expect_rd(8'h20, 50_000_000, "PERIOD");
    expect_rd(8'h24, 0, "SOC_VBB");
    // writes
    apb_write(8'h04, 200_000, e); check(!e, "write ok");
    check(n_sp == 1 && ft == 200_000, "set-point pulse");
    apb_write(8'h08, 32'(-50), e);
    expect_rd(8'h08, 32'(-50), "MARGIN signed");
    apb_write(8'h0C, 9000, e); expect_rd(8'h0C, 9000, "C_CORR w");
    apb_write(8'h10, 32'(-300), e); expect_rd(8'h10, 32'(-300), "F0 w");
    apb_write(8'h14, 1, e); apb_write(8'h18, 2, e); apb_write(8'h1C, 32'(-3), e);
    check(kp == 1 && ki == 2 && kd == -3, "gains");
    apb_write(8'h20, 1234, e); check(period == 1234, "period");
    apb_write(8'h24, 32'(-200), e);
    check(n_soc == 1 && soc_vbb == -200, "SoC VBB write pulse");
    apb_write(8'h00, 32'h3, e);
    check(en && n_cal == 1, $sformatf("enable and calibration pulse (en %0b, pulses %0d)", en, n_cal));
    expect_rd(8'h00, 1, "CTRL reads enable only");
    // status words
    expect_rd(8'h28, {20'b0, 4'(RS_PAUSE), 1'b0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b0, 1'b0, 1'b1}, "STATUS");
    expect_rd(8'h2C, 300_000, "F_PMB cl"); expect_rd(8'h30, 182_000, "F_MAX");
    expect_rd(8'h34, 32'(-350), "VBB"); expect_rd(8'h38, 280_000, "F_PMB soc");
    expect_rd(8'h3C, 400_000, "F_PMB safe"); expect_rd(8'h40, 32'(-2500), "ERR");
    expect_rd(8'h44, 77, "ITER"); expect_rd(8'h48, 123_000, "FOP");
    // errors
    apb_write(8'h2C, 5, e); check(e, "write to read-only -> PSLVERR");
    apb_read(8'h80, d, e);  check(e, "unmapped -> PSLVERR");
    apb_write(8'h06, 5, e); check(e, "unaligned -> PSLVERR");
    expect_rd(8'h04, 200_000, "F_TARGET unchanged");
    // calibration result with a bad fit: nothing loaded
    @(negedge clk) begin cal_done = 1; cal_ok = 0; end
    @(negedge clk) cal_done = 0;
    check(cc == 9000 && f0 == -300 && mar == -50, "bad fit ignored");
    expect_rd(8'h28, {20'b0, 4'(RS_PAUSE), 1'b0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b0, 1'b1, 1'b1}, "STATUS done, not ok");
    // good fit: loaded, margin 100 mV
    @(negedge clk) begin cal_done = 1; cal_ok = 1; end
    @(negedge clk) cal_done = 0;
    check(cc == 9700 && f0 == -1234 && mar == 100, "calibrated model loaded");
    expect_rd(8'h28, {20'b0, 4'(RS_PAUSE), 1'b0, 1'b0, 1'b1, 1'b1, 1'b0, 1'b1, 1'b1, 1'b1}, "STATUS done, ok");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
