// tb_bbreg_top_vdd: the regulation subsystem at the two other supply points
// the paper characterises, 0.5 V and 0.9 V, one instance of the top each.
// Each top is built for its supply (VDD 500 mV, 11 %/100 mV, upper VBB limit
// 550 mV; VDD 900 mV, 3 %/100 mV, limit 750 mV) and driven through APB with
// that supply's typical-chip PMB model (0.47 / 3.21 MHz and 0.6 / 8.72 MHz)
// and the calibrated 100 mV margin. Each is wired to a behavioural chip with
// the same body-bias sensitivity and PMB model; the chips' unbiased speeds at
// 17 C (50 MHz at 0.5 V, 330 MHz at 0.9 V) are illustrative values.
// For a slow and a fast set-point per supply the test checks the VBB reset to
// 0 V, that the loop settles within one 50 mV step of the bias the chip
// needs (set-point raised by the margin's worth), the sign of the bias, and
// that the chip reaches the set-point.
// Before regulating, the 0.5 V top calibrates its own PMB model: it is built
// with a 5 MHz search start (CAL_F_START), and the test checks that the first
// benchmark runs one 1 MHz step above it, at 6 MHz, and that the fit lands near the chip's true model
// (0.47 / 3.21 MHz; the 1 MHz search grid biases F0 low by about 0.5 MHz).
// The 0.9 V top gets its typical-chip model through the registers.
module tb_bbreg_top_vdd;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10ns clk = ~clk;

  localparam int  NV = 2;
  localparam int  VDD   [NV] = '{500, 900};
  localparam real BBPCT [NV] = '{11.0, 3.0};
  localparam real FNAT  [NV] = '{50_000.0, 330_000.0};
  localparam real CTRUE [NV] = '{0.47, 0.6};
  localparam real F0TRU [NV] = '{3210.0, 8720.0};
  localparam int  CALF0 [NV] = '{5_000, 100_000};

  logic [7:0] paddr = 0; logic penable = 0, pwrite = 0;
  logic [NV-1:0] psel = '0;
  logic [31:0] pwdata = 0;
  logic [31:0] prdata [NV];
  logic [NV-1:0] pready, pslverr, iter_done, bench_start, bench_done, bench_pass;
  logic [2:0] ring [NV];
  freq_t fop [NV];
  vbb_t cl_vp [NV], cl_vn [NV], soc_vp [NV], soc_vn [NV];
  real fmax [NV];
  real temp = 25.0;
  int checks = 0, failures = 0;
  int n_fbb = 0, n_rbb = 0, n_reset = 0, n_met = 0, n_cal = 0;
  int n_bench0 = 0, first_fop0 = 0;
  always @(posedge clk) if (rst_n && bench_start[0]) begin
    if (n_bench0 == 0) first_fop0 <= int'(fop[0]);
    n_bench0 <= n_bench0 + 1;
  end

  for (genvar v = 0; v < NV; v++) begin : g_vdd
    logic cal_active, cal_done, cal_fail, cal_tmo;
    logic [31:0] bench_iters;
    bbreg_top #(.VDD(VDD[v]), .SLOPE_PCT(int'(BBPCT[v])), .CAL_F_START(CALF0[v])) dut (
      .clk_i(clk), .rst_ni(rst_n),
      .paddr_i(paddr), .psel_i(psel[v]), .penable_i(penable), .pwrite_i(pwrite),
      .pwdata_i(pwdata), .prdata_o(prdata[v]), .pready_o(pready[v]), .pslverr_o(pslverr[v]),
      .pmb_ring_clk_i(ring[v]),
      .cal_active_o(cal_active), .cal_fop_khz_o(fop[v]), .bench_start_o(bench_start[v]),
      .bench_iters_o(bench_iters), .bench_done_i(bench_done[v]), .bench_pass_i(bench_pass[v]),
      .cl_vpwell_mv_o(cl_vp[v]), .cl_vnwell_mv_o(cl_vn[v]),
      .soc_vpwell_mv_o(soc_vp[v]), .soc_vnwell_mv_o(soc_vn[v]),
      .iter_done_o(iter_done[v]), .cal_done_o(cal_done), .cal_fail_o(cal_fail),
      .cal_timeout_o(cal_tmo)
    );
    tb_chip_plant #(.F_NAT_KHZ(FNAT[v]), .C_TRUE(CTRUE[v]), .F0_TRUE(F0TRU[v]),
                    .BB_PCT(BBPCT[v])) u_chip (
      .clk_i(clk), .vbb_cl_mv_i(cl_vp[v]), .vbb_soc_mv_i(soc_vp[v]), .temp_c_i(temp),
      .hang_khz_i(1.0e6), .fop_khz_i(fop[v]), .bench_start_i(bench_start[v]),
      .bench_done_o(bench_done[v]), .bench_pass_o(bench_pass[v]), .ring_clk_o(ring[v]),
      .fmax_khz_o(fmax[v])
    );
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // the two tops share the APB lines: one access at a time
  bit bus_busy = 0;
  task automatic bus_get();
    @(negedge clk);
    while (bus_busy) @(negedge clk);
    bus_busy = 1;
  endtask

  task automatic apb_write(input int v, input logic [7:0] a, input logic [31:0] d);
    bus_get(); begin paddr = a; pwdata = d; pwrite = 1; psel = '0; psel[v] = 1; penable = 0; end
    @(negedge clk) penable = 1;
    @(posedge clk) #1ns;
    check(pready[v] && !pslverr[v], $sformatf("VDD %0d: write %h", VDD[v], a));
    @(negedge clk) begin psel = '0; penable = 0; pwrite = 0; end
    bus_busy = 0;
  endtask

  task automatic apb_read(input int v, input logic [7:0] a, output logic [31:0] d);
    bus_get(); begin paddr = a; pwrite = 0; psel = '0; psel[v] = 1; penable = 0; end
    @(negedge clk) penable = 1;
    @(posedge clk) #1ns;
    d = prdata[v];
    @(negedge clk) begin psel = '0; penable = 0; end
    bus_busy = 0;
  endtask

  bit saw_zero [NV];
  always @(posedge clk) if (rst_n) begin
    if (g_vdd[0].dut.u_ctrl.gen_wr_o && g_vdd[0].dut.u_ctrl.gen_vbb_mv_o == 0) saw_zero[0] <= 1;
    if (g_vdd[1].dut.u_ctrl.gen_wr_o && g_vdd[1].dut.u_ctrl.gen_vbb_mv_o == 0) saw_zero[1] <= 1;
  end

  task automatic run_iters(input int v, input int n);
    repeat (n) @(posedge iter_done[v]);
    @(negedge clk);
  endtask

  // VBB the behavioural chip needs to run at f (mV, real)
  function automatic real need_vbb(input int v, input real f);
    real fn = FNAT[v] * (1.0 + 0.35 / 100.0 * (temp - 17.0));
    return (f / fn - 1.0) * 100.0 * 100.0 / BBPCT[v];
  endfunction

  task automatic setpoint(input int v, input int f_khz);
    logic [31:0] rd;
    int vbb;
    real aim;
    saw_zero[v] = 0;
    apb_write(v, 8'h04, 32'(f_khz));
    run_iters(v, 30);
    if (saw_zero[v]) n_reset++;
    check(saw_zero[v], $sformatf("VDD %0d: VBB reset on set-point %0d", VDD[v], f_khz));
    apb_read(v, 8'h34, rd); vbb = int'(signed'(rd));
    aim = need_vbb(v, real'(f_khz) * (1.0 + 100.0 * BBPCT[v] / 10000.0));
    check(real'(vbb) >= aim - 55.0 && real'(vbb) <= aim + 105.0,
          $sformatf("VDD %0d, %0d kHz: VBB %0d mV, aim %f", VDD[v], f_khz, vbb, aim));
    if (fmax[v] >= real'(f_khz)) n_met++;
    else check(0, $sformatf("VDD %0d: chip misses %0d kHz (%f)", VDD[v], f_khz, fmax[v]));
    if (vbb > 0) n_fbb++;
    if (vbb < 0) n_rbb++;
    $display("VDD %0d mV, set-point %0d kHz: VBB %0d mV (aim %0.0f), chip Fmax %0.0f kHz",
             VDD[v], f_khz, vbb, aim, fmax[v]);
  endtask

  task automatic calibrate(input int v);
    logic [31:0] rd;
    apb_write(v, 8'h00, 32'h2);
    do begin
      repeat (5000) @(negedge clk);
      apb_read(v, 8'h28, rd);
    end while (!rd[1]);
    check(rd[2], $sformatf("VDD %0d: calibration fit ok (status %h)", VDD[v], rd));
    check(first_fop0 == CALF0[v] + CAL_F_STEP_KHZ,
          $sformatf("VDD %0d: first run one step above %0d kHz (%0d)", VDD[v], CALF0[v], first_fop0));
    apb_read(v, 8'h0C, rd);
    check(int'(rd) >= int'(CTRUE[v] * 16384.0 * 0.96) && int'(rd) <= int'(CTRUE[v] * 16384.0 * 1.04),
          $sformatf("VDD %0d: fitted C_corr %0d (true %f)", VDD[v], rd, CTRUE[v]));
    $display("VDD %0d mV calibration: %0d benchmark runs, C_corr %0d/16384 = %f", VDD[v],
             n_bench0, rd, real'(rd) / 16384.0);
    apb_read(v, 8'h10, rd);
    check(int'(signed'(rd)) >= int'(F0TRU[v]) - 1500 && int'(signed'(rd)) <= int'(F0TRU[v]) + 500,
          $sformatf("VDD %0d: fitted F0 %0d kHz (true %f)", VDD[v], signed'(rd), F0TRU[v]));
    $display("VDD %0d mV calibration: F0 %0d kHz", VDD[v], signed'(rd));
    apb_read(v, 8'h08, rd);
    check(rd == 100, $sformatf("VDD %0d: calibrated margin 100 mV", VDD[v]));
    n_cal++;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      begin
        // 0.5 V: calibrate, then regulate with the fitted model
        calibrate(0);
        apb_write(0, 8'h20, 32'd200);
        apb_write(0, 8'h00, 32'h1);
        setpoint(0, 40_000); setpoint(0, 56_000);
      end
      begin
        // 0.9 V: typical-chip model 0.6 / 8.72 MHz
        apb_write(1, 8'h0C, 32'd9830);  apb_write(1, 8'h10, 32'd8720);
        apb_write(1, 8'h08, 32'd100);
        apb_write(1, 8'h20, 32'd200);
        apb_write(1, 8'h00, 32'h1);
        setpoint(1, 300_000); setpoint(1, 370_000);
      end
    join
    check(n_fbb > 0,   "mechanism: forward bias");
    check(n_rbb > 0,   "mechanism: reverse bias");
    check(n_reset > 0, "mechanism: VBB reset on a new set-point");
    check(n_met > 0,   "mechanism: set-point reached");
    check(n_cal > 0,   "mechanism: calibration at 0.5 V");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6_000_000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
