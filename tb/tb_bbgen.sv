// tb_bbgen: checks the body-bias generator model: reset state (0 V body
// bias), P-well settling after 11.5 us (575 cycles at 50 MHz) and N-well after
// 23 us (1150 cycles), the well mapping V_PWELL = VBB, V_NWELL = VDD - VBB,
// rounding onto the 50 mV grid and clamping to -1.5 V .. VDD/2 + 300 mV.
module tb_bbgen;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0, wr = 0, ready;
  vbb_t vin, code, vp, vn;
  int checks = 0, failures = 0;
  always #10ns clk = ~clk;

  bbgen dut (.clk_i(clk), .rst_ni(rst_n), .wr_i(wr), .vbb_mv_i(vin),
             .code_mv_o(code), .vpwell_mv_o(vp), .vnwell_mv_o(vn), .ready_o(ready));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic prog(input int v, input int exp_code);
    int cyc_p, cyc_n, cyc;
    int old_p, old_n;
    old_p = vp; old_n = vn;
    vin = vbb_t'(v);
    @(negedge clk) wr = 1;
    @(negedge clk) wr = 0;
    check(code == exp_code, $sformatf("code %0d exp %0d", code, exp_code));
    check(!ready, "busy after write");
    cyc = 1; cyc_p = -1; cyc_n = -1;
    while (!ready && cyc < 5000) begin
      if (cyc_p < 0 && int'(vp) != old_p) cyc_p = cyc;
      if (cyc_n < 0 && int'(vn) != old_n) cyc_n = cyc;
      @(negedge clk); cyc++;
    end
    if (cyc_p < 0 && int'(vp) != old_p) cyc_p = cyc;
    if (cyc_n < 0 && int'(vn) != old_n) cyc_n = cyc;
    check(vp == exp_code, $sformatf("pwell %0d", vp));
    check(vn == 700 - exp_code, $sformatf("nwell %0d", vn));
    // cycles are counted from the cycle the write is driven, one more than
    // the transition time in clock edges
    if (exp_code != old_p) check(cyc_p == 576, $sformatf("pwell time %0d", cyc_p));
    if (700 - exp_code != old_n) check(cyc_n == 1151, $sformatf("nwell time %0d", cyc_n));
    check(cyc == 1151, $sformatf("ready after %0d", cyc));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(vp == 0 && vn == 700 && ready, "reset state");
    prog(300, 300);
    prog(-400, -400);
    prog(-1000, -1000);
    prog(120, 100);      // off-grid: floor to the grid
    prog(-1730, -1500);  // clamp low
    prog(900, 650);      // clamp high (VDD/2 + 300 mV)
    prog(-75, -100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
