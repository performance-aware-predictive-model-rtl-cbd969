// tb_pid_controller: compares the PID against an integer reference model
// on random error sequences and gains (including the derivative-free first
// step after a clear, conditional integration at the limits, and output
// saturation), and checks the one-cycle latency.
module tb_pid_controller;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, vin = 0, vout, shi = 0, slo = 0;
  sfreq_t e, u;
  gain_t kp, ki, kd;
  int checks = 0, failures = 0;
  always #10ns clk = ~clk;

  pid_controller dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clr), .valid_i(vin),
                      .err_khz_i(e), .kp_i(kp), .ki_i(ki), .kd_i(kd),
                      .sat_hi_i(shi), .sat_lo_i(slo), .valid_o(vout), .f_gap_khz_o(u));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint integ, eprev;
  bit first;

  task automatic step(input int err);
    longint acc, exp_u;
    e = sfreq_t'(err);
    if (!((shi && err > 0) || (slo && err < 0))) integ += err;
    acc = longint'(kp) * err + longint'(ki) * integ + (first ? 0 : longint'(kd) * (err - eprev));
    exp_u = acc >>> 8;
    if (exp_u > 8388607) exp_u = 8388607;
    if (exp_u < -8388608) exp_u = -8388608;
    eprev = err; first = 0;
    @(negedge clk) vin = 1;
    @(negedge clk) vin = 0;
    check(vout, "valid after one cycle");
    check(longint'(u) == exp_u, $sformatf("u=%0d exp %0d (e=%0d)", u, exp_u, err));
  endtask

  task automatic clear();
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    integ = 0; eprev = 0; first = 1;
    check(u == 0, "cleared output");
  endtask

  initial begin
    kp = 64; ki = 128; kd = 16;
    repeat (2) @(negedge clk); rst_n = 1;
    clear();
    step(10_000); step(5_000); step(-2_000); step(0);
    for (int g = 0; g < 6; g++) begin
      kp = gain_t'($urandom % 512); ki = gain_t'($urandom % 256);
      kd = gain_t'($urandom % 128) - 16'sd32;
      clear();
      for (int i = 0; i < 15; i++) begin
        shi = ($urandom % 4) == 0; slo = ($urandom % 4) == 0;
        step(int'($urandom % 60_000) - 30_000);
      end
    end
    shi = 0; slo = 0;
    kp = 16'sd32767; ki = 16'sd32767; kd = 0;
    clear();
    step(4_000_000); step(4_000_000);   // saturates high
    check(u == sfreq_t'(8388607), "saturate high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
