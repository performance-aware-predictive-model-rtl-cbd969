// tb_freq_error: checks e = F_target + F_margin - F_MAX on random and
// corner values, the one-cycle latency and the sign convention (positive e
// when the domain is too slow).
module tb_freq_error;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0, vin = 0, vout;
  freq_t ft, fm, fx;
  sfreq_t e;
  int checks = 0, failures = 0;
  always #10ns clk = ~clk;

  freq_error dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vin), .f_target_khz_i(ft),
                  .f_margin_khz_i(fm), .f_max_khz_i(fx), .valid_o(vout), .err_khz_o(e));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int t, input int m, input int x);
    ft = freq_t'(t); fm = freq_t'(m); fx = freq_t'(x);
    @(negedge clk) vin = 1;
    @(negedge clk) vin = 0;
    check(vout, "valid");
    check(int'(e) == t + m - x, $sformatf("e=%0d exp %0d", e, t + m - x));
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(170_000, 4_250, 160_000);   // too slow: positive
    check(e > 0, "slow -> positive");
    run(100_000, 0, 175_000);       // too fast: negative
    check(e < 0, "fast -> negative");
    run(0, 0, 1_048_575);
    run(1_048_575, 1_048_575, 0);
    for (int i = 0; i < 50; i++)
      run($urandom % 1_000_000, $urandom % 20_000, $urandom % 1_000_000);
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
