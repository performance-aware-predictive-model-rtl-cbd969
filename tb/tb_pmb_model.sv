// tb_pmb_model: checks F_MAX = C_corr*F_PMB + F0 against a real-number
// reference for the paper's fits (0.59/5.19 MHz, 0.614/6.86 MHz, 0.47/3.21
// MHz, 0.6/8.72 MHz) and random PMB readings; the result must be within
// 1 kHz of the real value (rounding and the Q2.14 coefficient). Also checks
// the one-cycle latency, the hold when valid is low, and saturation at 0.
module tb_pmb_model;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0, vin = 0, vout;
  freq_t fpmb, fmax;
  ccorr_t cc;
  sfreq_t f0;
  int checks = 0, failures = 0;
  always #10ns clk = ~clk;

  pmb_model dut (.clk_i(clk), .rst_ni(rst_n), .valid_i(vin), .f_pmb_khz_i(fpmb),
                 .c_corr_i(cc), .f0_khz_i(f0), .valid_o(vout), .f_max_khz_o(fmax));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  real cr [4] = '{0.59, 0.614, 0.47, 0.6};
  int  f0r [4] = '{5190, 6860, 3210, 8720};

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 4; m++) begin
      cc = ccorr_t'($rtoi(cr[m] * 16384.0 + 0.5));
      f0 = sfreq_t'(f0r[m]);
      for (int i = 0; i < 25; i++) begin
        real exp_r;
        fpmb = freq_t'(50_000 + ($urandom % 400_000));
        // reference from the quantised coefficient
        exp_r = real'(fpmb) * real'(cc) / 16384.0 + real'(f0r[m]);
        @(negedge clk) vin = 1;
        @(negedge clk) vin = 0;
        check(vout, "valid one cycle later");
        check(($itor(fmax) - exp_r) <= 1.0 && ($itor(fmax) - exp_r) >= -1.0,
              $sformatf("model %0d: fpmb=%0d got %0d exp %f", m, fpmb, fmax, exp_r));
        // the real coefficient is within 1/2^15 relative
        check((($itor(fmax) - (real'(fpmb) * cr[m] + real'(f0r[m]))) < 20.0) &&
              (($itor(fmax) - (real'(fpmb) * cr[m] + real'(f0r[m]))) > -20.0),
              "close to the paper's coefficient");
      end
    end
    // hold while valid is low
    fpmb = 12345;
    @(negedge clk);
    @(negedge clk);
    check(!vout, "no valid");
    check(fmax != 0 && fmax != freq_t'(12345), "output held");
    // saturation at zero with a large negative offset
    f0 = -sfreq_t'(900_000); fpmb = 1000;
    @(negedge clk) vin = 1;
    @(negedge clk) vin = 0;
    check(fmax == 0, "saturate at 0");
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
