// tb_vbb_model: checks the body-bias model against an independent integer
// reference: VBB = ceil50(ceil(F_gap*2000/F_target) + margin), clamped to
// -1000 .. 650 mV; F_margin = F_target*margin*5/10000; the saturation flags;
// and the latency of 2*40 + 5 clock edges from start to done. Includes the
// paper's example: +10 % gap at 0.7 V needs about +200 mV.
module tb_vbb_model;
  import bbreg_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done, shi, slo;
  sfreq_t gap;
  freq_t tgt, fmar;
  vbb_t mar, vbb;
  int checks = 0, failures = 0;
  always #10ns clk = ~clk;

  vbb_model dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .f_gap_khz_i(gap),
                 .f_target_khz_i(tgt), .margin_mv_i(mar), .busy_o(busy), .done_o(done),
                 .vbb_mv_o(vbb), .f_margin_khz_o(fmar), .sat_hi_o(shi), .sat_lo_o(slo));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint ceil_div(input longint a, input longint b);
    // a/b rounded toward +infinity, b > 0
    if (a >= 0) return (a + b - 1) / b;
    else        return -((-a) / b);
  endfunction

  task automatic run(input int g, input int t, input int m);
    longint v, s, fm;
    int cyc;
    gap = sfreq_t'(g); tgt = freq_t'(t); mar = vbb_t'(m);
    v  = ceil_div(longint'(g) * 2000, t);
    if (v > 4000) v = 4000;
    if (v < -4000) v = -4000;
    s  = ceil_div(v + m, 50) * 50;
    fm = (longint'(t) * m * 5) / 10000;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    // counted from the cycle start is driven: 2*40 + 5 edges + 1
    check(cyc == 2 * 40 + 6, $sformatf("latency %0d", cyc));
    check(longint'(vbb) == (s > 650 ? 650 : (s < -1000 ? -1000 : s)),
          $sformatf("vbb %0d exp %0d (gap %0d tgt %0d m %0d)", vbb, s, g, t, m));
    check(longint'(fmar) == fm, $sformatf("fmargin %0d exp %0d", fmar, fm));
    check(shi == (s >= 650) && slo == (s <= -1000), "saturation flags");
    check(longint'(vbb) % 50 == 0, "on the 50 mV grid");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(17_000, 170_000, 0);        // +10 % -> +200 mV
    check(vbb == 200, "10 % gap -> 200 mV");
    run(17_000, 170_000, 150);      // plus the 150 mV margin
    check(vbb == 350, "with margin");
    run(-5_000, 100_000, 0);        // -5 % -> -100 mV
    check(vbb == -100, "reverse bias");
    run(-90_000, 100_000, 100);     // far too fast -> floor -1 V
    check(slo && vbb == -1000, "floor");
    run(60_000, 150_000, 100);      // far too slow -> ceiling
    check(shi && vbb == 650, "ceiling");
    run(1, 170_000, 0);             // tiny gap rounds up to one step
    check(vbb == 50, "round toward forward bias");
    for (int i = 0; i < 40; i++)
      run(int'($urandom % 80_000) - 40_000, 80_000 + ($urandom % 150_000), $urandom % 201);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
