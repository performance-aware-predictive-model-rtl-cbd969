// tb_pmb_ctrl: self-checking test of the PMB controller.
// Three ring clocks of known frequency (250, 200, 125 MHz) are measured over
// a 100-cycle window of a 50 MHz reference; every reading must be within one
// count (500 kHz) of the true frequency. The latency from start to done must
// be WINDOW + SETTLE + 2 clock edges, a start while busy must be ignored, and a
// frequency change must show up in the next measurement.
module tb_pmb_ctrl;
  import bbreg_pkg::*;
  localparam int WINDOW = 100, SETTLE = 8;

  logic clk = 0, rst_n = 0;
  logic [2:0] ring = '0;
  logic start = 0, busy, done;
  freq_t f [3];
  int checks = 0, failures = 0;
  realtime half [3] = '{2.0ns, 2.5ns, 4.0ns};

  always #10ns clk = ~clk;
  for (genvar i = 0; i < 3; i++) begin : g_osc
    initial forever #(half[i]) ring[i] = ~ring[i];
  end

  pmb_ctrl #(.N_PMB(3), .WINDOW(WINDOW), .SETTLE(SETTLE)) dut (
    .clk_i(clk), .rst_ni(rst_n), .ring_clk_i(ring),
    .start_i(start), .busy_o(busy), .done_o(done), .f_pmb_khz_o(f)
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic measure(output int cycles);
    cycles = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 1;
    // a second start while busy must be ignored
    start = 1; @(negedge clk) start = 0; cycles++;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  function automatic bit near(freq_t got, int exp_khz);
    return (int'(got) >= exp_khz - 500) && (int'(got) <= exp_khz + 500);
  endfunction

  int cyc;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    measure(cyc);
    // cycles counted from the cycle start is driven: one more than the
    // WINDOW + SETTLE + 2 edges from the edge that samples start
    check(cyc == WINDOW + SETTLE + 3, $sformatf("latency %0d", cyc));
    check(near(f[0], 250_000), $sformatf("ch0 %0d", f[0]));
    check(near(f[1], 200_000), $sformatf("ch1 %0d", f[1]));
    check(near(f[2], 125_000), $sformatf("ch2 %0d", f[2]));
    @(negedge clk);
    check(!busy, "idle after done");
    // change frequencies
    half[0] = 5.0ns; half[1] = 3.125ns; half[2] = 1.6ns;
    repeat (5) @(negedge clk);
    measure(cyc);
    check(near(f[0], 100_000), $sformatf("ch0b %0d", f[0]));
    check(near(f[1], 160_000), $sformatf("ch1b %0d", f[1]));
    check(near(f[2], 312_500), $sformatf("ch2b %0d", f[2]));
    // results hold between measurements
    repeat (50) @(negedge clk);
    check(near(f[2], 312_500), "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
