// tb_chip_plant: behavioural model of the silicon around the regulation
// subsystem, for testbenches only.
//
// Cluster maximum frequency (0.7 V):
//   Fmax = F_NAT * (1 + TEMP_PCT/100 * (T - 17)) * (1 + BB_PCT/100 * VBB/100 mV)
// i.e. a typical chip that just makes 170 MHz at 17 C without body bias,
// gets faster with temperature (temperature-effect inversion) and gains
// BB_PCT (5 at 0.7 V) % per 100 mV of body bias. The cluster PMB ring runs at
//   F_PMB = (Fmax - F0_TRUE) / C_TRUE
// (the inverse of the chip's own linear model), the SoC PMB likewise from the
// SoC body bias, the safe-domain PMB at a fixed 400 MHz.
// Benchmark: BENCH_LAT cycles after bench_start the cluster answers pass if
// F_OP <= Fmax, fail if F_OP is up to hang_khz_i above Fmax; beyond that it
// never answers (a complete failure).
module tb_chip_plant
  import bbreg_pkg::*;
#(
  parameter real F_NAT_KHZ = 170_000.0,
  parameter real TEMP_PCT  = 0.35,
  parameter real C_TRUE    = 0.59,
  parameter real F0_TRUE   = 5190.0,
  parameter int  BENCH_LAT = 20,
  parameter real BB_PCT    = 5.0    // % of frequency per 100 mV of body bias
) (
  input  logic       clk_i,
  input  vbb_t       vbb_cl_mv_i,
  input  vbb_t       vbb_soc_mv_i,
  input  real        temp_c_i,
  input  real        hang_khz_i,    // F_OP this far above Fmax hangs the cluster
  input  freq_t      fop_khz_i,
  input  logic       bench_start_i,
  output logic       bench_done_o,
  output logic       bench_pass_o,
  output logic [2:0] ring_clk_o,
  output real        fmax_khz_o
);
  function automatic real fmax_of(input real vbb_mv, input real t);
    return F_NAT_KHZ * (1.0 + TEMP_PCT / 100.0 * (t - 17.0)) * (1.0 + BB_PCT / 100.0 * vbb_mv / 100.0);
  endfunction

  real f_ring [3];
  always_comb begin
    fmax_khz_o = fmax_of(real'(vbb_cl_mv_i), temp_c_i);
    f_ring[0]  = 400_000.0;
    f_ring[1]  = (fmax_of(real'(vbb_soc_mv_i), temp_c_i) - F0_TRUE) / C_TRUE;
    f_ring[2]  = (fmax_khz_o - F0_TRUE) / C_TRUE;
  end

  initial ring_clk_o = '0;
  for (genvar i = 0; i < 3; i++) begin : g_ring
    initial begin
      #1ns;
      forever begin
        // floor of 1 MHz: before reset the well voltages are arbitrary and
        // could ask for a non-positive frequency
        #((500_000.0 / ((f_ring[i] < 1_000.0) ? 1_000.0 : f_ring[i])) * 1ns);
        ring_clk_o[i] = ~ring_clk_o[i];
      end
    end
  end

  // benchmark runner
  int  lat;
  bit  running, hang;
  initial begin
    bench_done_o = 0; bench_pass_o = 0; running = 0; hang = 0; lat = 0;
  end
  always @(posedge clk_i) begin
    bench_done_o <= 0;
    if (bench_start_i) begin
      running <= 1;
      lat     <= BENCH_LAT;
      hang    <= real'(fop_khz_i) > fmax_khz_o + hang_khz_i;
    end else if (running) begin
      if (lat == 0) begin
        running <= 0;
        if (!hang) begin
          bench_done_o <= 1;
          bench_pass_o <= real'(fop_khz_i) <= fmax_khz_o;
        end
      end else lat <= lat - 1;
    end
  end
endmodule
