// pmb_ctrl: controller of the Process Monitor Boxes (PMBs).
//
// A PMB is a ring oscillator built from the same cells as the logic of its
// power domain; its frequency tracks the maximum frequency the domain can
// reach. The paper places one PMB in each of the three power domains (safe,
// SoC, cluster) and a PMB controller in the safe domain that makes the result
// readable through memory-mapped status registers. The ring oscillators
// themselves are analog and arrive here as the clocks ring_clk_i[].
//
// How it works (this design's choice, the paper gives only the function):
// a start pulse opens a gate for WINDOW reference cycles. In each ring-clock
// domain the gate is synchronised with two flops and a counter counts ring
// edges while the gate is open; after the gate closes the counter is frozen.
// The reference domain waits SETTLE cycles so that every frozen count is
// stable, then samples all counts at once (a quasi-static transfer, no gray
// code needed) and scales them to kHz:
//     f_pmb_khz = count * REF_CLK_KHZ / WINDOW.
// All channels are measured in parallel. done_o pulses one cycle after the
// results f_pmb_khz_o[] are updated; they hold until the next measurement.
// start_i is ignored while busy_o is high.
//
// Timing: one measurement takes WINDOW + SETTLE + 2 reference cycles.
// With the default 50 kHz per count the lowest bit of each reading is
// always zero (50 = 2 x 25), so synthesis finds those bits constant.
// Resolution is REF_CLK_KHZ/WINDOW kHz (50 kHz with the defaults, a 20 us
// window at 50 MHz). The ring frequency must stay below 2^CNT_W/20us.
module pmb_ctrl
  import bbreg_pkg::*;
#(
  parameter int unsigned N_PMB       = 3,
  parameter int unsigned REF_KHZ     = REF_CLK_KHZ,
  parameter int unsigned WINDOW      = 1000,
  parameter int unsigned SETTLE      = 8,
  parameter int unsigned CNT_W       = 16
) (
  input  logic              clk_i,        // safe-domain reference clock
  input  logic              rst_ni,
  input  logic [N_PMB-1:0]  ring_clk_i,   // PMB ring-oscillator outputs
  input  logic              start_i,
  output logic              busy_o,
  output logic              done_o,
  output freq_t             f_pmb_khz_o [N_PMB]
);
  localparam int unsigned KHZ_PER_COUNT = REF_KHZ / WINDOW;
  localparam int unsigned TW = $clog2(WINDOW + SETTLE + 1);

  initial begin
    assert (REF_KHZ % WINDOW == 0)
      else $error("pmb_ctrl: REF_KHZ must be a multiple of WINDOW");
  end

  typedef enum logic [1:0] {PM_IDLE, PM_GATE, PM_SETTLE, PM_LATCH} pm_state_e;
  pm_state_e     state_q;
  logic [TW-1:0] tmr_q;
  logic          gate_q;

  // ---------------------------------------------------- ring-clock domains
  logic [CNT_W-1:0] cnt_ring [N_PMB];

  for (genvar i = 0; i < N_PMB; i++) begin : g_ring
    logic             g_s1, g_s2, g_s3;
    logic [CNT_W-1:0] cnt_q;
    always_ff @(posedge ring_clk_i[i] or negedge rst_ni) begin
      if (!rst_ni) begin
        g_s1  <= 1'b0;
        g_s2  <= 1'b0;
        g_s3  <= 1'b0;
        cnt_q <= '0;
      end else begin
        g_s1 <= gate_q;
        g_s2 <= g_s1;
        g_s3 <= g_s2;
        if (g_s2 && !g_s3)  cnt_q <= CNT_W'(1);   // gate opened: restart
        else if (g_s2)      cnt_q <= cnt_q + 1'b1;
      end
    end
    assign cnt_ring[i] = cnt_q;
  end

  // ------------------------------------------------------ reference domain
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= PM_IDLE;
      tmr_q   <= '0;
      gate_q  <= 1'b0;
      done_o  <= 1'b0;
      for (int i = 0; i < N_PMB; i++) f_pmb_khz_o[i] <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        PM_IDLE: if (start_i) begin
          gate_q  <= 1'b1;
          tmr_q   <= TW'(WINDOW - 1);
          state_q <= PM_GATE;
        end
        PM_GATE: begin
          if (tmr_q == '0) begin
            gate_q  <= 1'b0;
            tmr_q   <= TW'(SETTLE);
            state_q <= PM_SETTLE;
          end else tmr_q <= tmr_q - 1'b1;
        end
        PM_SETTLE: begin
          if (tmr_q == '0) state_q <= PM_LATCH;
          else tmr_q <= tmr_q - 1'b1;
        end
        PM_LATCH: begin
          for (int i = 0; i < N_PMB; i++)
            f_pmb_khz_o[i] <= freq_t'(cnt_ring[i] * KHZ_PER_COUNT);
          done_o  <= 1'b1;
          state_q <= PM_IDLE;
        end
        default: state_q <= PM_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != PM_IDLE);

endmodule
