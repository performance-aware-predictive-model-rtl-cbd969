// bbgen: BEHAVIOURAL MODEL of the on-chip body-bias generator (an analog
// block: push-pull drivers for positive well voltages, a dual-phase charge
// pump for the negative P-well voltage, resistive DACs as comparator
// references). It is not synthesizable logic of the real part; it reproduces
// the generator's digital interface and its settling behaviour so that the
// regulation loop can be simulated.
//
// Interface: a write (wr_i) of the control register carries the requested
// body-bias voltage vbb_mv_i. The generator accepts 50 mV steps over
// -1.5 V .. VDD/2 + 300 mV (paper figures); a request off the grid is
// rounded down to the grid and one outside the range is clamped; the
// accepted code is readable on code_mv_o. The two well voltages follow:
//     V_PWELL = VBB,   V_NWELL = VDD - VBB   (conventional-well flavour),
// so a positive VBB is forward bias of both transistor types. The mapping of
// one VBB onto two wells is this model's choice; the paper says only that the
// generator biases the N-well and the P-well independently.
// Timing: each well reaches its new voltage after its transition time,
// 23 us for the N-well and 11.5 us for the P-well (paper, table of generator
// features), counted in reference-clock cycles. ready_o is low from the
// write until both wells have settled. A write while not ready restarts both
// transitions. Out of reset both wells sit at VBB = 0 V.
module bbgen
  import bbreg_pkg::*;
#(
  parameter int REF_KHZ   = REF_CLK_KHZ,
  parameter int VDD       = VDD_MV,
  parameter int T_NWELL_NS = 23_000,
  parameter int T_PWELL_NS = 11_500,
  parameter int MIN_MV    = BBGEN_MIN_MV,
  parameter int MAX_MV    = VDD/2 + 300,
  parameter int STEP_MV   = VBB_STEP_MV
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic wr_i,
  input  vbb_t vbb_mv_i,
  output vbb_t code_mv_o,
  output vbb_t vpwell_mv_o,
  output vbb_t vnwell_mv_o,
  output logic ready_o
);
  localparam int N_CYC = (T_NWELL_NS * (REF_KHZ / 1000) + 999) / 1000;
  localparam int P_CYC = (T_PWELL_NS * (REF_KHZ / 1000) + 999) / 1000;
  localparam int TW    = $clog2(N_CYC + P_CYC + 2);

  logic [TW-1:0] ntmr_q, ptmr_q;
  vbb_t          req;
  logic signed [31:0] r;

  always_comb begin
    r = 32'(vbb_mv_i);
    if (r < MIN_MV)      r = MIN_MV;
    else if (r > MAX_MV) r = MAX_MV;
    // round down onto the 50 mV grid (floor for negative values too)
    if (r >= 0) r = (r / STEP_MV) * STEP_MV;
    else        r = -(((-r) + STEP_MV - 1) / STEP_MV) * STEP_MV;
    req = vbb_t'(r);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      code_mv_o   <= '0;
      vpwell_mv_o <= '0;
      vnwell_mv_o <= vbb_t'(VDD);
      ntmr_q      <= '0;
      ptmr_q      <= '0;
    end else begin
      if (wr_i) begin
        code_mv_o <= req;
        ntmr_q    <= TW'(N_CYC);
        ptmr_q    <= TW'(P_CYC);
      end else begin
        if (ntmr_q != '0) begin
          ntmr_q <= ntmr_q - 1'b1;
          if (ntmr_q == TW'(1)) vnwell_mv_o <= vbb_t'(VDD) - code_mv_o;
        end
        if (ptmr_q != '0) begin
          ptmr_q <= ptmr_q - 1'b1;
          if (ptmr_q == TW'(1)) vpwell_mv_o <= code_mv_o;
        end
      end
    end
  end

  assign ready_o = (ntmr_q == '0) && (ptmr_q == '0) && !wr_i;

endmodule
