// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// A start pulse loads dividend and divisor; W cycles later done pulses for
// one cycle with quotient and remainder valid (they stay valid until the next
// start). Division by zero returns an all-ones quotient. start is ignored
// while busy. Helper of vbb_model and calibration_fsm; the algorithm is a
// textbook choice of this design, not something the paper specifies.
module seq_divider #(
  parameter int unsigned W = 32
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         start_i,
  input  logic [W-1:0] dividend_i,
  input  logic [W-1:0] divisor_i,
  output logic         busy_o,
  output logic         done_o,
  output logic [W-1:0] quotient_o,
  output logic [W-1:0] remainder_o
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [W-1:0]  quo_q, div_q;
  logic [W-1:0]  rem_q;
  logic [CW-1:0] cnt_q;
  logic [W:0]    rem_shift, rem_sub;

  always_comb begin
    rem_shift = {rem_q, quo_q[W-1]};
    rem_sub   = rem_shift - {1'b0, div_q};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      quo_q  <= '0;
      div_q  <= '0;
      rem_q  <= '0;
      cnt_q  <= '0;
      busy_o <= 1'b0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (!busy_o) begin
        if (start_i) begin
          quo_q  <= dividend_i;
          div_q  <= divisor_i;
          rem_q  <= '0;
          cnt_q  <= CW'(W);
          busy_o <= 1'b1;
        end
      end else begin
        if (rem_sub[W]) begin          // negative: restore
          rem_q <= rem_shift[W-1:0];
          quo_q <= {quo_q[W-2:0], 1'b0};
        end else begin
          rem_q <= rem_sub[W-1:0];
          quo_q <= {quo_q[W-2:0], 1'b1};
        end
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
        end
      end
    end
  end

  assign quotient_o  = quo_q;
  assign remainder_o = rem_q;

endmodule
