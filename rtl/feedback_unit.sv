// feedback_unit: turns template-matching results into the feedback mask.
//
// The 128 matching results are taken in pairs (0+1, 2+3, ...). Each pair sum
// is compared with its programmable threshold theta, giving a Boolean R that
// is 1 when the sum is greater than theta. The 64 Booleans drive a
// configurable operator that forms the 8-bit mask gating output templates.
//
// The operator: each mask bit k has a 64-bit care vector and a 64-bit value
// vector, and is 1 when every R whose care bit is set equals its value bit
// (one product term per mask bit; a bit that cares about nothing is 1). This
// covers the paper's two examples: qubit reset (mask bit = R0) and qutrit
// reset (pi_eg = R_eg & !R_fe, pi_fg = R_fe & !R_gf).
//
// Timing: three registered stages, pair sum -> compare -> mask, so a new
// result on `res` shows in `mask` three clocks later. With the two stages of
// the matching unit this gives the five-clock (10 ns) logic latency the
// paper reports. From the paper: pairwise sum, threshold, Boolean operator,
// 64 pairs, 8 mask bits, 5-cycle latency. This design's choice: the
// product-term form of the operator and the strict "greater than" test (the
// feedback section and its figure say "greater than"; the reset experiment
// and the qutrit appendix write >=).
module feedback_unit
  import presto_pkg::*;
#(
  parameter int unsigned NP = NPAIRS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic signed [MATCH_W-1:0]   res [2*NP],
  // configuration
  input  logic                        thr_we,
  input  logic [$clog2(NP)-1:0]       thr_idx,
  input  logic signed [MATCH_W:0]     thr_data,
  input  logic                        op_we,
  input  logic [2:0]                  op_bit,
  input  logic [NP-1:0]               op_care,
  input  logic [NP-1:0]               op_val,
  // outputs
  output logic [NP-1:0]               r_o,
  output logic [MASK_W-1:0]           mask
);
  logic signed [MATCH_W:0] thr  [NP];
  logic signed [MATCH_W:0] psum [NP];
  logic [NP-1:0] care [MASK_W];
  logic [NP-1:0] val  [MASK_W];
  logic [NP-1:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) begin
        thr[p] <= '0; psum[p] <= '0;
      end
      for (int k = 0; k < MASK_W; k++) begin
        care[k] <= '0; val[k] <= '0;
      end
      r <= '0; mask <= '0;
    end else begin
      if (thr_we) thr[thr_idx] <= thr_data;
      if (op_we) begin
        care[op_bit] <= op_care;
        val[op_bit]  <= op_val;
      end
      for (int p = 0; p < NP; p++) begin
        psum[p] <= (MATCH_W+1)'(res[2*p]) + (MATCH_W+1)'(res[2*p+1]);
        r[p]    <= psum[p] > thr[p];
      end
      for (int k = 0; k < MASK_W; k++)
        mask[k] <= &(~(r ^ val[k]) | ~care[k]);
    end
  end

  assign r_o = r;
endmodule
