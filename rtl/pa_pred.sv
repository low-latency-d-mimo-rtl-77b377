// PA state prediction, alpha(y_n) = alpha(u_n, r_n), for one group of
// LANES amplitude particles of this panel.
//
// LoS existence:  p_pred = p_s * p_e + p_b * (1 - p_e)
// Amplitude:      u' = max(u + sig_u * n, 2^-16)  (random walk, kept positive)
// The paper names this factor and says it runs in parallel with the agent
// chain, off the critical path, in 3 cycles; survival/birth probabilities and
// the random-walk amplitude model are this design's choices.
//
// Timing: pipelined, in_valid in cycle t gives out_valid in cycle t+3.
module pa_pred
  import loc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  lane_fix_t in_u,
  input  lane_fix_t noise,
  input  ufix_t     p_e,
  input  ufix_t     p_s,
  input  ufix_t     p_b,
  input  fix_t      sig_u,
  output logic      out_valid,
  output lane_fix_t out_u,
  output ufix_t     p_pred
);
  logic      v1, v2;
  lane_fix_t u1, n1, u2;
  logic [63:0] a1, b1;
  ufix_t     p_pred_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2;
    end
  end

  always_ff @(posedge clk) begin
    // stage 1
    u1 <= in_u;
    for (int l = 0; l < int'(LANES); l++) n1[l] <= mulq(sig_u, noise[l]);
    a1 <= 64'(p_s) * 64'(p_e);
    b1 <= 64'(p_b) * 64'(ONE - p_e);
    // stage 2
    for (int l = 0; l < int'(LANES); l++) u2[l] <= u1[l] + n1[l];
    p_pred_r <= ufix_t'((a1 + b1) >> FRAC);
    // stage 3
    for (int l = 0; l < int'(LANES); l++) out_u[l] <= (u2[l] < 32'sd1) ? 32'sd1 : u2[l];
    p_pred <= p_pred_r;
  end

endmodule
