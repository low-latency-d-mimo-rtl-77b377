// PA belief contribution of one group of LANES stacked particles.
//
// From the likelihood sum S_i of particle i it forms the message to the PA
// state,
//   beta_i = kappa(u_i, r=1) = (1 - p_d) + lr_scale * S_i        (Q16.16)
// (lr_scale = p_d / (mu_fa f_fa), missed detection plus the LoS hypotheses
// of the data-association sum; kappa(u, r=0) = 1), the amplitude particle
// weight v_i = (w_i * beta_i) >> 32 = w_i * beta / 2^16 (w_i: agent weight
// of the stacked particle; never overflows) and accumulates over the pass,
// all on the same 2^-16 weight scale:
//   a_sum = sum v_i,  w_sum = sum (w_i >> 16),  u_sum = sum (v_i * u_i) >> 16
// from which the panel derives the posterior LoS existence probability
//   p_e = p * a_sum / (p * a_sum + (1 - p) * w_sum)
// and the MMSE amplitude u_hat = u_sum / a_sum.  The formulas follow the
// paper's belief equations; the particle representation is this design's.
//
// Timing: pipelined, in_valid in cycle t gives out_valid (beta, v) in cycle
// t+5; the accumulators include that group from cycle t+5 on.  clear resets
// the accumulators (assert it before the first group of a pass).
module pa_belief
  import loc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  lane_wgt_t   in_s,
  input  lane_wgt_t   in_w,
  input  lane_fix_t   in_u,
  input  ufix_t       p_d,
  input  ufix_t       lr_scale,
  output logic        out_valid,
  output lane_wgt_t   out_beta,
  output lane_wgt_t   out_v,
  output logic [63:0] a_sum,
  output logic [63:0] w_sum,
  output logic signed [63:0] u_sum
);
  logic [4:1] vld;
  logic [LANES-1:0][63:0] prod1;
  lane_wgt_t w1, w2, w3, w4, beta2, beta3, beta4, v4;
  lane_fix_t u1, u2, u3;
  logic [LANES-1:0][63:0] wb3;
  logic signed [LANES-1:0][63:0] vu4;
  ufix_t     q1;
  logic [63:0] a_nxt, w_nxt;
  logic signed [63:0] u_nxt;

  always_comb begin
    a_nxt = a_sum;
    w_nxt = w_sum;
    u_nxt = u_sum;
    for (int l = 0; l < int'(LANES); l++) begin
      a_nxt = a_nxt + 64'(v4[l]);
      w_nxt = w_nxt + 64'(w4[l] >> FRAC);
      u_nxt = u_nxt + ($signed(vu4[l]) >>> FRAC);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      out_valid <= 1'b0;
      a_sum <= '0;
      w_sum <= '0;
      u_sum <= '0;
    end else begin
      vld <= {vld[3:1], in_valid};
      out_valid <= vld[4];
      if (clear) begin
        a_sum <= '0;
        w_sum <= '0;
        u_sum <= '0;
      end else if (vld[4]) begin
        a_sum <= a_nxt;
        w_sum <= w_nxt;
        u_sum <= u_nxt;
      end
    end
  end

  always_ff @(posedge clk) begin
    // 1: lr_scale * S
    q1 <= ONE - p_d;
    for (int l = 0; l < int'(LANES); l++) prod1[l] <= 64'(lr_scale) * 64'(in_s[l]);
    w1 <= in_w;
    u1 <= in_u;
    // 2: beta
    for (int l = 0; l < int'(LANES); l++) beta2[l] <= usat32(64'(q1) + (prod1[l] >> FRAC));
    w2 <= w1;
    u2 <= u1;
    // 3: w * beta
    for (int l = 0; l < int'(LANES); l++) wb3[l] <= 64'(w2[l]) * 64'(beta2[l]);
    beta3 <= beta2;
    w3 <= w2;
    u3 <= u2;
    // 4: v and v*u
    for (int l = 0; l < int'(LANES); l++) begin
      v4[l]  <= wb3[l][63:32];
      vu4[l] <= $signed({1'b0, wb3[l][63:32]}) * 64'(u3[l]);
    end
    beta4 <= beta3;
    w4 <= w3;
    // 5: outputs
    out_beta <= beta4;
    out_v    <= v4;
  end
endmodule
