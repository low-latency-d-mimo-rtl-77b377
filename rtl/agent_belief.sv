// Agent message update of one group of LANES particles: the outgoing message
// gamma^(j)(x_n) = alpha(x_n) * xi^(j)(x_n), which at the last panel is the
// agent belief.
//
//   xi_i = (1 - p) + p * beta_i     (p: predicted LoS existence of this PA,
//                                    beta_i from pa_belief; Q16.16)
//   w_i' = (w_i * xi_i) >> 32       (32-bit weight, never overflows)
// Over the whole pass it accumulates w_sum = sum w_i' and the weighted sums
// sum (w_i' * x_i) >> 16 for x in {px, py, vx, vy}, which the estimator turns
// into the MMSE state estimate.  The factor xi follows the paper's
// measurement-update equation; weight scaling is this design's choice.
//
// Timing: pipelined, in_valid in cycle t gives out_valid in cycle t+3; the
// accumulators include that group from cycle t+3 on.  clear resets them.
module agent_belief
  import loc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  group_t      in_p,
  input  lane_wgt_t   in_beta,
  input  ufix_t       p_exist,
  output logic        out_valid,
  output group_t      out_p,
  output logic [63:0] w_sum,
  output logic signed [3:0][63:0] wx_sum
);
  logic [2:1] vld;
  group_t    p1, p2;
  lane_wgt_t xi1;
  logic [63:0] s_nxt;
  logic signed [3:0][63:0] sx_nxt;

  always_comb begin
    s_nxt  = w_sum;
    sx_nxt = wx_sum;
    for (int l = 0; l < int'(LANES); l++) begin
      logic signed [63:0] ww;
      ww = $signed({32'd0, p2[l].w});
      s_nxt = s_nxt + 64'(p2[l].w);
      sx_nxt[0] = $signed(sx_nxt[0]) + ((ww * 64'(p2[l].px)) >>> FRAC);
      sx_nxt[1] = $signed(sx_nxt[1]) + ((ww * 64'(p2[l].py)) >>> FRAC);
      sx_nxt[2] = $signed(sx_nxt[2]) + ((ww * 64'(p2[l].vx)) >>> FRAC);
      sx_nxt[3] = $signed(sx_nxt[3]) + ((ww * 64'(p2[l].vy)) >>> FRAC);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      out_valid <= 1'b0;
      w_sum <= '0;
      wx_sum <= '0;
    end else begin
      vld <= {vld[1], in_valid};
      out_valid <= vld[2];
      if (clear) begin
          w_sum <= '0;
        wx_sum <= '0;
      end else if (vld[2]) begin
        w_sum  <= s_nxt;
        wx_sum <= sx_nxt;
      end
    end
  end

  always_ff @(posedge clk) begin
    // 1: xi
    p1 <= in_p;
    for (int l = 0; l < int'(LANES); l++)
      xi1[l] <= usat32(64'(ONE - p_exist) + ((64'(p_exist) * 64'(in_beta[l])) >> FRAC));
    // 2: new weight
    p2 <= p1;
    for (int l = 0; l < int'(LANES); l++)
      p2[l].w <= 32'((64'(p1[l].w) * 64'(xi1[l])) >> 32);
    // 3: output
    out_p <= p2;
  end
endmodule
