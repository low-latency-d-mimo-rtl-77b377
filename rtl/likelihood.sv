// Pseudo-likelihood factor g(x_n, y_n^(j), a_n^(j); z_n) for one group of
// LANES stacked particles (agent position + PA amplitude particle).
//
// For every particle i and every measurement m of this panel the block forms
// the residuals of measurement m with respect to the particle, in the frame
// of the measured bearing (c, s) = (cos phi_m, sin phi_m):
//   dx, dy = p_i - p_pa
//   e_d = c*dx + s*dy - d_m           (radial / distance residual)
//   e_t = c*dy - s*dx                 (tangential / bearing residual, metres)
//   e_u = u_i - u_m                   (amplitude residual)
//   E   = kd*e_d^2 + ka*e_t^2 + ku*e_u^2
//   L_m = exp(-E)  = 2^-(E*log2 e), with 2^-f ~ 1 - 0.67157 f + 0.17157 f^2
// and outputs S_i = sum_m L_m (Q16.16).  S_i is the part of the data
// association sum over a_n^(j) that depends on the particle; the constant
// LoS/false-alarm ratio and the missed-detection term are applied in
// pa_belief.  The exact Gaussian-in-bearing-frame likelihood and the
// polynomial exponential are this design's simplification of the paper's
// likelihood (which it says uses divisions, trigonometric functions and erfc).
//
// Timing, as in the paper: one measurement enters every two clock cycles and
// the result is ready 9 + 2(M-1) cycles after in_valid: in_valid in cycle t
// gives out_valid in cycle t + 9 + 2(M-1).  Measurement m is read
// combinationally from the panel memory at address meas_idx during cycle
// t + 2m.  M = 0 is handled like M = 1 with the contribution masked (S = 0).
module likelihood
  import loc_pkg::*;
#(
  parameter int unsigned MAX_M = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  lane_fix_t                  in_px,
  input  lane_fix_t                  in_py,
  input  lane_fix_t                  in_u,
  input  logic [$clog2(MAX_M+1)-1:0] m_count,
  output logic [$clog2(MAX_M)-1:0]   meas_idx,
  input  meas_t                      meas,
  input  fix_t                       pa_x,
  input  fix_t                       pa_y,
  input  ufix_t                      kd,
  input  ufix_t                      ka,
  input  ufix_t                      ku,
  output logic                       out_valid,
  output lane_wgt_t                  out_s
);
  localparam int unsigned MW = $clog2(MAX_M+1);
  localparam int unsigned NS = 8;              // register stages before the accumulator
  localparam logic [31:0] LOG2E = 32'd94548;   // log2(e) in Q16.16

  // issue control
  logic            busy;
  logic [MW-1:0]   m_left;                     // measurements still to issue after this one
  logic            phase;                      // 0: issue cycle, 1: gap cycle
  logic [$clog2(MAX_M)-1:0] idx;
  lane_fix_t       hx, hy, hu;
  logic            issue, issue_last, issue_mask;
  lane_fix_t       ix, iy, iu;

  assign meas_idx = idx;

  always_comb begin
    issue      = 1'b0;
    issue_last = 1'b0;
    issue_mask = 1'b0;
    ix = hx;
    iy = hy;
    iu = hu;
    if (in_valid) begin
      issue      = 1'b1;
      issue_last = (m_count <= MW'(1));
      issue_mask = (m_count == '0);
      ix = in_px;
      iy = in_py;
      iu = in_u;
    end else if (busy && !phase) begin
      issue      = 1'b1;
      issue_last = (m_left == MW'(1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      phase  <= 1'b0;
      m_left <= '0;
      idx    <= '0;
    end else if (in_valid) begin
      busy   <= (m_count > MW'(1));
      phase  <= 1'b1;
      m_left <= (m_count > MW'(1)) ? MW'(m_count - MW'(1)) : '0;
      idx    <= (m_count > MW'(1)) ? 1 : 0;
    end else if (busy) begin
      phase <= ~phase;
      if (!phase) begin
        m_left <= m_left - MW'(1);
        if (issue_last) begin
          busy <= 1'b0;
          idx  <= '0;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      hx <= in_px;
      hy <= in_py;
      hu <= in_u;
    end
  end

  // datapath pipeline
  logic [NS-1:0] vld, lst, msk, fst;
  logic          vld_first_acc;
  lane_fix_t dxA, dyA, euA;
  fix_t      dA, cA, sA;
  logic signed [LANES-1:0][63:0] cxB, syB, cyB, sxB;
  lane_fix_t euB;
  fix_t      dB;
  lane_fix_t edC, etC, euC;
  lane_wgt_t qdD, qtD, quD;
  lane_wgt_t eE;
  lane_wgt_t tF;
  logic [LANES-1:0][15:0] fG;
  logic [LANES-1:0][15:0] nG;
  logic [LANES-1:0][31:0] f2G;
  logic [LANES-1:0][31:0] mH;
  logic [LANES-1:0][15:0] nH;
  lane_wgt_t acc;

  function automatic logic [31:0] sq_sat(input fix_t e);
    logic [63:0] p;
    p = 64'(e) * 64'(e);
    return usat32(p >> FRAC);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      lst <= '0;
      msk <= '0;
      out_valid <= 1'b0;
    end else begin
      vld <= {vld[NS-2:0], issue};
      lst <= {lst[NS-2:0], issue & issue_last};
      msk <= {msk[NS-2:0], issue & issue_mask};
      out_valid <= vld[NS-1] & lst[NS-1];
    end
  end

  always_ff @(posedge clk) begin
    // A: offsets from the panel
    dA <= meas.d;
    cA <= meas.c;
    sA <= meas.s;
    for (int l = 0; l < int'(LANES); l++) begin
      dxA[l] <= ix[l] - pa_x;
      dyA[l] <= iy[l] - pa_y;
      euA[l] <= iu[l] - meas.u;
    end
    // B: projections onto the measured bearing
    dB  <= dA;
    euB <= euA;
    for (int l = 0; l < int'(LANES); l++) begin
      cxB[l] <= 64'(cA) * 64'(dxA[l]);
      syB[l] <= 64'(sA) * 64'(dyA[l]);
      cyB[l] <= 64'(cA) * 64'(dyA[l]);
      sxB[l] <= 64'(sA) * 64'(dxA[l]);
    end
    // C: residuals
    for (int l = 0; l < int'(LANES); l++) begin
      edC[l] <= sat32(($signed(cxB[l] + syB[l]) >>> FRAC) - 64'(dB));
      etC[l] <= sat32($signed(cyB[l] - sxB[l]) >>> FRAC);
      euC[l] <= euB[l];
    end
    // D: squares
    for (int l = 0; l < int'(LANES); l++) begin
      qdD[l] <= sq_sat(edC[l]);
      qtD[l] <= sq_sat(etC[l]);
      quD[l] <= sq_sat(euC[l]);
    end
    // E: weighted exponent
    for (int l = 0; l < int'(LANES); l++) begin
      logic [63:0] sum;
      sum = ((64'(kd) * 64'(qdD[l])) >> FRAC) + ((64'(ka) * 64'(qtD[l])) >> FRAC)
          + ((64'(ku) * 64'(quD[l])) >> FRAC);
      eE[l] <= usat32(sum);
    end
    // F: base-2 exponent
    for (int l = 0; l < int'(LANES); l++) tF[l] <= usat32((64'(eE[l]) * 64'(LOG2E)) >> FRAC);
    // G: integer / fraction split, fraction squared
    for (int l = 0; l < int'(LANES); l++) begin
      nG[l]  <= tF[l][31:16];
      fG[l]  <= tF[l][15:0];
      f2G[l] <= (32'(tF[l][15:0]) * 32'(tF[l][15:0])) >> FRAC;
    end
    // H: 2^-f polynomial (Q16.16, in (0.5, 1])
    for (int l = 0; l < int'(LANES); l++) begin
      mH[l] <= 32'(ONE) - ((32'd44012 * 32'(fG[l])) >> FRAC) + ((32'd11244 * f2G[l]) >> FRAC);
      nH[l] <= nG[l];
    end
    // accumulate 2^-n * 2^-f
    for (int l = 0; l < int'(LANES); l++) begin
      logic [31:0] lm;
      lm = (nH[l] > 16'd16) ? 32'd0 : (mH[l] >> nH[l][4:0]);
      if (vld[NS-1]) begin
        if (lst[NS-1]) out_s[l] <= (msk[NS-1] ? 32'd0 : lm) + (vld_first_acc ? 32'd0 : acc[l]);
        acc[l] <= (msk[NS-1] ? 32'd0 : lm) + (vld_first_acc ? 32'd0 : acc[l]);
      end
    end
  end

  // first accumulation of a group restarts the sum
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fst <= '0;
    else        fst <= {fst[NS-2:0], issue & in_valid};
  end
  assign vld_first_acc = fst[NS-1];
endmodule
