// Agent state prediction, alpha(x_n), for one group of LANES particles.
//
// First panel of the chain (first = 1): near-constant-velocity motion model
//   p' = p + dt*v + dt^2/2 * a,   v' = v + dt*a,   a = sig_a * n
// with independent unit-Gaussian samples n per axis.  Later panels
// (first = 0): the incoming message from the previous panel is only
// regularized, p' = p + sig_r*n, v' = v + sig_rv*n.  In both modes the
// incoming weights are renormalized by a left shift of wshift bits (block
// floating point: the receiving panel shifts the largest weight up to the
// top bit), which keeps 32-bit weights from underflowing along the chain.
//
// The paper gives the two modes (constant-velocity model at j = 1,
// "small Gaussian regularization noise" at j > 1) and the 3-cycle latency;
// the exact noise injection and the weight shift are this design's choices.
//
// Timing: fully pipelined, in_valid in cycle t gives out_valid in cycle t+3.
// noise[l] = {n_px, n_py, n_vx, n_vy} for lane l, unit variance Q16.16.
module agent_pred
  import loc_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  first,
  input  group_t                in_p,
  input  fix_t [LANES-1:0][3:0] noise,
  input  logic [4:0]            wshift,
  input  fix_t                  dt,
  input  fix_t                  sig_a,
  input  fix_t                  sig_r,
  input  fix_t                  sig_rv,
  output logic                  out_valid,
  output group_t                out_p
);
  // stage 1: scaled noise, held state
  logic   v1, v2;
  logic   f1;
  group_t p1, p2;
  fix_t [LANES-1:0][3:0] n1;
  fix_t   dt1, hdt2;
  // stage 2: increments
  fix_t [LANES-1:0][3:0] inc2;

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
    f1   <= first;
    dt1  <= dt;
    hdt2 <= mulq(dt, dt) >>> 1;
    for (int l = 0; l < int'(LANES); l++) begin
      p1[l]   <= in_p[l];
      p1[l].w <= in_p[l].w << wshift;
      if (first) begin
        n1[l][0] <= mulq(sig_a, noise[l][0]);
        n1[l][1] <= mulq(sig_a, noise[l][1]);
        n1[l][2] <= '0;
        n1[l][3] <= '0;
      end else begin
        n1[l][0] <= mulq(sig_r,  noise[l][0]);
        n1[l][1] <= mulq(sig_r,  noise[l][1]);
        n1[l][2] <= mulq(sig_rv, noise[l][2]);
        n1[l][3] <= mulq(sig_rv, noise[l][3]);
      end
    end
    // stage 2
    p2 <= p1;
    for (int l = 0; l < int'(LANES); l++) begin
      if (f1) begin
        inc2[l][0] <= mulq(dt1, p1[l].vx) + mulq(hdt2, n1[l][0]);
        inc2[l][1] <= mulq(dt1, p1[l].vy) + mulq(hdt2, n1[l][1]);
        inc2[l][2] <= mulq(dt1, n1[l][0]);
        inc2[l][3] <= mulq(dt1, n1[l][1]);
      end else begin
        inc2[l] <= n1[l];
      end
    end
    // stage 3
    for (int l = 0; l < int'(LANES); l++) begin
      out_p[l].px <= p2[l].px + inc2[l][0];
      out_p[l].py <= p2[l].py + inc2[l][1];
      out_p[l].vx <= p2[l].vx + inc2[l][2];
      out_p[l].vy <= p2[l].vy + inc2[l][3];
      out_p[l].w  <= p2[l].w;
    end
  end
endmodule
