// Processing unit of one panel (physical anchor, PA) of the daisy chain.
//
// Per time step n the unit
//  1. receives the agent message from the previous panel (or, at the first
//     panel, the resampled belief of the last panel for time n-1) as NP/4
//     beats of 4 particles on rx_*, writes them to the particle memory and
//     ORs their weights to find the renormalizing shift;
//  2. runs one pass over the NP particles, time multiplexed in groups of
//     LANES = 4.  Each group goes through
//        agent_pred (3) -> likelihood (9 + 2(M-1)) -> pa_belief (5)
//        -> agent_belief (3)
//     with pa_pred (3) alongside agent_pred, so a group takes
//     20 + 2(M-1) cycles and the pass NP/4 * (20 + 2(M-1)) cycles, which is
//     the per-panel term of the paper's latency model.  Groups do not
//     overlap, as in that model; the next group is launched in the cycle the
//     previous one leaves agent_belief;
//  3. streams each updated group to the next panel on tx_* as it leaves
//     agent_belief (all panels but the last);
//  4. after the pass, off the agent's critical path: LoS existence
//     probability and amplitude estimate of its PA (two ratio units),
//     detection flag (p_e > p_de) and systematic resampling of the amplitude
//     particles into the other bank of the amplitude memory;
//  5. at the last panel only: MMSE agent estimate (est_*) and systematic
//     resampling of the agent particles, streamed out on tx_* with equal
//     weights 2^31 as the prior of the first panel at time n+1.
// Every panel carries the same hardware; is_first / is_last select its role.
//
// Interfaces: rx/tx are valid-only streams (no back-pressure; the paper
// assumes all blocks run at matched throughput), tx_last marks the final
// beat of a message.  Measurements of the current step are written on
// meas_we/meas_waddr/meas_wdata and meas_count must hold M from the time the
// last rx beat arrives until pass_done.  init (while idle) sets the PA state
// to p_init / u_init; it takes NP/4 cycles.  pass_cycles reports the length
// of the last pass, from the first group launch to the last group's exit.
// A pass starts two cycles after the last rx beat.  The chain needs J >= 2:
// with one panel the resampler output would overwrite particles it still
// reads.
//
// Lint notes: uh_done and ars_done are not read, because the amplitude
// ratio finishes in the same cycle as the existence ratio (same latency,
// same start) and the agent resampler's end is already marked by its last
// output beat; rst_n also appears in the assertion's disable condition,
// which lint reports as a reset used both synchronously and asynchronously.
module panel_unit
  import loc_pkg::*;
#(
  parameter int unsigned NP    = 4096,
  parameter int unsigned MAX_M = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  model_cfg_t                  cfg,
  input  fix_t                        pa_x,
  input  fix_t                        pa_y,
  input  logic                        is_first,
  input  logic                        is_last,
  input  logic [31:0]                 seed,
  input  logic                        init,
  input  logic                        meas_we,
  input  logic [$clog2(MAX_M)-1:0]    meas_waddr,
  input  meas_t                       meas_wdata,
  input  logic [$clog2(MAX_M+1)-1:0]  meas_count,
  input  logic                        rx_valid,
  input  logic                        rx_last,
  input  group_t                      rx_data,
  output logic                        tx_valid,
  output logic                        tx_last,
  output group_t                      tx_data,
  output logic                        busy,
  output logic                        pass_done,
  output logic [31:0]                 pass_cycles,
  output logic [4:0]                  wshift,
  output logic                        pa_valid,
  output ufix_t                       pa_exist,
  output logic                        pa_detected,
  output fix_t                        pa_u_hat,
  output logic                        est_valid,
  output logic                        est_ok,
  output fix_t [3:0]                  est
);
  localparam int unsigned G   = NP / LANES;
  localparam int unsigned GW  = (G > 1) ? $clog2(G) : 1;
  localparam int unsigned LG  = $clog2(NP);
  localparam int unsigned MW  = $clog2(MAX_M + 1);
  localparam int unsigned NNZ = LANES * 4 + LANES + 2;

  // ------------------------------------------------------------------
  // memories
  particle_t amem [NP];
  fix_t      umem0 [NP];
  fix_t      umem1 [NP];
  wgt_t      vmem [NP];
  meas_t     mmem [MAX_M];
  logic      ubank;

  // ------------------------------------------------------------------
  // noise
  fix_t        [NNZ-1:0]       gz;
  logic        [NNZ-1:0][31:0] uz;
  gauss_noise #(.N(NNZ)) u_noise (.clk, .rst_n, .seed, .g(gz), .uni(uz));

  // ------------------------------------------------------------------
  // control state
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_PASS, S_FIN} state_t;
  state_t      st;
  logic        rx_full;
  logic [GW-1:0] rx_g;
  logic [31:0] rx_or, rx_or_nxt;

  always_comb begin
    rx_or_nxt = rx_or;
    for (int l = 0; l < int'(LANES); l++) rx_or_nxt = rx_or_nxt | rx_data[l].w;
  end
  logic        kick;            // launch group 0 this cycle
  logic [GW-1:0] g;             // group in flight
  logic [31:0] cyc;
  logic [MW-1:0] m_cnt;
  ufix_t       p_e;
  logic [GW-1:0] init_g;
  logic        fin_start;
  logic        pe_pending, est_pending;

  // block interconnect
  logic      launch;
  logic [GW-1:0] lg;
  group_t    grp_rd;
  lane_fix_t u_rd;
  fix_t [LANES-1:0][3:0] ap_noise;
  lane_fix_t u_noise_v;

  logic      ap_ov, pp_ov, lk_ov, pb_ov, ab_ov;
  group_t    ap_p, ab_p, hold_p;
  lane_fix_t pp_u, hold_u;
  ufix_t     pp_p, hold_pp;
  lane_wgt_t lk_s, pb_beta, pb_v;
  logic [$clog2(MAX_M)-1:0] lk_idx;
  logic [63:0] pb_a, pb_w;
  logic signed [63:0] pb_u;
  logic [63:0] ab_w;
  logic signed [3:0][63:0] ab_wx;
  logic      clr;

  assign lg = kick ? '0 : GW'(g + 1'b1);
  assign launch = (st == S_PASS) && (kick || (ab_ov && g != GW'(G - 1)));

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      grp_rd[l] = amem[{lg, 2'(l)}];
      u_rd[l]   = ubank ? umem1[{lg, 2'(l)}] : umem0[{lg, 2'(l)}];
      for (int k = 0; k < 4; k++) ap_noise[l][k] = gz[l*4 + k];
      u_noise_v[l] = gz[LANES*4 + l];
    end
  end

  agent_pred u_ap (
    .clk, .rst_n, .in_valid(launch), .first(is_first), .in_p(grp_rd), .noise(ap_noise),
    .wshift, .dt(cfg.dt), .sig_a(cfg.sig_a), .sig_r(cfg.sig_r), .sig_rv(cfg.sig_rv),
    .out_valid(ap_ov), .out_p(ap_p)
  );

  pa_pred u_pp (
    .clk, .rst_n, .in_valid(launch), .in_u(u_rd), .noise(u_noise_v), .p_e,
    .p_s(cfg.p_s), .p_b(cfg.p_b), .sig_u(cfg.sig_u),
    .out_valid(pp_ov), .out_u(pp_u), .p_pred(pp_p)
  );

  lane_fix_t ap_px, ap_py;
  lane_wgt_t hold_w;
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      ap_px[l]  = ap_p[l].px;
      ap_py[l]  = ap_p[l].py;
      hold_w[l] = hold_p[l].w;
    end
  end

  likelihood #(.MAX_M(MAX_M)) u_lk (
    .clk, .rst_n, .in_valid(ap_ov), .in_px(ap_px), .in_py(ap_py), .in_u(pp_u),
    .m_count(m_cnt), .meas_idx(lk_idx), .meas(mmem[lk_idx]), .pa_x, .pa_y,
    .kd(cfg.kd), .ka(cfg.ka), .ku(cfg.ku), .out_valid(lk_ov), .out_s(lk_s)
  );

  pa_belief u_pb (
    .clk, .rst_n, .clear(clr), .in_valid(lk_ov), .in_s(lk_s), .in_w(hold_w), .in_u(hold_u),
    .p_d(cfg.p_d), .lr_scale(cfg.lr_scale), .out_valid(pb_ov), .out_beta(pb_beta),
    .out_v(pb_v), .a_sum(pb_a), .w_sum(pb_w), .u_sum(pb_u)
  );

  agent_belief u_ab (
    .clk, .rst_n, .clear(clr), .in_valid(pb_ov), .in_p(hold_p), .in_beta(pb_beta),
    .p_exist(hold_pp), .out_valid(ab_ov), .out_p(ab_p), .w_sum(ab_w),
    .wx_sum(ab_wx)
  );

  // ------------------------------------------------------------------
  // end-of-step units
  logic        pe_done, pe_ok, uh_done, uh_ok, ae_done;
  fix_t [0:0]  pe_q, uh_q;
  logic [63:0] pe_num, pe_den;
  logic [63:0] pe_a_scaled, pe_w_scaled;

  assign pe_a_scaled = (64'(hold_pp) * pb_a) >> FRAC;
  assign pe_w_scaled = (64'(ONE - hold_pp) * pb_w) >> FRAC;
  assign pe_num = pe_a_scaled;
  assign pe_den = pe_a_scaled + pe_w_scaled;

  estimator #(.N_NUM(1)) u_pe (
    .clk, .rst_n, .start(fin_start), .den(pe_den), .num({pe_num}),
    .done(pe_done), .ok(pe_ok), .q(pe_q)
  );

  estimator #(.N_NUM(1)) u_uh (
    .clk, .rst_n, .start(fin_start), .den(pb_a), .num({pb_u}),
    .done(uh_done), .ok(uh_ok), .q(uh_q)
  );

  estimator #(.N_NUM(4)) u_ae (
    .clk, .rst_n, .start(fin_start && is_last), .den(ab_w), .num(ab_wx),
    .done(ae_done), .ok(est_ok), .q(est)
  );

  // PA amplitude resampling
  logic [LG-1:0] prs_rd, prs_k, prs_anc;
  logic          prs_ov, prs_done, prs_busy;
  sys_resampler #(.NP(NP)) u_prs (
    .clk, .rst_n, .start(fin_start && pb_a != '0), .total(pb_a), .u_rand(uz[NNZ-2]),
    .rd_idx(prs_rd), .rd_w(vmem[prs_rd]), .out_valid(prs_ov), .out_k(prs_k),
    .out_anc(prs_anc), .done(prs_done), .busy(prs_busy)
  );

  // agent resampling (last panel)
  logic [LG-1:0] ars_rd, ars_k, ars_anc;
  logic          ars_ov, ars_done, ars_busy;
  sys_resampler #(.NP(NP)) u_ars (
    .clk, .rst_n, .start(fin_start && is_last), .total(ab_w), .u_rand(uz[NNZ-1]),
    .rd_idx(ars_rd), .rd_w(amem[ars_rd].w), .out_valid(ars_ov), .out_k(ars_k),
    .out_anc(ars_anc), .done(ars_done), .busy(ars_busy)
  );

  // ------------------------------------------------------------------
  // memories and streams
  group_t rs_beat;
  logic   rs_tx_valid, rs_tx_last;

  always_ff @(posedge clk) begin
    if (rx_valid) begin
      for (int l = 0; l < int'(LANES); l++) amem[{rx_g, 2'(l)}] <= rx_data[l];
    end
    if (ab_ov && st == S_PASS) begin
      for (int l = 0; l < int'(LANES); l++) amem[{g, 2'(l)}] <= ab_p[l];
    end
    if (meas_we) mmem[meas_waddr] <= meas_wdata;
    if (pb_ov && st == S_PASS) begin
      for (int l = 0; l < int'(LANES); l++) begin
        vmem[{g, 2'(l)}] <= pb_v[l];
        if (ubank) umem1[{g, 2'(l)}] <= hold_u[l];
        else       umem0[{g, 2'(l)}] <= hold_u[l];
      end
    end
    if (prs_ov) begin
      if (ubank) umem0[prs_k] <= umem1[prs_anc];
      else       umem1[prs_k] <= umem0[prs_anc];
    end
    if (st == S_INIT) begin
      for (int l = 0; l < int'(LANES); l++) begin
        if (ubank) umem1[{init_g, 2'(l)}] <= cfg.u_init;
        else       umem0[{init_g, 2'(l)}] <= cfg.u_init;
      end
    end
    if (ap_ov) hold_p <= ap_p;
    if (pp_ov) begin
      hold_u  <= pp_u;
      hold_pp <= pp_p;
    end
    if (ars_ov) begin
      rs_beat[ars_k[1:0]]   <= amem[ars_anc];
      rs_beat[ars_k[1:0]].w <= 32'h8000_0000;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs_tx_valid <= 1'b0;
      rs_tx_last  <= 1'b0;
    end else begin
      rs_tx_valid <= ars_ov && (ars_k[1:0] == 2'd3);
      rs_tx_last  <= ars_ov && (ars_k == LG'(NP - 1));
    end
  end

  assign tx_valid = is_last ? rs_tx_valid : (ab_ov && st == S_PASS);
  assign tx_last  = is_last ? rs_tx_last  : (ab_ov && st == S_PASS && g == GW'(G - 1));
  assign tx_data  = is_last ? rs_beat     : ab_p;

  // ------------------------------------------------------------------
  // controller
  assign busy = (st != S_IDLE) || prs_busy || ars_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      rx_full     <= 1'b0;
      rx_g        <= '0;
      rx_or       <= '0;
      wshift      <= '0;
      kick        <= 1'b0;
      g           <= '0;
      cyc         <= '0;
      m_cnt       <= '0;
      p_e         <= '0;
      init_g      <= '0;
      fin_start   <= 1'b0;
      pe_pending  <= 1'b0;
      est_pending <= 1'b0;
      clr         <= 1'b0;
      ubank       <= 1'b0;
      pass_done   <= 1'b0;
      pass_cycles <= '0;
      pa_valid    <= 1'b0;
      pa_exist    <= '0;
      pa_detected <= 1'b0;
      pa_u_hat    <= '0;
      est_valid   <= 1'b0;
    end else begin
      kick      <= 1'b0;
      clr       <= 1'b0;
      fin_start <= 1'b0;
      pass_done <= 1'b0;
      pa_valid  <= 1'b0;
      est_valid <= 1'b0;

      // receive
      if (rx_valid) begin
        if (rx_last) begin
          rx_full <= 1'b1;
          rx_g    <= '0;
          rx_or   <= '0;
          wshift  <= (rx_or_nxt == '0) ? 5'd0 : 5'(clz32(rx_or_nxt));
        end else begin
          rx_g  <= rx_g + 1'b1;
          rx_or <= rx_or_nxt;
        end
      end

      if (prs_done) ubank <= ~ubank;

      case (st)
        S_IDLE: begin
          if (init) begin
            st     <= S_INIT;
            init_g <= '0;
            p_e    <= cfg.p_init;
          end else if (rx_full && !prs_busy && !ars_busy) begin
            st      <= S_PASS;
            rx_full <= 1'b0;
            kick    <= 1'b1;
            clr     <= 1'b1;
            m_cnt   <= meas_count;
            cyc     <= '0;
          end
        end
        S_INIT: begin
          init_g <= init_g + 1'b1;
          if (init_g == GW'(G - 1)) st <= S_IDLE;
        end
        S_PASS: begin
          cyc <= cyc + 1'b1;
          if (kick) g <= '0;
          if (ab_ov) begin
            if (g == GW'(G - 1)) begin
              st          <= S_FIN;
              pass_done   <= 1'b1;
              pass_cycles <= cyc;
              fin_start   <= 1'b1;
              pe_pending  <= 1'b1;
              est_pending <= is_last;
            end else begin
              g <= g + 1'b1;
            end
          end
        end
        S_FIN: begin
          if (pe_done) begin
            pe_pending  <= 1'b0;
            pa_valid    <= 1'b1;
            if (pe_ok) begin
              p_e      <= (pe_q[0] > fix_t'(ONE)) ? ONE : (pe_q[0] < 0 ? '0 : ufix_t'(pe_q[0]));
              pa_exist <= (pe_q[0] > fix_t'(ONE)) ? ONE : (pe_q[0] < 0 ? '0 : ufix_t'(pe_q[0]));
              pa_detected <= (pe_q[0] > fix_t'(cfg.p_de));
            end else begin
              p_e      <= hold_pp;
              pa_exist <= hold_pp;
              pa_detected <= (hold_pp > cfg.p_de);
            end
            if (uh_ok) pa_u_hat <= uh_q[0];
          end
          if (ae_done) begin
            est_pending <= 1'b0;
            est_valid   <= 1'b1;
          end
          if (!pe_pending && !est_pending && !fin_start) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // A new message must not arrive while the particle memory is in use.
  a_rx_idle: assert property (@(posedge clk) disable iff (!rst_n) !(rx_valid && st == S_PASS))
    else $error("panel_unit: rx beat during a pass");
endmodule
