// Self-checking testbench of panel_unit with NP = 16 particles (4 groups of
// 4) and noise switched off (all noise standard deviations zero), so that
// every result can be predicted:
//  step 1, first panel, M = 2 (LoS + clutter): pass length 4*(20+2*1),
//          4 outgoing beats with tx_last on the fourth, unchanged states,
//          weight ratio xi_near/xi_far, weight renormalizing shift, PA
//          existence posterior, detection flag and amplitude estimate;
//  step 2, M = 0 (LoS blocked): pass length 4*20, existence falls below
//          the threshold;
//  step 3, last panel, M = 2: MMSE estimate and the resampled message
//          (16 particles, weights 2^31, copies of the near cluster).
// Expected values come from a real-valued model of the message-passing
// equations in this file.
module tb_panel_unit;
  import loc_pkg::*;
  localparam int unsigned NP = 16, MAX_M = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  model_cfg_t cfg;
  fix_t pa_x, pa_y;
  logic is_first, is_last, init = 0;
  logic [31:0] seed = 32'h1234;
  logic meas_we = 0;
  logic [2:0] meas_waddr = '0;
  meas_t meas_wdata;
  logic [3:0] meas_count;
  logic rx_valid = 0, rx_last = 0;
  group_t rx_data;
  logic tx_valid, tx_last, busy, pass_done, pa_valid, pa_detected, est_valid, est_ok;
  group_t tx_data;
  logic [31:0] pass_cycles;
  logic [4:0] wshift;
  ufix_t pa_exist;
  fix_t pa_u_hat;
  fix_t [3:0] est;

  panel_unit #(.NP(NP), .MAX_M(MAX_M)) dut (.*);

  function automatic real r(input fix_t v); return real'(v) / 65536.0; endfunction
  function automatic fix_t q(input real v); return fix_t'($rtoi(v * 65536.0)); endfunction

  task automatic chk(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp) > tol || (exp - got) > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask
  task automatic chki(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  // scenario
  localparam real TX = 5.0, TY = 3.0, FX = -10.0, FY = -10.0;
  meas_t mz [2];
  real   S_near, S_far;

  function automatic real s_of(input real px, input real py, input int M);
    real s;
    s = 0;
    for (int m = 0; m < M; m++) begin
      real dx, dy, ed, et, eu;
      dx = px - r(pa_x);
      dy = py - r(pa_y);
      ed = r(mz[m].c) * dx + r(mz[m].s) * dy - r(mz[m].d);
      et = r(mz[m].c) * dy - r(mz[m].s) * dx;
      eu = 2.0 - r(mz[m].u);
      s += $exp(-(2.0 * ed * ed + 2.0 * et * et + 1.0 * eu * eu));
    end
    return s;
  endfunction

  // tx monitor
  group_t txq [$];
  int     tx_last_at;
  always @(posedge clk) if (tx_valid) begin
    txq.push_back(tx_data);
    if (tx_last) tx_last_at = txq.size();
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_message();
    for (int g = 0; g < int'(NP / LANES); g++) begin
      @(negedge clk);
      for (int l = 0; l < int'(LANES); l++) begin
        int i;
        i = g * 4 + l;
        rx_data[l].px = q((i % 2 == 0) ? TX : FX);
        rx_data[l].py = q((i % 2 == 0) ? TY : FY);
        rx_data[l].vx = '0;
        rx_data[l].vy = '0;
        rx_data[l].w  = 32'h0010_0000;
      end
      rx_valid = 1;
      rx_last  = (g == int'(NP / LANES) - 1);
    end
    @(negedge clk);
    rx_valid = 0;
    rx_last  = 0;
  endtask

  initial begin
    real p, pn, beta_n, beta_f, xi_n, xi_f;
    cfg = '0;
    cfg.dt = q(0.1);
    cfg.p_s = q(0.95); cfg.p_b = q(0.05); cfg.p_d = q(0.9); cfg.lr_scale = q(10.0);
    cfg.kd = q(2.0); cfg.ka = q(2.0); cfg.ku = q(1.0);
    cfg.p_de = q(0.5); cfg.p_init = q(0.5); cfg.u_init = q(2.0);
    pa_x = '0; pa_y = '0;
    is_first = 1; is_last = 0; meas_count = '0; rx_data = '0; meas_wdata = '0;
    // LoS measurement to the near cluster, and a clutter measurement
    mz[0].d = q($sqrt(TX * TX + TY * TY));
    mz[0].c = q(TX / $sqrt(TX * TX + TY * TY));
    mz[0].s = q(TY / $sqrt(TX * TX + TY * TY));
    mz[0].u = q(2.0);
    mz[1].d = q(7.0); mz[1].c = q(0.0); mz[1].s = q(-1.0); mz[1].u = q(1.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    init = 1;
    @(negedge clk);
    init = 0;
    repeat (NP) @(negedge clk);
    for (int m = 0; m < 2; m++) begin
      meas_we = 1; meas_waddr = 3'(m); meas_wdata = mz[m];
      @(negedge clk);
    end
    meas_we = 0;

    // ---------------- step 1
    meas_count = 2;
    txq.delete();
    send_message();
    wait (pass_done);
    @(negedge clk);
    chki("pass cycles M=2", pass_cycles, (NP / 4) * (20 + 2 * (2 - 1)));
    chki("wshift", wshift, 11);
    chki("tx beats", txq.size(), NP / 4);
    chki("tx_last position", tx_last_at, NP / 4);
    p = 0.95 * 0.5 + 0.05 * 0.5;
    S_near = s_of(TX, TY, 2);
    S_far  = s_of(FX, FY, 2);
    beta_n = 0.1 + 10.0 * S_near;
    beta_f = 0.1 + 10.0 * S_far;
    xi_n = (1 - p) + p * beta_n;
    xi_f = (1 - p) + p * beta_f;
    foreach (txq[k]) for (int l = 0; l < int'(LANES); l++) begin
      int i;
      i = k * 4 + l;
      chk("px", r(txq[k][l].px), (i % 2 == 0) ? TX : FX, 1e-4);
      chk("w", real'(txq[k][l].w), 2147483648.0 * ((i % 2 == 0) ? xi_n : xi_f) / 65536.0,
          2.0 + 2e-3 * 2147483648.0 * xi_n / 65536.0);
    end
    wait (pa_valid);
    @(negedge clk);
    pn = p * (8 * beta_n + 8 * beta_f) / (p * (8 * beta_n + 8 * beta_f) + (1 - p) * 16.0);
    chk("p_exist step1", r(pa_exist), pn, 0.01);
    chki("detected step1", pa_detected, 1);
    chk("u_hat", r(pa_u_hat), 2.0, 1e-3);
    wait (!busy);

    // ---------------- step 2: LoS blocked
    meas_count = 0;
    is_first = 0;
    txq.delete();
    send_message();
    wait (pass_done);
    @(negedge clk);
    chki("pass cycles M=0", pass_cycles, (NP / 4) * 20);
    wait (pa_valid);
    @(negedge clk);
    p = 0.95 * pn + 0.05 * (1 - pn);
    pn = p * 0.1 / (p * 0.1 + (1 - p));
    chk("p_exist step2", r(pa_exist), pn, 0.01);
    chki("detected step2", pa_detected, 0);
    wait (!busy);

    // ---------------- step 3: last panel with LoS again
    meas_count = 2;
    is_last = 1;
    txq.delete();
    send_message();
    wait (est_valid);
    @(negedge clk);
    p = 0.95 * pn + 0.05 * (1 - pn);
    xi_n = (1 - p) + p * beta_n;
    xi_f = (1 - p) + p * beta_f;
    chki("est ok", est_ok, 1);
    chk("est px", r(est[0]), (xi_n * TX + xi_f * FX) / (xi_n + xi_f), 0.02);
    chk("est py", r(est[1]), (xi_n * TY + xi_f * FY) / (xi_n + xi_f), 0.02);
    chk("est vx", r(est[2]), 0.0, 1e-3);
    wait (!busy);
    repeat (5) @(negedge clk);
    chki("resampled beats", txq.size(), NP / 4);
    chki("resampled tx_last", tx_last_at, NP / 4);
    begin
      int near;
      real e;
      near = 0;
      foreach (txq[k]) for (int l = 0; l < int'(LANES); l++) begin
        if (txq[k][l].px == q(TX)) near++;
        chki("resampled w", txq[k][l].w, 32'h8000_0000);
      end
      // each of the 8 near particles is copied floor or ceil of NP*w/W times
      e = real'(NP) * xi_n / (xi_n + xi_f) / 8.0;
      checks++;
      if (near < 8 * $floor(e) || near > 8 * $ceil(e)) begin
        failures++;
        $display("FAIL near copies %0d for %f each", near, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
