// End-to-end testbench of the daisy-chained localizer.
//
// J panels at the corners of a 30 m x 30 m room (more panels are spread
// along the walls), links modelled as LAT-cycle delays closing the ring,
// an agent moving at constant velocity.  Each step every panel gets a LoS
// measurement (distance, bearing, amplitude) of the true position plus
// clutter; one panel's LoS is blocked during part of the run, and one panel
// gets an extra clutter measurement so that M differs between panels.  The
// testbench checks the tracking error, the per-panel pass length
// NP/4 * (20 + 2(M-1)), the end-to-end step latency, and counts each
// mechanism of the design: time multiplexing over groups, regularization at
// later panels, weight renormalization, LoS detection switching off and on,
// agent resampling at the last panel, and differing measurement counts.
module tb_dmimo_loc_top;
  import loc_pkg::*;
  localparam int unsigned J = 4, NP = 64, MAX_M = 8, LAT = 174, STEPS = 14;
  localparam int unsigned BLK = 2;  // panel whose LoS is blocked for steps 5..8
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  model_cfg_t cfg;
  fix_t [J-1:0] pa_x, pa_y;
  logic init = 0;
  logic [J-1:0] meas_we = '0;
  logic [2:0] meas_waddr = '0;
  meas_t meas_wdata = '0;
  logic [J-1:0][3:0] meas_count = '0;
  logic [J-1:0] rx_valid, rx_last, tx_valid, tx_last, busy, pass_done, pa_valid, pa_detected;
  group_t [J-1:0] rx_data, tx_data;
  logic [J-1:0][31:0] pass_cycles;
  logic [J-1:0][4:0] wshift;
  ufix_t [J-1:0] pa_exist;
  fix_t [J-1:0] pa_u_hat;
  logic est_valid, est_ok;
  fix_t [3:0] est;
  logic [31:0] step_cycles;

  dmimo_loc_top #(.J(J), .NP(NP), .MAX_M(MAX_M)) dut (
    .clk, .rst_n, .cfg, .pa_x, .pa_y, .seed(32'hC0FFEE), .init, .meas_we, .meas_waddr,
    .meas_wdata, .meas_count, .rx_valid, .rx_last, .rx_data, .tx_valid, .tx_last, .tx_data,
    .busy, .pass_done, .pass_cycles, .wshift, .pa_valid, .pa_exist, .pa_detected, .pa_u_hat,
    .est_valid, .est_ok, .est, .step_cycles
  );

  // ring of links; the testbench can inject the first message into panel 0
  logic lv [J], ll [J];
  group_t ld [J];
  logic inj_valid = 0, inj_last = 0;
  group_t inj_data = '0;
  for (genvar j = 0; j < int'(J); j++) begin : g_link
    eth_link_model #(.LAT(LAT)) u_link (
      .clk, .rst_n, .in_valid(tx_valid[j]), .in_last(tx_last[j]), .in_data(tx_data[j]),
      .out_valid(lv[j]), .out_last(ll[j]), .out_data(ld[j])
    );
  end
  always_comb begin
    for (int j = 0; j < int'(J); j++) begin
      int s;
      s = (j + int'(J) - 1) % int'(J);
      rx_valid[j] = lv[s];
      rx_last[j]  = ll[s];
      rx_data[j]  = ld[s];
    end
    if (inj_valid) begin
      rx_valid[0] = 1'b1;
      rx_last[0]  = inj_last;
      rx_data[0]  = inj_data;
    end
  end

  function automatic real r(input fix_t v); return real'(v) / 65536.0; endfunction
  function automatic fix_t q(input real v); return fix_t'($rtoi(v * 65536.0)); endfunction
  function automatic real urnd(input real lo, input real hi);
    int unsigned x;
    x = $urandom;
    return lo + (hi - lo) * (real'(x) / 4294967296.0);
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_mux = 0, n_reg = 0, n_shift = 0, n_det_off = 0, n_det_on = 0, n_resampled = 0;
  int n_mdiff = 0, n_est = 0;
  logic [J-1:0] det_prev = '0;
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < int'(J); j++) begin
      if (pass_done[j]) begin
        int M;
        M = int'(meas_count[j]);
        checks++;
        if (pass_cycles[j] != (NP / 4) * (20 + 2 * ((M == 0 ? 1 : M) - 1))) begin
          failures++;
          $display("FAIL pass length panel %0d: %0d", j, pass_cycles[j]);
        end
        if (NP / 4 > 1) n_mux++;
        if (j > 0) n_reg++;
        if (wshift[j] != 0) n_shift++;
        if (M != int'(meas_count[0])) n_mdiff++;
      end
      if (pa_valid[j]) begin
        if (det_prev[j] && !pa_detected[j]) n_det_off++;
        if (!det_prev[j] && pa_detected[j]) n_det_on++;
        det_prev[j] = pa_detected[j];
      end
    end
    if (rx_valid[0] && rx_last[0] && !inj_valid) n_resampled++;
  end

  real tx_, ty_, tvx, tvy;

  task automatic load_measurements(input int step);
    for (int j = 0; j < int'(J); j++) begin
      int m;
      real dx, dy, d;
      m = 0;
      dx = tx_ - r(pa_x[j]);
      dy = ty_ - r(pa_y[j]);
      d = $sqrt(dx * dx + dy * dy);
      if (!(j == int'(BLK) && step >= 5 && step <= 8)) begin
        meas_wdata.d = q(d + urnd(-0.05, 0.05));
        meas_wdata.c = q(dx / d);
        meas_wdata.s = q(dy / d);
        meas_wdata.u = q(2.0);
        meas_waddr = 3'(m);
        meas_we = '0;
        meas_we[j] = 1'b1;
        @(negedge clk);
        m++;
      end
      // clutter: a point elsewhere in the room
      for (int c = 0; c < ((j == 3) ? 2 : 1); c++) begin
        real ang;
        ang = urnd(-3.1, 3.1);
        meas_wdata.d = q(urnd(2.0, 30.0));
        meas_wdata.c = q($cos(ang));
        meas_wdata.s = q($sin(ang));
        meas_wdata.u = q(urnd(0.5, 1.5));
        meas_waddr = 3'(m);
        meas_we = '0;
        meas_we[j] = 1'b1;
        @(negedge clk);
        m++;
      end
      meas_we = '0;
      meas_count[j] = 4'(m);
    end
  endtask

  initial begin
    real err, max_late_err;
    int exp_lat;
    cfg = '0;
    cfg.dt = q(0.1);
    cfg.sig_a = q(0.5); cfg.sig_r = q(0.03); cfg.sig_rv = q(0.02); cfg.sig_u = q(0.05);
    cfg.p_s = q(0.95); cfg.p_b = q(0.05); cfg.p_d = q(0.9); cfg.lr_scale = q(10.0);
    cfg.kd = q(5.5); cfg.ka = q(5.5); cfg.ku = q(12.5);
    cfg.p_de = q(0.5); cfg.p_init = q(0.5); cfg.u_init = q(2.0);
    for (int j = 0; j < int'(J); j++) begin
      pa_x[j] = q((j == 1 || j == 2) ? 30.0 : 0.0);
      pa_y[j] = q((j >= 2) ? 30.0 : 0.0);
    end
    tx_ = 10.0; ty_ = 12.0; tvx = 1.0; tvy = 0.5;
    max_late_err = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    init = 1;
    @(negedge clk);
    init = 0;
    repeat (NP) @(negedge clk);

    for (int step = 0; step < int'(STEPS); step++) begin
      tx_ += tvx * 0.1;
      ty_ += tvy * 0.1;
      load_measurements(step);
      if (step == 0) begin
        // initial agent belief: particles spread +-1 m around the start
        for (int g = 0; g < int'(NP / 4); g++) begin
          for (int l = 0; l < int'(LANES); l++) begin
            inj_data[l].px = q(10.0 + urnd(-1.0, 1.0));
            inj_data[l].py = q(12.0 + urnd(-1.0, 1.0));
            inj_data[l].vx = q(1.0 + urnd(-0.3, 0.3));
            inj_data[l].vy = q(0.5 + urnd(-0.3, 0.3));
            inj_data[l].w  = 32'h0010_0000;
          end
          inj_valid = 1;
          inj_last = (g == int'(NP / 4) - 1);
          @(negedge clk);
        end
        inj_valid = 0;
        inj_last = 0;
      end
      wait (est_valid);
      @(posedge clk);
      @(negedge clk);
      n_est++;
      err = $sqrt((r(est[0]) - tx_) ** 2 + (r(est[1]) - ty_) ** 2);
      $display("step %0d est (%f, %f) true (%f, %f) err %f p_exist %f %f %f %f lat %0d", step,
               r(est[0]), r(est[1]), tx_, ty_, err, r(pa_exist[0]), r(pa_exist[1]),
               r(pa_exist[2]), r(pa_exist[3]), step_cycles);
      checks++;
      if (!est_ok || err > 1.5) begin
        failures++;
        $display("FAIL tracking error %f at step %0d", err, step);
      end
      if (step >= 4 && err > max_late_err) max_late_err = err;
      // latency: J passes, J-1 link hops, start-up and the estimate
      exp_lat = 0;
      for (int j = 0; j < int'(J); j++) exp_lat += (NP / 4) * (20 + 2 * (int'(meas_count[j]) - 1));
      exp_lat += (int'(J) - 1) * int'(LAT) + 2 * int'(J) + 36;
      checks++;
      if (int'(step_cycles) != exp_lat) begin
        failures++;
        $display("FAIL step latency %0d expected %0d", step_cycles, exp_lat);
      end
    end
    wait (busy == '0);
    checks++;
    if (max_late_err > 0.5) begin
      failures++;
      $display("FAIL late tracking error %f", max_late_err);
    end
    $display("mechanisms: mux=%0d reg=%0d shift=%0d det_off=%0d det_on=%0d resampled=%0d mdiff=%0d est=%0d",
             n_mux, n_reg, n_shift, n_det_off, n_det_on, n_resampled, n_mdiff, n_est);
    checks++; if (n_mux == 0)       begin failures++; $display("FAIL no time multiplexing"); end
    checks++; if (n_reg == 0)       begin failures++; $display("FAIL no regularization pass"); end
    checks++; if (n_shift == 0)     begin failures++; $display("FAIL no weight renormalization"); end
    checks++; if (n_det_off == 0)   begin failures++; $display("FAIL LoS never lost"); end
    checks++; if (n_det_on == 0)    begin failures++; $display("FAIL LoS never detected"); end
    checks++; if (n_resampled == 0) begin failures++; $display("FAIL no resampled message"); end
    checks++; if (n_mdiff == 0)     begin failures++; $display("FAIL M never differed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
