// Full-size testbench: the localizer at its default size (24 panels, 4096
// particles per distribution, up to 16 measurements per panel), run through
// two complete time steps.
//
// The 24 panels stand evenly along the four walls of a 30 m x 30 m room,
// six per wall; the links between them are 174-cycle delays that close the
// ring.  Every panel gets the LoS measurement of the agent plus clutter:
// one clutter measurement in the first step (M = 2, 1024 * 22 cycles per
// pass) and five in the second (M = 6, 1024 * 30 cycles per pass), which is
// the 24-panel, 4096-particle, M = 6 operating point of the reference
// latency study (about 0.74 M cycles, 3.7 ms at 200 MHz).  The second step
// starts from the resampled belief that the last panel returned, so it also
// exercises the closed ring at full size.  The testbench injects the initial agent belief
// into panel 0, then checks every panel's pass length, the end-to-end step
// latency J*NP/4*(20+2(M-1)) + (J-1)*174 + 2J + 36 and the tracking error
// of both estimates.  A watchdog ends the run if a step never completes.
module tb_dmimo_loc_full;
  import loc_pkg::*;
  localparam int unsigned J = 24, NP = 4096, MAX_M = 16, LAT = 174, STEPS = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  model_cfg_t cfg;
  fix_t [J-1:0] pa_x, pa_y;
  logic init = 0;
  logic [J-1:0] meas_we = '0;
  logic [3:0] meas_waddr = '0;
  meas_t meas_wdata = '0;
  logic [J-1:0][4:0] meas_count = '0;
  logic [J-1:0] rx_valid, rx_last, tx_valid, tx_last, busy, pass_done, pa_valid, pa_detected;
  group_t [J-1:0] rx_data, tx_data;
  logic [J-1:0][31:0] pass_cycles;
  logic [J-1:0][4:0] wshift;
  ufix_t [J-1:0] pa_exist;
  fix_t [J-1:0] pa_u_hat;
  logic est_valid, est_ok;
  fix_t [3:0] est;
  logic [31:0] step_cycles;

  dmimo_loc_top dut (
    .clk, .rst_n, .cfg, .pa_x, .pa_y, .seed(32'h1234_5678), .init, .meas_we, .meas_waddr,
    .meas_wdata, .meas_count, .rx_valid, .rx_last, .rx_data, .tx_valid, .tx_last, .tx_data,
    .busy, .pass_done, .pass_cycles, .wshift, .pa_valid, .pa_exist, .pa_detected, .pa_u_hat,
    .est_valid, .est_ok, .est, .step_cycles
  );

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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_pass = 0;
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < int'(J); j++) begin
      if (pass_done[j]) begin
        n_pass++;
        checks++;
        if (pass_cycles[j] != (NP / 4) * (20 + 2 * (int'(meas_count[j]) - 1))) begin
          failures++;
          $display("FAIL pass length panel %0d: %0d", j, pass_cycles[j]);
        end
      end
    end
  end

  real tx_, ty_, tvx, tvy;

  task automatic load_measurements(input int m);
    for (int j = 0; j < int'(J); j++) begin
      real dx, dy, d, ang;
      dx = tx_ - r(pa_x[j]);
      dy = ty_ - r(pa_y[j]);
      d = $sqrt(dx * dx + dy * dy);
      meas_we = '0;
      meas_we[j] = 1'b1;
      meas_waddr = 4'd0;
      meas_wdata.d = q(d + urnd(-0.05, 0.05));
      meas_wdata.c = q(dx / d);
      meas_wdata.s = q(dy / d);
      meas_wdata.u = q(2.0);
      @(negedge clk);
      for (int c = 1; c < m; c++) begin
        ang = urnd(-3.1, 3.1);
        meas_waddr = 4'(c);
        meas_wdata.d = q(urnd(2.0, 30.0));
        meas_wdata.c = q($cos(ang));
        meas_wdata.s = q($sin(ang));
        meas_wdata.u = q(urnd(0.5, 1.5));
        @(negedge clk);
      end
      meas_we = '0;
      meas_count[j] = 5'(m);
    end
  endtask

  initial begin
    real err;
    int exp_lat, m_step;
    cfg = '0;
    cfg.dt = q(0.1);
    cfg.sig_a = q(0.5); cfg.sig_r = q(0.03); cfg.sig_rv = q(0.02); cfg.sig_u = q(0.05);
    cfg.p_s = q(0.95); cfg.p_b = q(0.05); cfg.p_d = q(0.9); cfg.lr_scale = q(10.0);
    cfg.kd = q(5.5); cfg.ka = q(5.5); cfg.ku = q(12.5);
    cfg.p_de = q(0.5); cfg.p_init = q(0.5); cfg.u_init = q(2.0);
    // six panels per wall, clockwise from the lower-left corner
    for (int j = 0; j < int'(J); j++) begin
      real t;
      t = 5.0 * real'(j % 6) + 2.5;
      case (j / 6)
        0: begin pa_x[j] = q(t);        pa_y[j] = q(0.0);        end
        1: begin pa_x[j] = q(30.0);     pa_y[j] = q(t);          end
        2: begin pa_x[j] = q(30.0 - t); pa_y[j] = q(30.0);       end
        default: begin pa_x[j] = q(0.0); pa_y[j] = q(30.0 - t); end
      endcase
    end
    tx_ = 10.0; ty_ = 12.0; tvx = 1.0; tvy = 0.5;
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
      m_step = (step == 0) ? 2 : 6;
      load_measurements(m_step);
      if (step == 0) begin
        for (int g = 0; g < int'(NP / 4); g++) begin
          for (int l = 0; l < int'(LANES); l++) begin
            inj_data[l].px = q(10.0 + urnd(-1.0, 1.0));
            inj_data[l].py = q(12.0 + urnd(-1.0, 1.0));
            inj_data[l].vx = q(1.0 + urnd(-0.3, 0.3));
            inj_data[l].vy = q(0.5 + urnd(-0.3, 0.3));
            inj_data[l].w  = 32'h0001_0000;
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
      err = $sqrt((r(est[0]) - tx_) ** 2 + (r(est[1]) - ty_) ** 2);
      $display("step %0d est (%f, %f) true (%f, %f) err %f latency %0d cycles", step,
               r(est[0]), r(est[1]), tx_, ty_, err, step_cycles);
      checks++;
      if (!est_ok || err > 0.5) begin
        failures++;
        $display("FAIL tracking error %f at step %0d", err, step);
      end
      exp_lat = int'(J) * int'(NP / 4) * (20 + 2 * (m_step - 1)) + (int'(J) - 1) * int'(LAT)
              + 2 * int'(J) + 36;
      checks++;
      if (int'(step_cycles) != exp_lat) begin
        failures++;
        $display("FAIL step latency %0d expected %0d", step_cycles, exp_lat);
      end
    end
    wait (busy == '0);
    checks++;
    if (n_pass != int'(J * STEPS)) begin
      failures++;
      $display("FAIL %0d panel passes, expected %0d", n_pass, J * STEPS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
