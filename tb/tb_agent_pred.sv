// Self-checking testbench of agent_pred: random particles and noise in both
// modes (first panel: constant-velocity model; later panels:
// regularization), compared with a real-valued model, plus the 3-cycle
// latency and the weight renormalizing shift.
module tb_agent_pred;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, first = 0, out_valid;
  group_t in_p, out_p;
  fix_t [LANES-1:0][3:0] noise;
  logic [4:0] wshift;
  fix_t dt, sig_a, sig_r, sig_rv;

  agent_pred dut (.*);

  function automatic real urnd(input real lo, input real hi);
    int unsigned x;
    x = $urandom;
    return lo + (hi - lo) * (real'(x) / 4294967296.0);
  endfunction
  function automatic real r(input fix_t v); return real'(v) / 65536.0; endfunction
  function automatic fix_t q(input real v); return fix_t'($rtoi(v * 65536.0)); endfunction

  task automatic chk(input string what, input real got, input real exp, input real tol);
    checks++;
    if ((got - exp) > tol || (exp - got) > tol) begin
      failures++;
      $display("FAIL %s got %f exp %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dt = q(0.1); sig_a = q(0.5); sig_r = q(0.05); sig_rv = q(0.02);
    in_p = '0; noise = '0; wshift = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      real epx[LANES], epy[LANES], evx[LANES], evy[LANES];
      logic [31:0] ew[LANES];
      int lat;
      @(negedge clk);
      first  = (t % 2 == 0);
      wshift = 5'($urandom_range(0, 8));
      for (int l = 0; l < int'(LANES); l++) begin
        in_p[l].px = q(urnd(-30.0, 30.0));
        in_p[l].py = q(urnd(-30.0, 30.0));
        in_p[l].vx = q(urnd(-2.0, 2.0));
        in_p[l].vy = q(urnd(-2.0, 2.0));
        in_p[l].w  = $urandom_range(0, 32'h007F_FFFF);
        for (int k = 0; k < 4; k++) noise[l][k] = q(urnd(-3.0, 3.0));
        if (first) begin
          real ax, ay;
          ax = r(sig_a) * r(noise[l][0]);
          ay = r(sig_a) * r(noise[l][1]);
          epx[l] = r(in_p[l].px) + r(dt) * r(in_p[l].vx) + r(dt) * r(dt) / 2.0 * ax;
          epy[l] = r(in_p[l].py) + r(dt) * r(in_p[l].vy) + r(dt) * r(dt) / 2.0 * ay;
          evx[l] = r(in_p[l].vx) + r(dt) * ax;
          evy[l] = r(in_p[l].vy) + r(dt) * ay;
        end else begin
          epx[l] = r(in_p[l].px) + r(sig_r) * r(noise[l][0]);
          epy[l] = r(in_p[l].py) + r(sig_r) * r(noise[l][1]);
          evx[l] = r(in_p[l].vx) + r(sig_rv) * r(noise[l][2]);
          evy[l] = r(in_p[l].vy) + r(sig_rv) * r(noise[l][3]);
        end
        ew[l] = in_p[l].w << wshift;
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      in_p = '0;
      noise = '0;
      lat = 1;
      while (!out_valid && lat < 20) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 3) begin
        failures++;
        $display("FAIL latency %0d", lat);
      end
      for (int l = 0; l < int'(LANES); l++) begin
        chk("px", r(out_p[l].px), epx[l], 1e-3);
        chk("py", r(out_p[l].py), epy[l], 1e-3);
        chk("vx", r(out_p[l].vx), evx[l], 1e-3);
        chk("vy", r(out_p[l].vy), evy[l], 1e-3);
        checks++;
        if (out_p[l].w != ew[l]) begin
          failures++;
          $display("FAIL w %h exp %h", out_p[l].w, ew[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
