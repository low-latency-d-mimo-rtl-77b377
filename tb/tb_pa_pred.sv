// Self-checking testbench of pa_pred: LoS existence prediction and
// amplitude random walk (with its lower clamp) against a real-valued model,
// and the 3-cycle latency.
module tb_pa_pred;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  lane_fix_t in_u, noise, out_u;
  ufix_t p_e, p_s, p_b, p_pred;
  fix_t sig_u;

  pa_pred dut (.*);

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int clamps = 0;
    in_u = '0; noise = '0;
    p_s = q(0.95); p_b = q(0.02); sig_u = q(0.3); p_e = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      real eu[LANES], ep;
      int lat;
      @(negedge clk);
      p_e = ufix_t'($urandom_range(0, 65536));
      ep = 0.95 * r(p_e) + 0.02 * (1.0 - r(p_e));
      for (int l = 0; l < int'(LANES); l++) begin
        in_u[l]  = q(urnd(0.0, 3.0));
        noise[l] = q(urnd(-3.0, 3.0));
        eu[l] = r(in_u[l]) + 0.3 * r(noise[l]);
        if (eu[l] < 1.0 / 65536.0) begin
          eu[l] = 1.0 / 65536.0;
          clamps++;
        end
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
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
      chk("p_pred", r(p_pred), ep, 1e-3);
      for (int l = 0; l < int'(LANES); l++) chk("u", r(out_u[l]), eu[l], 1e-3);
    end
    checks++;
    if (clamps == 0) begin
      failures++;
      $display("FAIL clamp never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
