// Self-checking testbench of agent_belief: xi = (1 - p) + p * beta and the
// new weight w * xi / 2^32 per lane, the weighted-state accumulators over a
// run of groups, clear, and the 3-cycle latency.
module tb_agent_belief;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0, out_valid;
  group_t in_p, out_p;
  lane_wgt_t in_beta;
  ufix_t p_exist;
  logic [63:0] w_sum;
  logic signed [3:0][63:0] wx_sum;

  agent_belief dut (.*);

  function automatic real urnd(input real lo, input real hi);
    int unsigned x;
    x = $urandom;
    return lo + (hi - lo) * (real'(x) / 4294967296.0);
  endfunction
  function automatic real r(input fix_t v); return real'(v) / 65536.0; endfunction
  function automatic fix_t q(input real v); return fix_t'($rtoi(v * 65536.0)); endfunction

  task automatic chk(input string what, input real got, input real exp, input real rtol,
                    input real atol = 2.0);
    real tol;
    tol = rtol * (exp < 0 ? -exp : exp) + atol;
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
    in_p = '0; in_beta = '0; p_exist = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      real es, ex[4];
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      es = 0;
      for (int k = 0; k < 4; k++) ex[k] = 0;
      for (int t = 0; t < 30; t++) begin
        real ew[LANES];
        int lat;
        p_exist = $urandom_range(0, 65536);
        for (int l = 0; l < int'(LANES); l++) begin
          real xi;
          in_p[l].px = q(urnd(-20.0, 20.0));
          in_p[l].py = q(urnd(-20.0, 20.0));
          in_p[l].vx = q(urnd(-2.0, 2.0));
          in_p[l].vy = q(urnd(-2.0, 2.0));
          in_p[l].w  = $urandom;
          in_beta[l] = $urandom_range(0, 200 * 65536);
          xi = (1.0 - real'(p_exist) / 65536.0) + real'(p_exist) / 65536.0 * real'(in_beta[l]) / 65536.0;
          ew[l] = real'(in_p[l].w) * xi / 65536.0;
          es += ew[l];
          ex[0] += ew[l] * r(in_p[l].px);
          ex[1] += ew[l] * r(in_p[l].py);
          ex[2] += ew[l] * r(in_p[l].vx);
          ex[3] += ew[l] * r(in_p[l].vy);
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
        for (int l = 0; l < int'(LANES); l++) begin
          chk("w", real'(out_p[l].w), ew[l], 1e-4);
          checks++;
          if (out_p[l].px != in_p[l].px || out_p[l].vy != in_p[l].vy) begin
            failures++;
            $display("FAIL state changed");
          end
        end
      end
      chk("w_sum", real'(w_sum), es, 1e-4);
      // truncation: up to 1 weight unit times |x| <= 20 per particle
      for (int k = 0; k < 4; k++) chk("wx_sum", real'($signed(wx_sum[k])), ex[k], 1e-4, 25.0 * 120);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
