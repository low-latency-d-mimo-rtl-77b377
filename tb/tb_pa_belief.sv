// Self-checking testbench of pa_belief: beta = (1 - p_d) + lr_scale * S and
// v = w * beta / 2^16 per lane against a real-valued model, the pass accumulators
// (sum v, sum w/2^16, sum v*u) over a run of groups, clear, and the 5-cycle
// latency.
module tb_pa_belief;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, in_valid = 0, out_valid;
  lane_wgt_t in_s, in_w, out_beta, out_v;
  lane_fix_t in_u;
  ufix_t p_d, lr_scale;
  logic [63:0] a_sum, w_sum;
  logic signed [63:0] u_sum;

  pa_belief dut (.*);

  function automatic real urnd(input real lo, input real hi);
    int unsigned x;
    x = $urandom;
    return lo + (hi - lo) * (real'(x) / 4294967296.0);
  endfunction
  function automatic fix_t q(input real v); return fix_t'($rtoi(v * 65536.0)); endfunction

  task automatic chk(input string what, input real got, input real exp, input real rtol);
    real tol;
    tol = rtol * (exp < 0 ? -exp : exp) + 2.0;
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
    p_d = q(0.9); lr_scale = q(12.5);
    in_s = '0; in_w = '0; in_u = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      real ea, ew, eu;
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      ea = 0; ew = 0; eu = 0;
      for (int t = 0; t < 30; t++) begin
        real eb[LANES], ev[LANES];
        int lat;
        for (int l = 0; l < int'(LANES); l++) begin
          in_s[l] = $urandom_range(0, 6 * 65536);
          in_w[l] = $urandom;
          in_u[l] = q(urnd(0.01, 4.0));
          eb[l] = 0.1 + 12.5 * real'(in_s[l]) / 65536.0;
          ev[l] = real'(in_w[l]) * eb[l] / 65536.0;
          ea += ev[l];
          ew += real'(in_w[l] >> 16);
          eu += ev[l] * real'(in_u[l]) / 65536.0;
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
        if (lat != 5) begin
          failures++;
          $display("FAIL latency %0d", lat);
        end
        for (int l = 0; l < int'(LANES); l++) begin
          chk("beta", real'(out_beta[l]), eb[l] * 65536.0, 1e-4);
          chk("v", real'(out_v[l]), ev[l], 1e-4);
        end
      end
      chk("a_sum", real'(a_sum), ea, 1e-4);
      chk("w_sum", real'(w_sum), ew, 1e-6);
      chk("u_sum", real'(u_sum), eu, 1e-4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
