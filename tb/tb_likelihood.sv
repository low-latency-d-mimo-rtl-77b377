// Self-checking testbench of likelihood: random particles around a panel,
// 0..6 measurements, the sum of exp(-E) compared with a real-valued model
// (1.5 % + 2e-3 tolerance covers the polynomial exponential), and the
// latency 9 + 2(M-1) cycles of the paper.
module tb_likelihood;
  import loc_pkg::*;
  localparam int unsigned MAX_M = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  lane_fix_t in_px, in_py, in_u;
  logic [$clog2(MAX_M+1)-1:0] m_count;
  logic [$clog2(MAX_M)-1:0] meas_idx;
  meas_t meas, mm [MAX_M];
  fix_t pa_x, pa_y;
  ufix_t kd, ka, ku;
  lane_wgt_t out_s;

  assign meas = mm[meas_idx];
  likelihood #(.MAX_M(MAX_M)) dut (.*);

  function automatic real urnd(input real lo, input real hi);
    int unsigned x;
    x = $urandom;
    return lo + (hi - lo) * (real'(x) / 4294967296.0);
  endfunction
  function automatic real r(input fix_t v); return real'(v) / 65536.0; endfunction
  function automatic fix_t q(input real v); return fix_t'($rtoi(v * 65536.0)); endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int big = 0;
    pa_x = q(2.0); pa_y = q(-1.0);
    kd = q(2.0); ka = q(0.5); ku = q(1.0);
    in_px = '0; in_py = '0; in_u = '0; m_count = '0;
    for (int m = 0; m < int'(MAX_M); m++) mm[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      real es[LANES];
      int M, lat;
      @(negedge clk);
      M = (t < 3) ? t : $urandom_range(1, 6);
      m_count = 4'(M);
      for (int m = 0; m < M; m++) begin
        real ang, dd;
        ang = urnd(-3.1, 3.1);
        dd  = urnd(0.5, 8.0);
        mm[m].d = q(dd);
        mm[m].c = q($cos(ang));
        mm[m].s = q($sin(ang));
        mm[m].u = q(urnd(0.5, 3.0));
      end
      for (int l = 0; l < int'(LANES); l++) begin
        // place some particles right at a measurement so that S is large
        if (M > 0 && (l == 0)) begin
          in_px[l] = q(r(pa_x) + r(mm[0].d) * r(mm[0].c) + urnd(-0.3, 0.3));
          in_py[l] = q(r(pa_y) + r(mm[0].d) * r(mm[0].s) + urnd(-0.3, 0.3));
          in_u[l]  = q(r(mm[0].u) + urnd(-0.3, 0.3));
        end else begin
          in_px[l] = q(urnd(-6.0, 10.0));
          in_py[l] = q(urnd(-9.0, 7.0));
          in_u[l]  = q(urnd(0.5, 3.0));
        end
        es[l] = 0.0;
        for (int m = 0; m < M; m++) begin
          real dx, dy, ed, et, eu, e;
          dx = r(in_px[l]) - r(pa_x);
          dy = r(in_py[l]) - r(pa_y);
          ed = r(mm[m].c) * dx + r(mm[m].s) * dy - r(mm[m].d);
          et = r(mm[m].c) * dy - r(mm[m].s) * dx;
          eu = r(in_u[l]) - r(mm[m].u);
          e  = r(kd) * ed * ed + r(ka) * et * et + r(ku) * eu * eu;
          es[l] += $exp(-e);
        end
        if (es[l] > 0.3) big++;
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      in_px = '0; in_py = '0; in_u = '0;
      lat = 1;
      while (!out_valid && lat < 100) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 9 + 2 * ((M == 0 ? 1 : M) - 1)) begin
        failures++;
        $display("FAIL latency %0d for M=%0d", lat, M);
      end
      for (int l = 0; l < int'(LANES); l++) begin
        real got, tol;
        got = real'(out_s[l]) / 65536.0;
        tol = 0.015 * es[l] + 2e-3;
        checks++;
        if (got - es[l] > tol || es[l] - got > tol) begin
          failures++;
          $display("FAIL S lane %0d M=%0d got %f exp %f", l, M, got, es[l]);
        end
      end
    end
    checks++;
    if (big < 20) begin
      failures++;
      $display("FAIL too few particles near a measurement (%0d)", big);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
