// Self-checking testbench of estimator: random denominators over a wide
// range and signed numerators chosen so that the ratio lies within +-30000,
// compared with num * 2^16 / den (within 2 LSB), the zero-denominator flag,
// and the 35-cycle latency.
module tb_estimator;
  import loc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done, ok;
  logic [63:0] den;
  logic signed [3:0][63:0] num;
  fix_t [3:0] q;

  estimator #(.N_NUM(4)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    den = '0; num = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      real ex[4];
      int lat;
      @(negedge clk);
      if (t == 5) den = '0;
      else den = {$urandom, $urandom} >> $urandom_range(0, 50);
      if (den == 0 && t != 5) den = 1;
      for (int k = 0; k < 4; k++) begin
        real ratio, n;
        int unsigned x;
        x = $urandom;
        ratio = (real'(x) / 4294967296.0 - 0.5) * 60000.0;
        n = ratio * real'(den) / 65536.0;
        num[k] = 64'($rtoi(n));
        ex[k] = real'($signed(num[k])) * 65536.0 / real'(den);
      end
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done && lat < 100) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != 35) begin
        failures++;
        $display("FAIL latency %0d", lat);
      end
      checks++;
      if (ok != (den != 0)) begin
        failures++;
        $display("FAIL ok flag");
      end
      if (den != 0)
        for (int k = 0; k < 4; k++) begin
          checks++;
          if (real'(q[k]) - ex[k] > 2.0 || ex[k] - real'(q[k]) > 2.0) begin
            failures++;
            $display("FAIL q den=%0d num=%0d got %0d exp %f", den, $signed(num[k]), q[k], ex[k]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
