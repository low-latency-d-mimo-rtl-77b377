// Self-checking testbench of sys_resampler (NP = 64): random weight sets,
// including one dominant particle, sparse weights and a zero tail.  Checks
// that NP outputs come with consecutive k within 2 NP cycles, that ancestors
// are non-decreasing, and that every particle is copied floor or ceil of
// NP * w_i / total times (the defining property of systematic resampling).
module tb_sys_resampler;
  localparam int unsigned NP = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, out_valid, done, busy;
  logic [63:0] total;
  logic [31:0] u_rand, rd_w;
  logic [5:0] rd_idx, out_k, out_anc;
  logic [31:0] w [NP];

  assign rd_w = w[rd_idx];
  sys_resampler #(.NP(NP)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    total = '0; u_rand = '0;
    for (int i = 0; i < int'(NP); i++) w[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int cnt [NP];
      int n, cyc, last_anc;
      logic [63:0] tot;
      @(negedge clk);
      tot = 0;
      for (int i = 0; i < int'(NP); i++) begin
        case (t % 3)
          0: w[i] = $urandom >> 4;
          1: w[i] = ($urandom_range(0, 3) == 0) ? $urandom >> 8 : 0;
          default: w[i] = (i < 10) ? $urandom >> 12 : 0;
        endcase
        if (t % 5 == 0 && i == 7) w[i] = 32'hF000_0000;
        tot += 64'(w[i]);
        cnt[i] = 0;
      end
      if (tot == 0) begin
        w[3] = 1000;
        tot = 1000;
      end
      total = tot;
      u_rand = $urandom;
      start = 1;
      @(negedge clk);
      start = 0;
      n = 0; cyc = 0; last_anc = 0;
      while (n < int'(NP) && cyc < 4 * int'(NP)) begin
        if (out_valid) begin
          checks++;
          if (int'(out_k) != n || int'(out_anc) < last_anc) begin
            failures++;
            $display("FAIL order k=%0d n=%0d anc=%0d last=%0d", out_k, n, out_anc, last_anc);
          end
          cnt[out_anc]++;
          last_anc = int'(out_anc);
          n++;
        end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (n != int'(NP) || cyc > 2 * int'(NP) + 2) begin
        failures++;
        $display("FAIL count %0d cycles %0d", n, cyc);
      end
      for (int i = 0; i < int'(NP); i++) begin
        real e;
        e = real'(NP) * real'(w[i]) / real'(tot);
        checks++;
        if (real'(cnt[i]) < e - 1.0001 || real'(cnt[i]) > e + 1.0001) begin
          failures++;
          $display("FAIL copies of %0d: %0d, expected %f", i, cnt[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
