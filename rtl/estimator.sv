// MMSE estimate as a ratio of accumulated sums: q_k = num_k / den for
// N_NUM numerators sharing one denominator, Q16.16 result.
//
// Used for the agent state estimate x_hat = sum(w x) / sum(w) (N_NUM = 4:
// px, py, vx, vy) at the last panel, and inside every panel for the LoS
// existence probability and the amplitude estimate.  The numerators are in
// the units produced by agent_belief / pa_belief: num = sum (w * x_q16) >> 16,
// so q_k(Q16.16) = num_k * 2^16 / den.
//
// How: den is normalized to [2^63, 2^64) by a left shift z, a restoring
// divider computes r = floor(2^95 / den_n) (33 bits, one bit per cycle), and
// each numerator is multiplied by r and shifted right by 79 - z.  One
// reciprocal serves all numerators.  The paper budgets 3 + log2(NP)/2
// cycles for the estimate (an adder tree); here the sums are accumulated
// while the particles stream past, and the normalization by the weight sum
// is this design's reciprocal divider, at the cost of the cycles below.
//
// Timing: start in cycle t (num/den sampled), done pulses in cycle t+35 with
// q valid from then until the next start.  ok = 0 if den was zero.
module estimator
  import loc_pkg::*;
#(
  parameter int unsigned N_NUM = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic        [63:0]            den,
  input  logic signed [N_NUM-1:0][63:0] num,
  output logic                          done,
  output logic                          ok,
  output fix_t        [N_NUM-1:0]       q
);
  typedef enum logic [1:0] {IDLE, DIV, MUL} state_t;
  state_t st;
  logic [63:0] d_n;
  logic [6:0]  z;
  logic [64:0] rem;
  logic [32:0] rcp;
  logic [5:0]  cnt;
  logic signed [N_NUM-1:0][63:0] nh;
  logic [64:0] r2;
  fix_t [N_NUM-1:0] q_nxt;

  always_comb begin
    r2 = rem << 1;
    for (int k = 0; k < int'(N_NUM); k++) begin
      logic signed [127:0] p;
      p = 128'($signed(nh[k])) * $signed({95'd0, rcp});
      q_nxt[k] = sat32(64'(p >>> (7'd79 - z)));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= IDLE;
      done <= 1'b0;
      ok   <= 1'b0;
      q    <= '0;
      cnt  <= '0;
      rem  <= '0;
      rcp  <= '0;
      d_n  <= '0;
      z    <= '0;
      nh   <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        IDLE: if (start) begin
          z    <= clz64(den);
          d_n  <= den << clz64(den);
          nh   <= num;
          rem  <= 65'h1 << 62;
          rcp  <= '0;
          cnt  <= 6'd33;
          st   <= DIV;
        end
        DIV: begin
          if (r2 >= {1'b0, d_n}) begin
            rem <= r2 - {1'b0, d_n};
            rcp <= {rcp[31:0], 1'b1};
          end else begin
            rem <= r2;
            rcp <= {rcp[31:0], 1'b0};
          end
          cnt <= cnt - 1'b1;
          if (cnt == 6'd1) st <= MUL;
        end
        MUL: begin
          q <= q_nxt;
          ok   <= (d_n != '0);
          done <= 1'b1;
          st   <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
