// Systematic resampling of NP weighted particles.
//
// Given the weights w_0 .. w_{NP-1} (read one per cycle through rd_idx /
// rd_w, combinational read) and their sum total, it emits NP ancestor
// indices: output k takes the smallest i whose running sum C_i exceeds
//   T_k = U + k * step,  step = total / NP (a shift), U uniform in [0, step)
// (U = (u_rand * step) >> 32).  A single pass walks i and k together; each
// cycle either emits one output (T_k < C_i) or advances i, so a run takes
// between NP and 2 NP cycles.  The paper names systematic resampling for the
// agent and PA beliefs and notes it is a latency bottleneck; this
// one-output-per-cycle form is this design's.
//
// Timing: start in cycle t samples total and u_rand; out_valid/out_k/out_anc
// come in later cycles, one output per cycle at most; done pulses together
// with the last output (k = NP-1).  NP must be a power of two.
module sys_resampler #(
  parameter int unsigned NP = 4096
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [63:0]            total,
  input  logic [31:0]            u_rand,
  output logic [$clog2(NP)-1:0]  rd_idx,
  input  logic [31:0]            rd_w,
  output logic                   out_valid,
  output logic [$clog2(NP)-1:0]  out_k,
  output logic [$clog2(NP)-1:0]  out_anc,
  output logic                   done,
  output logic                   busy
);
  localparam int unsigned LG = $clog2(NP);

  logic [63:0] step, thr, cum_prev, cum_i;
  logic [LG-1:0] i, k;

  assign rd_idx = i;
  assign cum_i  = cum_prev + 64'(rd_w);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      done      <= 1'b0;
      out_k     <= '0;
      out_anc   <= '0;
      i         <= '0;
      k         <= '0;
      step      <= '0;
      thr       <= '0;
      cum_prev  <= '0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (start) begin
        busy     <= 1'b1;
        i        <= '0;
        k        <= '0;
        cum_prev <= '0;
        step     <= total >> LG;
        thr      <= 64'((128'(u_rand) * 128'(total >> LG)) >> 32);
      end else if (busy) begin
        if (thr < cum_i || i == LG'(NP - 1)) begin
          out_valid <= 1'b1;
          out_k     <= k;
          out_anc   <= i;
          thr       <= thr + step;
          k         <= k + 1'b1;
          if (k == LG'(NP - 1)) begin
            done <= 1'b1;
            busy <= 1'b0;
          end
        end else begin
          cum_prev <= cum_i;
          i        <= i + 1'b1;
        end
      end
    end
  end
endmodule
