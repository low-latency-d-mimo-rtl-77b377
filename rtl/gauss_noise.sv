// Parallel pseudo-Gaussian noise source.
//
// N independent xorshift32 generators, one per output.  Each output is the
// sum of four 16-bit uniforms taken from two xorshift states (Irwin-Hall
// with four uniforms), centred and scaled by sqrt(3) so that it has zero
// mean and unit variance, in Q16.16.  A new sample appears on every output
// each clock cycle.  uni[i] is the raw 32-bit uniform word of generator i.
// The paper only states that Gaussian process and regularization noise is
// applied; the generator itself is this design's choice.
module gauss_noise
  import loc_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [31:0]      seed,
  output fix_t  [N-1:0]    g,
  output logic [N-1:0][31:0] uni
);
  logic [N-1:0][31:0] st_a, st_b;

  function automatic logic [31:0] xs32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) begin
        st_a[i] <= seed ^ (32'h9E37_79B9 * (i + 1)) ^ 32'h1;
        st_b[i] <= seed ^ (32'h85EB_CA6B * (i + 3)) ^ 32'h2;
      end
    end else begin
      for (int i = 0; i < int'(N); i++) begin
        st_a[i] <= xs32(st_a[i]);
        st_b[i] <= xs32(st_b[i]);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      logic [17:0] s;
      logic signed [63:0] c;
      s = 18'(st_a[i][31:16]) + 18'(st_a[i][15:0]) + 18'(st_b[i][31:16]) + 18'(st_b[i][15:0]);
      c = 64'($signed({1'b0, s})) - 64'sd131072;  // minus mean 4*0.5 (Q16)
      g[i]   = fix_t'((c * 64'sd113512) >>> 16);  // times sqrt(3)
      uni[i] = st_a[i] ^ st_b[i];
    end
  end
endmodule
