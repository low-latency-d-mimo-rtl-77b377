// Behavioural model of one inter-panel link (a 25G Ethernet hop in the
// reference system).  Not synthesizable design: it only delays the agent
// message stream by LAT clock cycles (174 cycles = 0.87 us at 200 MHz by
// default), which is how the link enters the latency of the chain.  No
// framing, no loss, no back-pressure.
module eth_link_model
  import loc_pkg::*;
#(
  parameter int unsigned LAT = 174
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_last,
  input  group_t in_data,
  output logic   out_valid,
  output logic   out_last,
  output group_t out_data
);
  logic   v [LAT];
  logic   l [LAT];
  group_t d [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LAT); i++) begin
        v[i] <= 1'b0;
        l[i] <= 1'b0;
      end
    end else begin
      v[0] <= in_valid;
      l[0] <= in_last;
      for (int i = 1; i < int'(LAT); i++) begin
        v[i] <= v[i-1];
        l[i] <= l[i-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    d[0] <= in_data;
    for (int i = 1; i < int'(LAT); i++) d[i] <= d[i-1];
  end

  assign out_valid = v[LAT-1];
  assign out_last  = l[LAT-1];
  assign out_data  = d[LAT-1];
endmodule
