// Distributed LoS-based agent localizer: J identical panel units of a
// panelized distributed-MIMO system, forming a daisy chain.
//
// Panel 0 is the first of the chain (full motion-model prediction), panel
// J-1 the last (agent estimate and resampling).  The agent message of panel
// j leaves on tx_*[j] and must be carried by the inter-panel link to
// rx_*[j+1]; the last panel's tx carries the resampled belief that the link
// returns to rx_*[0] for the next time step, which closes the ring.  The
// links themselves (25G Ethernet in the reference system, about 174 cycles
// at 200 MHz per hop) are outside this module, so the streams are ports.
// Measurements of each panel come from its own channel estimator, also
// outside, through the shared meas_waddr/meas_wdata bus with one write
// enable per panel.
//
// step_cycles measures the localization latency of the last completed time
// step: from the cycle after the final beat of the message into panel 0 to
// the cycle est_valid is raised.  With M measurements per panel this is
//   J*(NP/4)*(20+2(M-1)) + (J-1)*L + 2*J + 36
// where L is the link latency in cycles (174 in the reference system).  The
// first two terms are the paper's latency equation; 2 cycles per panel are
// the start-up after the last received beat and 36 cycles are the
// reciprocal-based estimate at the last panel.  (Lint reports rst_n as
// used both synchronously and asynchronously; that is the panel units'
// handshake assertion, which is disabled during reset.)
module dmimo_loc_top
  import loc_pkg::*;
#(
  parameter int unsigned J     = 24,
  parameter int unsigned NP    = 4096,
  parameter int unsigned MAX_M = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  model_cfg_t                        cfg,
  input  fix_t        [J-1:0]               pa_x,
  input  fix_t        [J-1:0]               pa_y,
  input  logic        [31:0]                seed,
  input  logic                              init,
  input  logic        [J-1:0]               meas_we,
  input  logic        [$clog2(MAX_M)-1:0]   meas_waddr,
  input  meas_t                             meas_wdata,
  input  logic        [J-1:0][$clog2(MAX_M+1)-1:0] meas_count,
  input  logic        [J-1:0]               rx_valid,
  input  logic        [J-1:0]               rx_last,
  input  group_t      [J-1:0]               rx_data,
  output logic        [J-1:0]               tx_valid,
  output logic        [J-1:0]               tx_last,
  output group_t      [J-1:0]               tx_data,
  output logic        [J-1:0]               busy,
  output logic        [J-1:0]               pass_done,
  output logic        [J-1:0][31:0]         pass_cycles,
  output logic        [J-1:0][4:0]          wshift,
  output logic        [J-1:0]               pa_valid,
  output ufix_t       [J-1:0]               pa_exist,
  output logic        [J-1:0]               pa_detected,
  output fix_t        [J-1:0]               pa_u_hat,
  output logic                              est_valid,
  output logic                              est_ok,
  output fix_t        [3:0]                 est,
  output logic        [31:0]                step_cycles
);
  logic [J-1:0]            ev, eo;
  fix_t [J-1:0][3:0]       e;

  for (genvar j = 0; j < int'(J); j++) begin : g_panel
    panel_unit #(.NP(NP), .MAX_M(MAX_M)) u_panel (
      .clk, .rst_n, .cfg, .pa_x(pa_x[j]), .pa_y(pa_y[j]),
      .is_first(j == 0), .is_last(j == int'(J) - 1),
      .seed(seed ^ (32'h2545_F491 * (j + 1))), .init,
      .meas_we(meas_we[j]), .meas_waddr, .meas_wdata, .meas_count(meas_count[j]),
      .rx_valid(rx_valid[j]), .rx_last(rx_last[j]), .rx_data(rx_data[j]),
      .tx_valid(tx_valid[j]), .tx_last(tx_last[j]), .tx_data(tx_data[j]),
      .busy(busy[j]), .pass_done(pass_done[j]), .pass_cycles(pass_cycles[j]),
      .wshift(wshift[j]), .pa_valid(pa_valid[j]), .pa_exist(pa_exist[j]),
      .pa_detected(pa_detected[j]), .pa_u_hat(pa_u_hat[j]),
      .est_valid(ev[j]), .est_ok(eo[j]), .est(e[j])
    );
  end

  assign est_valid = ev[J-1];
  assign est_ok    = eo[J-1];
  assign est       = e[J-1];

  // step latency counter
  logic        timing;
  logic [31:0] cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timing      <= 1'b0;
      cnt         <= '0;
      step_cycles <= '0;
    end else begin
      if (rx_valid[0] && rx_last[0]) begin
        timing <= 1'b1;
        cnt    <= '0;
      end else if (timing) begin
        cnt <= cnt + 1'b1;
        if (est_valid) begin
          timing      <= 1'b0;
          step_cycles <= cnt;
        end
      end
    end
  end
endmodule
