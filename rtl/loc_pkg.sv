// Shared types, constants and arithmetic helpers of the distributed LoS
// particle localizer.
//
// Number format: every datapath word is 32 bits, as in the reference FPGA
// implementation.  Signed quantities (positions, velocities, amplitudes,
// noise samples) are Q16.16, probabilities are unsigned Q16.16 with 1.0 =
// 65536, particle weights are plain unsigned 32-bit integers whose common
// scale is irrelevant (only ratios matter).  A group of LANES = 4 particles
// is processed in parallel, which is the parallelism of the reference
// implementation; larger particle counts are time multiplexed over groups.
// The Q16.16 split, the weight format and all struct layouts are choices of
// this design.
package loc_pkg;

  localparam int unsigned FRAC  = 16;
  localparam int unsigned LANES = 4;
  localparam logic [31:0] ONE   = 32'h0001_0000;

  typedef logic signed [31:0] fix_t;  // Q16.16 signed
  typedef logic        [31:0] ufix_t; // Q16.16 unsigned (probabilities)
  typedef logic        [31:0] wgt_t;  // particle weight

  // One agent particle: position, velocity and weight.
  typedef struct packed {
    fix_t px;
    fix_t py;
    fix_t vx;
    fix_t vy;
    wgt_t w;
  } particle_t;

  typedef particle_t [LANES-1:0] group_t;  // one beat of the agent message
  typedef fix_t      [LANES-1:0] lane_fix_t;
  typedef wgt_t      [LANES-1:0] lane_wgt_t;

  // One channel-estimator measurement z_m = [distance, AoA, amplitude].
  // The AoA arrives as its unit vector (cos, sin) in the panel frame.
  typedef struct packed {
    fix_t d;
    fix_t c;
    fix_t s;
    fix_t u;
  } meas_t;

  // Model constants shared by all panels (Q16.16 unless noted).
  typedef struct packed {
    fix_t  dt;        // time step [s]
    fix_t  sig_a;     // agent acceleration noise std (first panel)
    fix_t  sig_r;     // position regularization noise std (later panels)
    fix_t  sig_rv;    // velocity regularization noise std (later panels)
    fix_t  sig_u;     // amplitude random-walk std
    ufix_t p_s;       // LoS survival probability
    ufix_t p_b;       // LoS birth probability
    ufix_t p_d;       // detection probability
    ufix_t lr_scale;  // p_d / (mu_fa * f_fa): LoS vs. false-alarm density ratio
    ufix_t kd;        // 1/(2 sigma_d^2), radial residual
    ufix_t ka;        // 1/(2 sigma_t^2), tangential residual
    ufix_t ku;        // 1/(2 sigma_u^2), amplitude residual
    ufix_t p_de;      // LoS detection threshold
    ufix_t p_init;    // initial LoS existence probability
    fix_t  u_init;    // initial amplitude particle value
  } model_cfg_t;

  // Q16.16 signed multiply, truncating.
  function automatic fix_t mulq(input fix_t a, input fix_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fix_t'(p >>> FRAC);
  endfunction

  // Saturate a signed 64-bit value to 32 bits.
  function automatic fix_t sat32(input logic signed [63:0] v);
    if (v > 64'sh7FFF_FFFF) return 32'sh7FFF_FFFF;
    if (v < -64'sh8000_0000) return 32'sh8000_0000;
    return fix_t'(v);
  endfunction

  // Saturate an unsigned 64-bit value to 32 bits.
  function automatic logic [31:0] usat32(input logic [63:0] v);
    return (v[63:32] != '0) ? 32'hFFFF_FFFF : v[31:0];
  endfunction

  // Leading zeros of a 32-bit word (32 for zero).
  function automatic logic [5:0] clz32(input logic [31:0] v);
    logic [5:0] n;
    logic       found;
    n = 6'd32;
    found = 1'b0;
    for (int i = 31; i >= 0; i--) begin
      if (!found && v[i]) begin
        n = 6'(31 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

  // Leading zeros of a 64-bit word (64 for zero).
  function automatic logic [6:0] clz64(input logic [63:0] v);
    logic [6:0] n;
    logic       found;
    n = 7'd64;
    found = 1'b0;
    for (int i = 63; i >= 0; i--) begin
      if (!found && v[i]) begin
        n = 7'(63 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

endpackage
