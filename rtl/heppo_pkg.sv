// heppo_pkg -- shared constants, types and arithmetic of the GAE accelerator.
//
// Number formats. Rewards and values live in the stack memory as 8-bit
// uniform codewords (two's complement). After fetching, the datapath works on
// 32-bit signed fixed point with FRAC fractional bits (Q16.16 by default). The
// 8-bit width and the 32-bit datapath width are the published ones; the binary
// point, the quantizer step (2^-QFRAC, i.e. a range of +/-4 standard
// deviations for 8-bit codes) and truncating multiplication are this design's
// choices.
//
// Quantizer conventions used on both sides of the memory:
//   reward  r   = code * 2^-QFRAC                       (already standardized)
//   value   v   = code * 2^-QFRAC * sigma_v + mu_v      (block de-standardization)
//   adv     code = sat(round(adv / 2^-QFRAC))
//   rtg     code = sat(round((rtg - mu_v) * inv_sigma_v / 2^-QFRAC))
package heppo_pkg;

  // ---- sizes (defaults are the published configuration) --------------------
  parameter int unsigned DW     = 32;   // datapath width after de-quantization
  parameter int unsigned FRAC   = 16;   // fractional bits of the datapath
  parameter int unsigned QW     = 8;    // stored codeword width
  parameter int unsigned QFRAC  = 5;    // codeword step is 2^-QFRAC

  typedef logic signed [DW-1:0] fx_t;   // fixed-point datapath word
  typedef logic signed [QW-1:0] q_t;    // stored codeword

  // Fixed-point multiply, truncating toward minus infinity.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return fx_t'(p >>> FRAC);
  endfunction

  // Codeword -> fixed point (standardized domain).
  function automatic fx_t dequant(q_t q);
    fx_t w;
    w = fx_t'(q);
    return fx_t'(w <<< (FRAC - QFRAC));
  endfunction

  // Fixed point (standardized domain) -> codeword, rounded half up, saturated.
  function automatic q_t quant(fx_t x);
    logic signed [DW:0] r;
    logic signed [DW:0] maxq;
    logic signed [DW:0] minq;
    r    = ((DW+1)'(x) + (DW+1)'(1 <<< (FRAC - QFRAC - 1))) >>> (FRAC - QFRAC);
    maxq = (DW+1)'((1 <<< (QW-1)) - 1);
    minq = -(DW+1)'(1 <<< (QW-1));
    if (r > maxq)      return q_t'(maxq);
    else if (r < minq) return q_t'(minq);
    else               return q_t'(r);
  endfunction

  // Is the value saturated by quant()?
  function automatic logic quant_sat(fx_t x);
    logic signed [DW:0] r;
    r = ((DW+1)'(x) + (DW+1)'(1 <<< (FRAC - QFRAC - 1))) >>> (FRAC - QFRAC);
    return (r > (DW+1)'((1 <<< (QW-1)) - 1)) || (r < -(DW+1)'(1 <<< (QW-1)));
  endfunction

  // Widths of the index fields carried with each element. They bound the
  // timesteps per trajectory (2^IDX_W) and the trajectories per batch (2^TRJ_W).
  parameter int unsigned IDX_W  = 16;
  parameter int unsigned TRJ_W  = 16;
  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TRJ_W-1:0] trj_t;

  // ReL -> VaL queue entry: (R_i, Done, i) plus the trajectory it belongs to.
  typedef struct packed {
    fx_t  r;
    idx_t idx;
    trj_t traj;
    logic done;    // last element of the vector (timestep 0)
  } rel_item_t;

  // VaL -> PE queue entry: (R_i, V_i, i, Done) plus the trajectory.
  typedef struct packed {
    fx_t  r;
    fx_t  v;
    idx_t idx;
    trj_t traj;
    logic done;
  } val_item_t;

  // PE result, re-quantized for the write back.
  typedef struct packed {
    q_t   adv;
    q_t   rtg;
    idx_t idx;
    trj_t traj;
  } wb_item_t;

  // Run-time configuration written by the processing system before a run.
  typedef struct packed {
    fx_t gamma;        // discount factor
    fx_t lambda;       // GAE lambda
    fx_t mu_v;         // block mean of the values
    fx_t sigma_v;      // block standard deviation of the values
    fx_t inv_sigma_v;  // 1 / sigma_v, for re-quantizing rewards-to-go
  } cfg_t;

endpackage
