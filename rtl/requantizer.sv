// requantizer: one lane of post-processing, registered.
//
// Adds the channel bias to a 32-bit accumulator, rescales it with the Q31
// multiplier and shift (round half up), adds the output zero point and clamps
// to [act_min, act_max]. With act_min at the zero point the clamp is the ReLU
// of the expansion and depthwise stages; the projection stage sets the full
// int8 range (linear bottleneck). Bias addition, requantization and ReLU are
// the paper's post-processing steps; the fixed-point form is dsc_pkg::requant.
//
// Timing: result registered one cycle after the inputs; frozen while en is low.
module requantizer
  import dsc_pkg::*;
(
  input  logic    clk,
  input  logic    en,
  input  acc_t    acc,
  input  qparam_t q,
  input  int8_t   zp,
  input  int8_t   act_min,
  input  int8_t   act_max,
  output int8_t   y
);
  always_ff @(posedge clk)
    if (en) y <= requant(acc, q, zp, act_min, act_max);
endmodule
