// dw_post_process: the Depthwise Post Process.
//
// Bias addition, requantization and ReLU of the depthwise result of one
// channel, giving one element of F2 that is broadcast to the projection
// engines. Steps from the paper; arithmetic as in dsc_pkg::requant.
//
// Timing: one cycle latency; frozen while en is low.
module dw_post_process
  import dsc_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    en,
  input  logic    in_valid,
  input  acc_t    raw,
  input  qparam_t q,
  input  int8_t   zp,
  input  int8_t   act_min,
  input  int8_t   act_max,
  output logic    out_valid,
  output int8_t   f2
);
  requantizer u_rq (.clk, .en, .acc(raw), .q, .zp, .act_min, .act_max, .y(f2));

  always_ff @(posedge clk)
    if (rst) out_valid <= 1'b0;
    else if (en) out_valid <= in_valid;
endmodule
