// ex_post_process: the Expansion Post Process, nine requantizer lanes.
//
// The nine raw expansion results of one channel m pass through bias addition,
// requantization and ReLU in parallel, giving the 3x3x1 tile of F1 that the
// depthwise engine needs. Window positions that lie outside the feature map
// are padding of F1, not pixels of it, so their lane output is replaced by the
// F1 zero point (ex_zp): the depthwise engine then sees exact zeros there. The
// three steps are the paper's; replacing padded positions at this point, so
// that padding holds for F1 as well as for the input, is this design's
// reading of the paper's on-the-fly padding for the depthwise stage.
//
// Timing: one cycle latency; frozen while en is low.
module ex_post_process
  import dsc_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   en,
  input  logic                   in_valid,
  input  acc_t [EX_ENGINES-1:0]  raw,
  input  logic [EX_ENGINES-1:0]  pos_valid,
  input  qparam_t                q,
  input  int8_t                  zp,
  input  int8_t                  act_min,
  input  int8_t                  act_max,
  output logic                   out_valid,
  output int8_t [EX_ENGINES-1:0] f1
);
  int8_t [EX_ENGINES-1:0] y;
  logic  [EX_ENGINES-1:0] pv_q;
  int8_t                  zp_q;

  for (genvar p = 0; p < EX_ENGINES; p++) begin : g_lane
    requantizer u_rq (.clk, .en, .acc(raw[p]), .q, .zp, .act_min, .act_max, .y(y[p]));
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else if (en) out_valid <= in_valid;
    if (en) begin
      pv_q <= pos_valid;
      zp_q <= zp;
    end
  end

  always_comb
    for (int p = 0; p < EX_ENGINES; p++) f1[p] = pv_q[p] ? y[p] : zp_q;
endmodule
