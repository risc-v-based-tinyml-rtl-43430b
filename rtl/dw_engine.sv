// dw_engine: the Depthwise Engine.
//
// Nine multipliers take the 3x3 tile of F1 for one channel (each value plus the
// F1 input offset) and the nine taps of that channel's depthwise filter; an
// adder tree sums the products. One complete 3x3 depthwise output per cycle,
// with no reuse of inputs between cycles (No Local Reuse). Structure from the
// paper's engine figure.
//
// Timing: raw/out_valid registered one cycle after the inputs; frozen while
// en is low.
module dw_engine
  import dsc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic                 in_valid,
  input  int8_t [DW_TAPS-1:0]  f1,
  input  int8_t [DW_TAPS-1:0]  w,
  input  off_t                 offset,
  output logic                 out_valid,
  output acc_t                 raw
);
  logic signed [17:0] prod [DW_TAPS];
  logic signed [21:0] sum;

  always_comb begin
    sum = '0;
    for (int t = 0; t < DW_TAPS; t++) begin
      prod[t] = 18'(10'(f1[t]) + 10'(offset)) * 18'(w[t]);
      sum     = sum + 22'(prod[t]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      raw       <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      if (in_valid) raw <= acc_t'(sum);
    end
  end
endmodule
