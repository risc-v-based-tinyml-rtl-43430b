// pr_engine: one Projection Engine.
//
// The engine owns a private weight buffer (distributed memory, asynchronous
// read) holding its 1x1 filter: word m is the weight for expanded channel m.
// Each valid cycle the broadcast F2 element of channel m, plus the F2 input
// offset, is multiplied by weight m and added to the 32-bit accumulator, which
// stays in the engine for the whole pixel (output stationary). The item marked
// first restarts the sum; after the item marked last the finished sum is on
// acc_out with out_valid high for one cycle. Private LUTRAM, one multiplier and
// the output-stationary accumulator are the paper's; the depth of the weight
// buffer (512, enough for the 336 expanded channels of the largest MobileNetV2
// block with width 0.35) is this design's choice.
//
// Timing: out_valid one cycle after the last item; acc_out holds until the next
// accepted item. Frozen while en is low.
module pr_engine
  import dsc_pkg::*;
#(
  parameter int unsigned DEPTH = PRW_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  // weight buffer load
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  int8_t                    wr_data,
  // compute
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  int8_t                    x,
  input  off_t                     offset,
  output logic                     out_valid,
  output acc_t                     acc_out
);
  int8_t              wbuf [DEPTH];
  logic signed [17:0] prod;
  acc_t               acc;

  always_ff @(posedge clk)
    if (wr_en) wbuf[wr_addr] <= wr_data;

  assign prod = 18'(10'(x) + 10'(offset)) * 18'(wbuf[addr]);

  always_ff @(posedge clk) begin
    if (rst) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else if (en) begin
      out_valid <= in_valid && last;
      if (in_valid) acc <= (first ? '0 : acc) + acc_t'(prod);
    end
  end

  assign acc_out = acc;
endmodule
