// ex_engine: one Expansion Engine.
//
// Each cycle it takes one 8-channel chunk of its pixel (ifmap) and the matching
// chunk of the current expansion filter (weights), adds the input offset
// (-zero point) to every activation, forms the eight products and sums them in
// a three-level adder tree. An accumulator register adds the chunk sums of the
// N/8 chunks of one filter: on a chunk marked first the tree sum replaces the
// register, otherwise it is added. On the chunk marked last the complete
// 32-bit dot product is registered on acc_out with out_valid high for one
// cycle. The eight-way tree, the offset and the accumulator follow the paper's
// engine figure; the first/last protocol is this design's.
//
// Timing: out_valid/acc_out appear one cycle after the last chunk is
// presented. Nothing changes while en is low (pipeline stall).
module ex_engine
  import dsc_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  input  logic              in_valid,
  input  logic              first,
  input  logic              last,
  input  logic [WORD_W-1:0] ifmap,
  input  logic [WORD_W-1:0] weights,
  input  off_t              offset,
  output logic              out_valid,
  output acc_t              acc_out
);
  logic signed [17:0] prod [EX_LANES];
  logic signed [18:0] s1 [4];
  logic signed [19:0] s2 [2];
  logic signed [20:0] tree;
  acc_t               acc, acc_next;

  always_comb begin
    for (int i = 0; i < EX_LANES; i++)
      prod[i] = 18'(10'($signed(ifmap[8*i +: 8])) + 10'(offset)) * 18'($signed(weights[8*i +: 8]));
    for (int i = 0; i < 4; i++) s1[i] = 19'(prod[2*i]) + 19'(prod[2*i+1]);
    for (int i = 0; i < 2; i++) s2[i] = 20'(s1[2*i]) + 20'(s1[2*i+1]);
    tree     = 21'(s2[0]) + 21'(s2[1]);
    acc_next = first ? acc_t'(tree) : acc + acc_t'(tree);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      acc       <= '0;
      acc_out   <= '0;
    end else if (en) begin
      out_valid <= in_valid && last;
      if (in_valid) begin
        acc <= acc_next;
        if (last) acc_out <= acc_next;
      end
    end
  end
endmodule
