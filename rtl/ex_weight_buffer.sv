// ex_weight_buffer: the Expansion Filter Buffer.
//
// One memory of DEPTH x 64 bits stores the M expansion filters back to back:
// filter m (1x1xN, N a multiple of 8) occupies words m*N/8 .. m*N/8 + N/8 - 1,
// word k holding channels 8k..8k+7 (channel 8k+i in byte i). Each cycle one
// word is read and broadcast to all nine expansion engines. The layout and
// size are the paper's; the split write port (two 32-bit halves per word, to
// match the 32-bit CFU operands) is this design's choice.
//
// Timing: synchronous write; synchronous read with enable, one cycle latency.
module ex_weight_buffer
  import dsc_pkg::*;
#(
  parameter int unsigned DEPTH = EXW_DEPTH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic                     wr_hi,
  input  logic [31:0]              wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WORD_W-1:0]        rd_data
);
  logic [1:0][31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_hi] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
