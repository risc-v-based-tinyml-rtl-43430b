// dw_weight_buffer: the nine-bank Depthwise Filter Buffer.
//
// Bank t (t = 3*ky + kx) stores tap t of every depthwise filter, so filter m is
// spread over address m of the nine banks and the whole 3x3 filter (72 bits)
// is read in one cycle, one weight per multiplier of the depthwise engine.
// The nine-bank organisation, the 72-bit read and the depth of 512 are the
// paper's. The bank width is 8 bits, one weight, as the 72-bit filter word in
// the text implies (the figure labels the banks "8 byte" wide; the text is
// followed here).
//
// Timing: synchronous write of one weight; synchronous read with enable, one
// cycle latency.
module dw_weight_buffer
  import dsc_pkg::*;
#(
  parameter int unsigned DEPTH = DWW_DEPTH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [3:0]               wr_tap,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  int8_t                    wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output int8_t [DW_TAPS-1:0]      rd_data
);
  int8_t mem [DW_TAPS][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && wr_tap < 4'(DW_TAPS)) mem[wr_tap][wr_addr] <= wr_data;
    if (rd_en)
      for (int t = 0; t < DW_TAPS; t++) rd_data[t] <= mem[t][rd_addr];
  end
endmodule
