// ifmap_buffer: the nine-bank input feature map buffer with on-the-fly padding.
//
// Nine independent memories of IF_DEPTH x 64 bits hold the input feature map;
// each 64-bit word is eight channels (one byte each, channel 8*chunk+i in
// byte i) of one pixel. A pixel sits in bank (row mod 3)*3 + (col mod 3), so
// a 3x3 window is read in one cycle with one word from every bank
// (pad_addr_gen computes the per-bank addresses). The read data are routed
// back to window order and any position outside the feature map is replaced
// by the input zero point in every byte, which the expansion engines' input
// offset then turns into an exact zero. Banking and zero-point substitution
// follow the paper; the 32-bit write port (the CPU writes each 64-bit word as
// two halves) is this design's choice, made to suit the 32-bit CFU operands.
//
// Timing: synchronous write; synchronous read with enable, one cycle of
// latency. tile and tile_valid change only on a cycle with rd_en high, so
// they hold while the pipeline is stalled.
module ifmap_buffer
  import dsc_pkg::*;
#(
  parameter int unsigned DEPTH = IF_DEPTH
) (
  input  logic                        clk,
  // write port (one 32-bit half of one word)
  input  logic                        wr_en,
  input  logic [3:0]                  wr_bank,
  input  logic [$clog2(DEPTH)-1:0]    wr_addr,
  input  logic                        wr_hi,
  input  logic [31:0]                 wr_data,
  // window read port
  input  logic                        rd_en,
  input  logic [IF_BANKS-1:0][$clog2(DEPTH)-1:0] rd_addr,
  input  logic [EX_ENGINES-1:0][3:0]  rd_pos_bank,
  input  logic [EX_ENGINES-1:0]       rd_pos_valid,
  input  int8_t                       pad_value,
  output logic [EX_ENGINES-1:0][WORD_W-1:0] tile,
  output logic [EX_ENGINES-1:0]       tile_valid
);
  logic [1:0][31:0] mem [IF_BANKS][DEPTH];
  logic [IF_BANKS-1:0][WORD_W-1:0] bank_q;
  logic [EX_ENGINES-1:0][3:0]      sel_q;
  logic [EX_ENGINES-1:0]           val_q;
  int8_t                           pad_q;

  always_ff @(posedge clk) begin
    if (wr_en && wr_bank < 4'(IF_BANKS))
      mem[wr_bank][wr_addr][wr_hi] <= wr_data;
    if (rd_en) begin
      for (int b = 0; b < IF_BANKS; b++) bank_q[b] <= mem[b][rd_addr[b]];
      sel_q <= rd_pos_bank;
      val_q <= rd_pos_valid;
      pad_q <= pad_value;
    end
  end

  always_comb begin
    for (int p = 0; p < EX_ENGINES; p++) begin
      tile[p]       = val_q[p] ? bank_q[sel_q[p]] : {EX_LANES{pad_q}};
      tile_valid[p] = val_q[p];
    end
  end
endmodule
