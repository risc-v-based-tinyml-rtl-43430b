// pad_addr_gen: address generation and boundary check for one 3x3 window of
// the nine-bank IFMAP buffer.
//
// For the output pixel at (row, col) the window covers rows row-1..row+1 and
// columns col-1..col+1 (stride 1, "same" padding). Window position p = 3*dy+dx
// holds pixel (row+dy-1, col+dx-1), which lives in bank
// ((row+dy-1) mod 3)*3 + ((col+dx-1) mod 3). Because any three consecutive
// rows (and columns) have distinct residues mod 3, the nine positions always
// fall in nine different banks, so one word per bank is enough to read the
// whole window in a single cycle. The bank rule is the paper's; the word
// address inside a bank, ((r/3)*ceil(w/3) + c/3)*nc + chunk, is this design's
// choice: it packs the pixels of one bank densely in raster order with the
// nc 8-channel chunks of a pixel in consecutive words.
//
// Positions outside the h x w map are flagged in pos_valid; the buffer then
// returns the zero point instead of memory data (on-the-fly padding), and the
// bank that position maps to is read at address 0, whose data is discarded.
//
// Interface: purely combinational. bank_addr[b] is the word address to apply
// to bank b; pos_bank[p] tells which bank serves window position p.
module pad_addr_gen
  import dsc_pkg::*;
(
  input  logic [7:0] h,
  input  logic [7:0] w,
  input  logic [5:0] nc,
  input  logic [7:0] row,
  input  logic [7:0] col,
  input  logic [5:0] chunk,
  output logic [IF_BANKS-1:0][7:0] bank_addr,
  output logic [EX_ENGINES-1:0][3:0] pos_bank,
  output logic [EX_ENGINES-1:0]      pos_valid
);
  always_comb begin
    bank_addr = '0;
    for (int p = 0; p < EX_ENGINES; p++) begin
      logic signed [9:0] r, c;
      logic [3:0] b;
      r = 10'(row) + 10'(p / 3) - 10'sd1;
      c = 10'(col) + 10'(p % 3) - 10'sd1;
      // +3 keeps the operands non-negative without changing the residue.
      b = bank_of(9'(r + 10'sd3), 9'(c + 10'sd3));
      pos_bank[p]  = b;
      pos_valid[p] = (r >= 0) && (c >= 0) && (r < $signed({2'b00, h})) && (c < $signed({2'b00, w}));
      if (pos_valid[p])
        bank_addr[b] = addr_of(9'(r), 9'(c), w, nc, chunk);
    end
  end
endmodule
