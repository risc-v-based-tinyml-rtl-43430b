// tb_ifmap_buffer: loads a random feature map into the nine banks (through the
// package's bank/address rule), then reads 3x3 windows around random centres
// with addresses from pad_addr_gen and checks every tile position against the
// stored map, or against the zero point where the window leaves the map. Also
// checks that the output holds while rd_en is low.
`timescale 1ns/1ps
module tb_ifmap_buffer;
  import dsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_hi = 0, rd_en = 0;
  logic [3:0] wr_bank = 0;
  logic [7:0] wr_addr = 0;
  logic [31:0] wr_data = 0;
  logic [8:0][7:0] bank_addr;
  logic [8:0][3:0] pos_bank;
  logic [8:0] pos_valid;
  logic [8:0][63:0] tile;
  logic [8:0] tile_valid;
  logic [7:0] row = 0, col = 0;
  logic [5:0] chunk = 0;
  int checks = 0, failures = 0;
  localparam int H = 13, W = 11, NC = 3;
  byte img [H][W][NC*8];
  int8_t pad = -8'sd17;

  pad_addr_gen ag (.h(8'(H)), .w(8'(W)), .nc(6'(NC)), .row, .col, .chunk, .bank_addr, .pos_bank, .pos_valid);
  ifmap_buffer dut (.clk, .wr_en, .wr_bank, .wr_addr, .wr_hi, .wr_data, .rd_en,
                    .rd_addr(bank_addr), .rd_pos_bank(pos_bank), .rd_pos_valid(pos_valid),
                    .pad_value(pad), .tile, .tile_valid);

  initial begin
    foreach (img[r, c, k]) img[r][c][k] = byte'($urandom);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        for (int k = 0; k < NC; k++)
          for (int hh = 0; hh < 2; hh++) begin
            @(negedge clk);
            wr_en = 1; wr_hi = hh[0];
            wr_bank = 4'((r % 3) * 3 + c % 3);
            wr_addr = 8'(((r / 3) * ((W + 2) / 3) + c / 3) * NC + k);
            for (int i = 0; i < 4; i++) wr_data[8*i +: 8] = img[r][c][8*k + 4*hh + i];
          end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 500; it++) begin
      int rr0, cc0, k0;
      logic [8:0][63:0] keep;
      rr0 = $urandom_range(0, H - 1); cc0 = $urandom_range(0, W - 1); k0 = $urandom_range(0, NC - 1);
      row = 8'(rr0); col = 8'(cc0); chunk = 6'(k0); rd_en = 1;
      @(negedge clk);
      rd_en = 0;
      for (int p = 0; p < 9; p++) begin
        automatic int rr = rr0 + p / 3 - 1, cc = cc0 + p % 3 - 1;
        logic [63:0] e;
        if (rr >= 0 && rr < H && cc >= 0 && cc < W)
          for (int i = 0; i < 8; i++) e[8*i +: 8] = img[rr][cc][8*k0 + i];
        else e = {8{pad}};
        checks++;
        if (tile[p] !== e) begin failures++; $display("win (%0d,%0d) p%0d got %h want %h", rr0, cc0, p, tile[p], e); end
      end
      keep = tile;
      row = 8'($urandom_range(0, H - 1));
      @(negedge clk);
      checks++;
      if (tile !== keep) begin failures++; $display("tile changed with rd_en low"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
