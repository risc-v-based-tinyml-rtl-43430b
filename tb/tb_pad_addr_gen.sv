// tb_pad_addr_gen: checks the window address generation against a direct
// model: for random map sizes, channel counts and centres, every window
// position must name bank (r mod 3)*3 + (c mod 3), the nine banks must all be
// distinct, out-of-map positions must be flagged, and each in-map bank address
// must be ((r/3)*ceil(w/3) + c/3)*nc + chunk.
`timescale 1ns/1ps
module tb_pad_addr_gen;
  logic [7:0] h, w, row, col;
  logic [5:0] nc, chunk;
  logic [8:0][7:0] bank_addr;
  logic [8:0][3:0] pos_bank;
  logic [8:0]      pos_valid;
  int checks = 0, failures = 0;

  pad_addr_gen dut (.h, .w, .nc, .row, .col, .chunk, .bank_addr, .pos_bank, .pos_valid);

  initial begin
    for (int it = 0; it < 3000; it++) begin
      int r, c, wb, seen;
      h = 8'($urandom_range(1, 40)); w = 8'($urandom_range(1, 40));
      nc = 6'($urandom_range(1, 7)); chunk = 6'($urandom_range(0, nc - 1));
      row = 8'($urandom_range(0, h - 1)); col = 8'($urandom_range(0, w - 1));
      #1;
      wb = (w + 2) / 3;
      seen = 0;
      for (int p = 0; p < 9; p++) begin
        automatic int rr = row + p / 3 - 1, cc = col + p % 3 - 1;
        automatic int eb = ((rr + 3) % 3) * 3 + (cc + 3) % 3;
        automatic bit ev = rr >= 0 && cc >= 0 && rr < h && cc < w;
        checks += 2;
        if (pos_bank[p] != eb) begin failures++; $display("bank p%0d %0d != %0d", p, pos_bank[p], eb); end
        if (pos_valid[p] != ev) begin failures++; $display("valid p%0d", p); end
        seen |= 1 << pos_bank[p];
        if (ev) begin
          automatic int ea = (((rr / 3) * wb + cc / 3) * nc + chunk) % 256;
          checks++;
          if (bank_addr[eb] != ea) begin failures++; $display("addr p%0d %0d != %0d", p, bank_addr[eb], ea); end
        end
      end
      checks++;
      if (seen != 9'h1ff) begin failures++; $display("banks not distinct"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
