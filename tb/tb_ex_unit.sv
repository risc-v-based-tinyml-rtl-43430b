// tb_ex_unit: nine stationary tile pixels of nc chunks each against a stream of
// filters: after every filter the nine raw outputs must equal the nine dot
// products of tile pixel p with that filter, all valid in the same cycle.
`timescale 1ns/1ps
module tb_ex_unit;
  import dsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1, en = 1, in_valid = 0, first = 0, last = 0;
  logic [8:0][63:0] tile = 0;
  logic [63:0] weights = 0;
  off_t offset = 0;
  logic out_valid;
  acc_t [8:0] raw;
  int checks = 0, failures = 0;

  ex_unit dut (.clk, .rst, .en, .in_valid, .first, .last, .tile, .weights, .offset, .out_valid, .raw);

  initial begin
    @(negedge clk); rst = 0;
    for (int it = 0; it < 60; it++) begin
      automatic int nc = $urandom_range(1, 7);
      logic [8:0][63:0] px [8];
      foreach (px[k, p]) px[k][p] = {$urandom, $urandom};
      offset = off_t'(int'($urandom_range(0, 40)) - 20);
      for (int m = 0; m < 6; m++) begin
        longint expv [9];
        logic [63:0] wk [8];
        foreach (expv[p]) expv[p] = 0;
        for (int k = 0; k < nc; k++) begin
          wk[k] = {$urandom, $urandom};
          for (int p = 0; p < 9; p++)
            for (int i = 0; i < 8; i++)
              expv[p] += (longint'($signed(px[k][p][8*i +: 8])) + offset) * $signed(wk[k][8*i +: 8]);
          tile = px[k]; weights = wk[k];
          in_valid = 1; first = (k == 0); last = (k == nc - 1);
          @(negedge clk);
        end
        in_valid = 0;
        checks++;
        if (!out_valid) begin failures++; $display("no out_valid"); end
        for (int p = 0; p < 9; p++) begin
          checks++;
          if (raw[p] !== acc_t'(expv[p])) begin failures++; $display("engine %0d got %0d want %0d", p, raw[p], expv[p]); end
        end
      end
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
