// tb_ex_engine: feeds random dot products of 1..7 chunks (8 channels each)
// with a random input offset, sometimes holding en low in the middle, and
// compares the registered result with sum((x + offset) * w). Checks that
// out_valid rises exactly one cycle after the last chunk.
`timescale 1ns/1ps
module tb_ex_engine;
  import dsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1, en = 1, in_valid = 0, first = 0, last = 0;
  logic [63:0] ifmap = 0, weights = 0;
  off_t offset = 0;
  logic out_valid;
  acc_t acc_out;
  int checks = 0, failures = 0;

  ex_engine dut (.clk, .rst, .en, .in_valid, .first, .last, .ifmap, .weights, .offset, .out_valid, .acc_out);

  initial begin
    @(negedge clk); rst = 0;
    for (int it = 0; it < 400; it++) begin
      automatic int nc = $urandom_range(1, 7);
      automatic longint expv = 0;
      offset = off_t'(int'($urandom_range(0, 255)) - 127);
      for (int k = 0; k < nc; k++) begin
        ifmap = {$urandom, $urandom}; weights = {$urandom, $urandom};
        for (int i = 0; i < 8; i++)
          expv += (longint'($signed(ifmap[8*i +: 8])) + offset) * $signed(weights[8*i +: 8]);
        in_valid = 1; first = (k == 0); last = (k == nc - 1);
        en = 1;
        @(negedge clk);
        if ($urandom_range(4) == 0) begin
          en = 0; in_valid = $urandom_range(1);
          repeat ($urandom_range(1, 3)) @(negedge clk);
          en = 1;
        end
        checks++;
        if (out_valid !== (k == nc - 1)) begin failures++; $display("out_valid timing k=%0d", k); end
      end
      in_valid = 0;
      checks++;
      if (acc_out !== acc_t'(expv)) begin failures++; $display("acc %0d want %0d", acc_out, expv); end
      if ($urandom_range(1)) @(negedge clk);
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
