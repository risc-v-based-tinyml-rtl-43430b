// tb_dw_engine: random 3x3 tiles and filters with a random input offset; the
// registered result must be sum over nine taps of (f1 + offset) * w, one cycle
// after the inputs, and must hold while en is low.
`timescale 1ns/1ps
module tb_dw_engine;
  import dsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1, en = 1, in_valid = 0;
  int8_t [8:0] f1 = 0, w = 0;
  off_t offset = 0;
  logic out_valid;
  acc_t raw;
  int checks = 0, failures = 0;

  dw_engine dut (.clk, .rst, .en, .in_valid, .f1, .w, .offset, .out_valid, .raw);

  initial begin
    @(negedge clk); rst = 0;
    for (int it = 0; it < 3000; it++) begin
      automatic longint e = 0;
      for (int t = 0; t < 9; t++) begin f1[t] = int8_t'($urandom); w[t] = int8_t'($urandom); end
      offset = off_t'(int'($urandom_range(0, 255)) - 127);
      for (int t = 0; t < 9; t++) e += (longint'(f1[t]) + offset) * w[t];
      in_valid = 1; en = 1;
      @(negedge clk);
      in_valid = 0;
      checks += 2;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      if (raw !== acc_t'(e)) begin failures++; $display("got %0d want %0d", raw, e); end
      en = 0; f1 = '0; in_valid = 1;
      @(negedge clk);
      checks++;
      if (raw !== acc_t'(e)) begin failures++; $display("not held"); end
      in_valid = 0; en = 1;
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
