// tb_ex_post_process: random accumulators, per-channel parameters, zero points
// and activation clamps through the nine lanes; each output is compared with
// the reference requantization, and lanes marked outside the map must give the
// zero point regardless of their input.
`timescale 1ns/1ps
module tb_ex_post_process;
  import dsc_pkg::*;
  import tb_dsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1, en = 1, in_valid = 0;
  acc_t [8:0] raw = 0;
  logic [8:0] pos_valid = 0;
  qparam_t q = 0;
  int8_t zp = 0, act_min = 0, act_max = 0;
  logic out_valid;
  int8_t [8:0] f1;
  int checks = 0, failures = 0;
  int bias, mult;
  int8_t sh;

  ex_post_process dut (.clk, .rst, .en, .in_valid, .raw, .pos_valid, .q, .zp, .act_min, .act_max, .out_valid, .f1);

  initial begin
    @(negedge clk); rst = 0;
    for (int it = 0; it < 3000; it++) begin
      int e [9];
      for (int p = 0; p < 9; p++) raw[p] = acc_t'(int'($urandom_range(0, 400000)) - 200000);
      pos_valid = 9'($urandom);
      bias = 32'(int'($urandom_range(0, 20000)) - 10000);
      mult = 32'(32'h4000_0000 + $urandom_range(0, 32'h3fff_ffff));
      sh = int8_t'(8'(int'($urandom_range(0, 12)) - 14));
      q = {bias, mult, sh};
      zp = int8_t'(int'($urandom_range(0, 200)) - 100);
      act_min = zp;
      act_max = $urandom_range(1) ? 8'sd127 : int8_t'($urandom_range(0, 127));
      if (act_max < act_min) act_max = 8'sd127;
      for (int p = 0; p < 9; p++)
        e[p] = pos_valid[p] ? ref_requant(raw[p], bias, mult, sh, zp, act_min, act_max) : zp;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int p = 0; p < 9; p++) begin
        checks++;
        if (int'(f1[p]) != e[p]) begin failures++; $display("lane %0d got %0d want %0d", p, f1[p], e[p]); end
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
