// tb_dw_post_process: random accumulators and parameters through the single
// depthwise post-processing lane, compared with the reference requantization
// including ReLU/ReLU6-style clamps.
`timescale 1ns/1ps
module tb_dw_post_process;
  import dsc_pkg::*;
  import tb_dsc_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1, en = 1, in_valid = 0;
  acc_t raw = 0;
  qparam_t q = 0;
  int8_t zp = 0, act_min = 0, act_max = 0;
  logic out_valid;
  int8_t f2;
  int checks = 0, failures = 0;
  int bias, mult;
  int8_t sh;

  dw_post_process dut (.clk, .rst, .en, .in_valid, .raw, .q, .zp, .act_min, .act_max, .out_valid, .f2);

  initial begin
    @(negedge clk); rst = 0;
    for (int it = 0; it < 5000; it++) begin
      int e;
      raw = acc_t'($urandom);
      if ($urandom_range(1)) raw = acc_t'(int'($urandom_range(0, 200000)) - 100000);
      bias = 32'(int'($urandom_range(0, 20000)) - 10000);
      mult = 32'(32'h4000_0000 + $urandom_range(0, 32'h3fff_ffff));
      sh = int8_t'(8'(int'($urandom_range(0, 40)) - 31));
      q = {bias, mult, sh};
      zp = int8_t'($urandom);
      act_min = $urandom_range(1) ? zp : -8'sd128;
      act_max = $urandom_range(1) ? 8'sd127 : int8_t'($urandom_range(0, 127));
      if (act_max < act_min) act_max = 8'sd127;
      e = ref_requant(raw, bias, mult, sh, zp, act_min, act_max);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks += 2;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      if (int'(f2) != e) begin
        failures++;
        $display("acc %0d b %0d m %0d s %0d zp %0d: got %0d want %0d", raw, bias, mult, sh, zp, f2, e);
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
