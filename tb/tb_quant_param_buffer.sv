// tb_quant_param_buffer: writes bias, multiplier and shift of random channels
// field by field and reads whole entries back (one-cycle latency).
`timescale 1ns/1ps
module tb_quant_param_buffer;
  import dsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [8:0] wr_addr = 0, rd_addr = 0;
  qfield_e wr_field = QF_BIAS;
  logic [31:0] wr_data = 0;
  qparam_t rd_data;
  int b [512], m [512], s [512];
  bit ok [512];
  int checks = 0, failures = 0;

  quant_param_buffer dut (.clk, .wr_en, .wr_addr, .wr_field, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    for (int i = 0; i < 800; i++) begin
      automatic int a = $urandom_range(0, 511);
      b[a] = int'($urandom); m[a] = int'($urandom); s[a] = int'($urandom_range(0, 61)) - 31; ok[a] = 1;
      @(negedge clk); wr_en = 1; wr_addr = 9'(a); wr_field = QF_BIAS;  wr_data = b[a];
      @(negedge clk); wr_field = QF_MULT;  wr_data = m[a];
      @(negedge clk); wr_field = QF_SHIFT; wr_data = s[a];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 1000; i++) begin
      int a;
      do a = $urandom_range(0, 511); while (!ok[a]);
      rd_en = 1; rd_addr = 9'(a);
      @(negedge clk);
      rd_en = 0;
      checks += 3;
      if (rd_data.bias !== b[a]) begin failures++; $display("bias %0d", a); end
      if (rd_data.mult !== m[a]) begin failures++; $display("mult %0d", a); end
      if (int'(rd_data.shift) !== s[a]) begin failures++; $display("shift %0d", a); end
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
