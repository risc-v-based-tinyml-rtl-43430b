// tb_dw_weight_buffer: writes the nine taps of random filters one weight at a
// time and checks that a single read returns the whole 3x3 filter, tap t in
// lane t, one cycle later.
`timescale 1ns/1ps
module tb_dw_weight_buffer;
  import dsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_tap = 0;
  logic [8:0] wr_addr = 0, rd_addr = 0;
  int8_t wr_data = 0;
  int8_t [8:0] rd_data;
  byte model [512][9];
  bit ok [512];
  int checks = 0, failures = 0;

  dw_weight_buffer dut (.clk, .wr_en, .wr_tap, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    for (int i = 0; i < 400; i++) begin
      automatic int a = $urandom_range(0, 511);
      ok[a] = 1;
      for (int t = 0; t < 9; t++) begin
        model[a][t] = byte'($urandom);
        @(negedge clk); wr_en = 1; wr_tap = 4'(t); wr_addr = 9'(a); wr_data = model[a][t];
      end
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 1000; i++) begin
      int a;
      do a = $urandom_range(0, 511); while (!ok[a]);
      rd_en = 1; rd_addr = 9'(a);
      @(negedge clk);
      rd_en = 0;
      for (int t = 0; t < 9; t++) begin
        checks++;
        if (rd_data[t] !== model[a][t]) begin failures++; $display("filter %0d tap %0d", a, t); end
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
