// tb_ex_weight_buffer: writes random 64-bit words in two halves to random
// addresses of the full 4096-word buffer and reads them back, checking the
// one-cycle read latency and that the output holds while rd_en is low.
`timescale 1ns/1ps
module tb_ex_weight_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_hi = 0, rd_en = 0;
  logic [11:0] wr_addr = 0, rd_addr = 0;
  logic [31:0] wr_data = 0;
  logic [63:0] rd_data;
  logic [63:0] model [4096];
  bit written [4096];
  int checks = 0, failures = 0;

  ex_weight_buffer dut (.clk, .wr_en, .wr_addr, .wr_hi, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      automatic int a = $urandom_range(0, 4095);
      automatic logic [63:0] v = {$urandom, $urandom};
      model[a] = v; written[a] = 1;
      @(negedge clk); wr_en = 1; wr_addr = 12'(a); wr_hi = 0; wr_data = v[31:0];
      @(negedge clk); wr_hi = 1; wr_data = v[63:32];
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      do a = $urandom_range(0, 4095); while (!written[a]);
      rd_en = 1; rd_addr = 12'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = rd_addr + 1;
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("addr %0d got %h want %h", a, rd_data, model[a]); end
      @(negedge clk);
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("output not held"); end
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
