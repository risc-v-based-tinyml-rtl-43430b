// tb_pr_engine: loads the private weight buffer with random weights, then
// streams dot products of random length over random addresses with a random
// input offset and en gaps; acc_out must equal sum((x + offset) * w[addr]) in
// the cycle out_valid rises, which is exactly one enabled cycle after last.
`timescale 1ns/1ps
module tb_pr_engine;
  import dsc_pkg::*;
  localparam int unsigned DEPTH = PRW_DEPTH;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1, en = 1, wr_en = 0, in_valid = 0, first = 0, last = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = 0, addr = 0;
  int8_t wr_data = 0, x = 0;
  off_t offset = 0;
  logic out_valid;
  acc_t acc_out;
  int8_t wm [DEPTH];
  int checks = 0, failures = 0;

  pr_engine #(.DEPTH(DEPTH)) dut (.clk, .rst, .en, .wr_en, .wr_addr, .wr_data, .in_valid, .first,
                                  .last, .addr, .x, .offset, .out_valid, .acc_out);

  initial begin
    @(negedge clk); rst = 0;
    for (int a = 0; a < DEPTH; a++) begin
      wm[a] = int8_t'($urandom);
      wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = wm[a];
      @(negedge clk);
    end
    wr_en = 0;
    for (int it = 0; it < 300; it++) begin
      automatic int n = $urandom_range(1, 40);
      automatic longint e = 0;
      offset = off_t'(int'($urandom_range(0, 255)) - 127);
      for (int i = 0; i < n; i++) begin
        addr = $urandom_range(0, DEPTH - 1);
        x = int8_t'($urandom);
        e += (longint'(x) + offset) * wm[addr];
        in_valid = 1; first = (i == 0); last = (i == n - 1); en = 1;
        @(negedge clk);
        checks++;
        if (out_valid !== (i == n - 1)) begin failures++; $display("out_valid timing"); end
        if ($urandom_range(5) == 0) begin
          en = 0; x = int8_t'($urandom);
          repeat ($urandom_range(1, 3)) @(negedge clk);
          en = 1;
        end
      end
      in_valid = 0;
      checks++;
      if (acc_out !== acc_t'(e)) begin failures++; $display("acc %0d want %0d", acc_out, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
