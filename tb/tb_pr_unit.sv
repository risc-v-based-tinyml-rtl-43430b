// tb_pr_unit: loads M weights into each of the 56 engines through the
// wr_engine select, then broadcasts M F2 elements (one per cycle, address = m)
// and checks that every engine finished its own output channel:
// acc[j] = sum_m (x[m] + offset) * W[j][m], valid one cycle after the last m.
`timescale 1ns/1ps
module tb_pr_unit;
  import dsc_pkg::*;
  localparam int unsigned ENGINES = PR_ENGINES;
  localparam int unsigned DEPTH   = PRW_DEPTH;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1, en = 1, wr_en = 0, in_valid = 0, first = 0, last = 0;
  logic [5:0] wr_engine = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = 0, addr = 0;
  int8_t wr_data = 0, x = 0;
  off_t offset = 0;
  logic out_valid;
  acc_t [ENGINES-1:0] acc;
  int8_t wm [ENGINES][DEPTH];
  int checks = 0, failures = 0;

  pr_unit #(.ENGINES(ENGINES), .DEPTH(DEPTH)) dut (.clk, .rst, .en, .wr_en, .wr_engine, .wr_addr,
      .wr_data, .in_valid, .first, .last, .addr, .x, .offset, .out_valid, .acc);

  initial begin
    @(negedge clk); rst = 0;
    for (int rep = 0; rep < 3; rep++) begin
      automatic int m = (rep == 0) ? DEPTH : $urandom_range(1, 200);
      longint e [ENGINES];
      for (int j = 0; j < ENGINES; j++)
        for (int a = 0; a < m; a++) begin
          wm[j][a] = int8_t'($urandom);
          wr_en = 1; wr_engine = j[5:0]; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = wm[j][a];
          @(negedge clk);
        end
      wr_en = 0;
      offset = off_t'(int'($urandom_range(0, 255)) - 127);
      foreach (e[j]) e[j] = 0;
      for (int a = 0; a < m; a++) begin
        x = int8_t'($urandom);
        for (int j = 0; j < ENGINES; j++) e[j] += (longint'(x) + offset) * wm[j][a];
        in_valid = 1; first = (a == 0); last = (a == m - 1); addr = a[$clog2(DEPTH)-1:0];
        @(negedge clk);
      end
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int j = 0; j < ENGINES; j++) begin
        checks++;
        if (acc[j] !== acc_t'(e[j])) begin failures++; $display("engine %0d got %0d want %0d", j, acc[j], e[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
