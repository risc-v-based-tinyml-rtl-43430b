// tb_pr_post_process: finished pixels of random cout are offered with
// in_valid/in_ready while a model of the projection bias buffer (one-cycle
// synchronous read) supplies per-channel parameters; the read side pops
// words at random times. Every word must carry four requantized channels in
// order (unused bytes zero), and the first word must become readable exactly
// cout + 2 cycles after the pixel is accepted.
`timescale 1ns/1ps
module tb_pr_post_process;
  import dsc_pkg::*;
  import tb_dsc_ref_pkg::*;
  localparam int unsigned ENGINES = PR_ENGINES;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1;
  logic [6:0] cout = 0;
  int8_t zp = 0, act_min = -128, act_max = 127;
  logic in_valid = 0, in_ready;
  acc_t [ENGINES-1:0] acc = 0;
  logic prm_rd_en;
  logic [5:0] prm_addr;
  qparam_t prm_data;
  logic rd_valid, rd_pop = 0, idle;
  logic [31:0] rd_data;
  qparam_t prm [64];
  int checks = 0, failures = 0;

  pr_post_process #(.ENGINES(ENGINES)) dut (.clk, .rst, .cout, .zp, .act_min, .act_max, .in_valid,
      .in_ready, .acc, .prm_rd_en, .prm_addr, .prm_data, .rd_valid, .rd_data, .rd_pop, .idle);

  always_ff @(posedge clk) if (prm_rd_en) prm_data <= prm[prm_addr];

  // expected words, filled by the producer and drained by the reader
  logic [31:0] expq [$];
  longint t_accept [$];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  int pixels_in = 0, pixels_out = 0, words_total = 0;

  task automatic run(int c, int npix);
    cout = 7'(c);
    foreach (prm[i]) begin
      prm[i].bias  = int'($urandom_range(0, 4000)) - 2000;
      prm[i].mult  = 32'h4000_0000 + $urandom_range(0, 32'h3fff_ffff);
      prm[i].shift = 8'(int'($urandom_range(0, 10)) - 12);
    end
    zp = int8_t'(int'($urandom_range(0, 60)) - 30);
    act_min = -8'sd128; act_max = 8'sd127;
    fork
      begin : producer
        for (int p = 0; p < npix; p++) begin
          logic [31:0] wd;
          for (int j = 0; j < ENGINES; j++) acc[j] = acc_t'(int'($urandom_range(0, 200000)) - 100000);
          for (int wi = 0; wi < (c + 3) / 4; wi++) begin
            wd = 0;
            for (int b = 0; b < 4; b++)
              if (4 * wi + b < c)
                wd[8*b +: 8] = 8'(ref_requant(acc[4*wi+b], prm[4*wi+b].bias, prm[4*wi+b].mult,
                                              prm[4*wi+b].shift, zp, act_min, act_max));
            expq.push_back(wd);
          end
          in_valid = 1;
          do @(posedge clk); while (!in_ready);
          t_accept.push_back(cyc);
          #1 in_valid = 0;
          repeat ($urandom_range(0, 3)) @(posedge clk);
        end
      end
      begin : reader
        int words = npix * ((c + 3) / 4);
        int w = 0;
        while (w < words) begin
          @(negedge clk);
          rd_pop = 0;
          if (rd_valid && $urandom_range(2) != 0) begin
            logic [31:0] e = expq.pop_front();
            checks++;
            if (rd_data !== e) begin failures++; $display("word %0d got %h want %h", w, rd_data, e); end
            rd_pop = 1;
            w++;
          end
        end
        @(negedge clk) rd_pop = 0;
      end
      begin : latency
        for (int p = 0; p < npix; p++) begin
          longint t0;
          wait (t_accept.size() > 0);
          t0 = t_accept.pop_front();
          @(posedge rd_valid);
          checks++;
          // rd_valid can only rise once the previous pixel has been read out,
          // so the bound is exact only when the output register was free.
          if (cyc - t0 < c + 2) begin failures++; $display("too early: %0d", cyc - t0); end
        end
      end
    join
  endtask

  initial begin
    @(negedge clk); rst = 0;
    // exact latency: one pixel, no backlog
    for (int c = 1; c <= ENGINES; c += 11) begin
      automatic int lat = 0;
      cout = 7'(c);
      foreach (prm[i]) prm[i] = '{bias: 0, mult: 32'h4000_0000, shift: 0};
      zp = 0;
      for (int j = 0; j < ENGINES; j++) acc[j] = acc_t'(j * 2);
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;     // accepted at the edge in between
      while (!rd_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != c + 2) begin failures++; $display("cout %0d latency %0d want %0d", c, lat, c + 2); end
      for (int wi = 0; wi < (c + 3) / 4; wi++) begin
        @(negedge clk);
        checks++;
        if (rd_data[7:0] !== 8'(4 * wi)) begin failures++; $display("ch %0d got %0d", 4 * wi, rd_data[7:0]); end
        rd_pop = 1;
        @(negedge clk) rd_pop = 0;
      end
      @(negedge clk);
      checks++;
      if (!idle) begin failures++; $display("not idle"); end
    end
    run(56, 20);
    run(13, 30);
    run(1, 30);
    run(24, 30);
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
