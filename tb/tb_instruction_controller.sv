// tb_instruction_controller: drives the CFU command/response port directly.
//  * CFG: every layer register is written with random values and read back
//    from the cfg output.
//  * IFMAP/EXW/DWW/PRW/QPARAM: the write strobes, bank/address/tap/engine and
//    data outputs are checked in the accept cycle against an independent
//    model of the encoding (IFMAP bank (r%3)*3 + c%3, word
//    ((r/3)*ceil(w/3) + c/3)*nc + chunk).
//  * START: the issued work items must follow row, col, m, k order with no
//    gaps; a random stall must hold the current item; the run must take
//    exactly H*W*M*nc + stalled cycles.
//  * READ: funct7 = 0 waits for rd_valid and returns rd_data while popping
//    exactly one word; funct7 = 1 returns {issuing, busy}.
//  * Responses are held while rsp_ready is low (random back-pressure).
`timescale 1ns/1ps
module tb_instruction_controller;
  import dsc_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst = 1;
  logic cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 1;
  logic [9:0] fid = 0;
  logic [31:0] in0 = 0, in1 = 0, rsp_out;
  layer_cfg_t cfg;
  logic [31:0] wr_data;
  logic if_wr_en, wr_hi, exw_wr_en, dww_wr_en, prw_wr_en;
  logic [3:0] if_wr_bank, dww_wr_tap;
  logic [7:0] if_wr_addr;
  logic [11:0] exw_wr_addr;
  logic [8:0] wr_ch;
  logic [5:0] prw_wr_engine;
  logic [2:0] qp_wr_en;
  qfield_e qp_wr_field;
  logic iss_valid, iss_kfirst, iss_klast, iss_mfirst, iss_mlast;
  logic [7:0] iss_row, iss_col;
  logic [9:0] iss_m;
  logic [5:0] iss_k;
  logic stall = 0, pipe_idle = 1;
  logic rd_valid = 0, rd_pop, busy;
  logic [31:0] rd_data = 0;
  int checks = 0, failures = 0;

  instruction_controller dut (.clk, .rst, .cmd_valid, .cmd_ready, .cmd_function_id(fid),
      .cmd_in0(in0), .cmd_in1(in1), .rsp_valid, .rsp_ready, .rsp_out, .cfg, .wr_data, .if_wr_en,
      .if_wr_bank, .if_wr_addr, .wr_hi, .exw_wr_en, .exw_wr_addr, .dww_wr_en, .dww_wr_tap, .wr_ch,
      .prw_wr_en, .prw_wr_engine, .qp_wr_en, .qp_wr_field, .iss_valid, .iss_row, .iss_col, .iss_m,
      .iss_k, .iss_kfirst, .iss_klast, .iss_mfirst, .iss_mlast, .stall, .pipe_idle, .rd_valid,
      .rd_data, .rd_pop, .busy);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Issues one instruction. The accept-cycle outputs are handed to 'probe'
  // through the event so callers can check them; the response is returned.
  logic [9:0] a_fid;
  event accepted;
  task automatic cfu(logic [6:0] f7, logic [2:0] f3, logic [31:0] a, logic [31:0] b,
                     output logic [31:0] r);
    @(negedge clk);
    fid = {f7, f3}; in0 = a; in1 = b; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    -> accepted;
    #1;
    @(posedge clk);
    #1 cmd_valid = 0;
    forever begin
      @(negedge clk);
      rsp_ready = $urandom_range(2) != 0;
      if (rsp_valid && rsp_ready) begin r = rsp_out; break; end
      if (rsp_valid && !rsp_ready) begin
        automatic logic [31:0] held = rsp_out;
        @(negedge clk);
        chk(rsp_valid && rsp_out == held, "response held");
        rsp_ready = 1;
        r = rsp_out;
        break;
      end
    end
    @(posedge clk);
    #1 rsp_ready = 1;
  endtask

  logic [31:0] r;
  int h, w, nc, m;

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    // ---- configuration registers ----
    for (int rep = 0; rep < 4; rep++) begin
      logic [7:0] v [17];
      foreach (v[i]) v[i] = 8'($urandom);
      for (int i = 0; i < 17; i++) cfu(7'(i), OP_CFG, {24'($urandom), v[i]}, 0, r);
      chk(cfg.h == v[CR_H] && cfg.w == v[CR_W] && cfg.nc == v[CR_NC][5:0], "cfg h/w/nc");
      chk(cfg.m[7:0] == v[CR_M] && cfg.cout == v[CR_COUT][6:0], "cfg m/cout");
      chk(cfg.ex_zp == v[CR_EX_ZP] && cfg.dw_zp == v[CR_DW_ZP] && cfg.pr_zp == v[CR_PR_ZP], "cfg zp");
      chk(cfg.ex_min == v[CR_EX_MIN] && cfg.ex_max == v[CR_EX_MAX] && cfg.dw_min == v[CR_DW_MIN] &&
          cfg.dw_max == v[CR_DW_MAX] && cfg.pr_min == v[CR_PR_MIN] && cfg.pr_max == v[CR_PR_MAX], "cfg clamps");
      chk(cfg.ex_in_off[7:0] == v[CR_EX_IN_OFF] && cfg.dw_in_off[7:0] == v[CR_DW_IN_OFF] &&
          cfg.pr_in_off[7:0] == v[CR_PR_IN_OFF], "cfg offsets");
    end
    // ---- buffer writes ----
    h = 20; w = 20; nc = 2;
    cfu(CR_H, OP_CFG, h, 0, r); cfu(CR_W, OP_CFG, w, 0, r); cfu(CR_NC, OP_CFG, nc, 0, r);
    for (int i = 0; i < 400; i++) begin
      automatic int op = $urandom_range(1, 5);
      automatic int row = $urandom_range(0, h - 1), col = $urandom_range(0, w - 1), k = $urandom_range(0, nc - 1);
      automatic logic hi = 1'($urandom);
      automatic logic [31:0] d = $urandom;
      logic [31:0] b;
      automatic logic [6:0] f7 = 0;
      case (op)
        1: b = {hi, 9'b0, 6'(k), 8'(row), 8'(col)};
        2: b = {hi, 19'b0, 12'($urandom)};
        3: b = {12'b0, 4'($urandom_range(0, 8)), 7'b0, 9'($urandom)};
        4: b = {10'b0, 6'($urandom_range(0, 55)), 7'b0, 9'($urandom)};
        default: begin b = {23'b0, 9'($urandom)}; f7 = {3'b0, 2'($urandom_range(0, 2)), 2'($urandom_range(0, 2))}; end
      endcase
      fork
        begin
          @accepted;
          chk(wr_data == d, "wr_data");
          chk(if_wr_en == (op == 1) && exw_wr_en == (op == 2) && dww_wr_en == (op == 3) &&
              prw_wr_en == (op == 4) && (qp_wr_en != 0) == (op == 5), "write strobe");
          case (op)
            1: chk(wr_hi == hi && if_wr_bank == 4'((row % 3) * 3 + col % 3) &&
                   if_wr_addr == 8'(((row / 3) * ((w + 2) / 3) + col / 3) * nc + k), "ifmap addr");
            2: chk(wr_hi == b[31] && exw_wr_addr == b[11:0], "exw addr");
            3: chk(dww_wr_tap == b[19:16] && wr_ch == b[8:0], "dww tap/ch");
            4: chk(prw_wr_engine == b[21:16] && wr_ch == b[8:0], "prw engine/ch");
            default: chk(qp_wr_en == 3'(1 << f7[1:0]) && qp_wr_field == qfield_e'(f7[3:2]) &&
                         wr_ch == b[8:0], "qparam");
          endcase
        end
        cfu(f7, 3'(op), d, b, r);
      join
    end
    // ---- sequencing ----
    for (int rep = 0; rep < 6; rep++) begin
      automatic int n_items, n_stall = 0, got = 0, cyc = 0;
      automatic int er = 0, ec = 0, em = 0, ek = 0;
      automatic bit done = 0;
      h = $urandom_range(1, 4); w = $urandom_range(1, 5); nc = $urandom_range(1, 3); m = $urandom_range(1, 6);
      cfu(CR_H, OP_CFG, h, 0, r); cfu(CR_W, OP_CFG, w, 0, r);
      cfu(CR_NC, OP_CFG, nc, 0, r); cfu(CR_M, OP_CFG, m, 0, r);
      n_items = h * w * m * nc;
      // hold the pipeline stalled until the START response has been taken
      stall = 1;
      cfu(0, OP_START, 0, 0, r);
      stall = 0;
      while (!done) begin
        @(negedge clk);
        if (!iss_valid) begin
          chk(got == n_items, $sformatf("item count %0d want %0d", got, n_items));
          done = 1;
        end else begin
          cyc++;
          chk(iss_row == er && iss_col == ec && iss_m == em && iss_k == ek, "issue order");
          chk(iss_kfirst == (ek == 0) && iss_klast == (ek == nc - 1) &&
              iss_mfirst == (em == 0) && iss_mlast == (em == m - 1), "issue flags");
          chk(busy, "busy while issuing");
          stall = ($urandom_range(3) == 0);
          if (stall) n_stall++;
          else begin
            got++;
            if (++ek == nc) begin ek = 0; if (++em == m) begin em = 0;
              if (++ec == w) begin ec = 0; er++; end end end
          end
          @(posedge clk); #1 stall = 0;
        end
      end
      chk(cyc == n_items + n_stall, $sformatf("issue cycles %0d want %0d", cyc, n_items + n_stall));
      // status with the pipeline still draining, then idle
      pipe_idle = 0;
      cfu(1, OP_READ, 0, 0, r);
      chk(r == 32'd1, "status draining");
      pipe_idle = 1;
      cfu(1, OP_READ, 0, 0, r);
      chk(r == 32'd0, "status idle");
    end
    // ---- result reads ----
    for (int i = 0; i < 50; i++) begin
      automatic logic [31:0] d = $urandom;
      automatic int delay = $urandom_range(0, 6), p0 = n_pops;
      fork
        cfu(0, OP_READ, 0, 0, r);
        begin
          @accepted;
          repeat (delay) begin
            @(negedge clk);
            chk(!rsp_valid && !cmd_ready, "read waits for data");
          end
          @(negedge clk);
          rd_data = d; rd_valid = 1;
          @(posedge clk); #1 rd_valid = 0;
        end
      join
      chk(n_pops == p0 + 1, "exactly one pop per read");
      chk(r == d, $sformatf("read data %h want %h", r, d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rd_pop must only happen with rd_valid
  int n_pops = 0;
  always @(posedge clk) if (!rst && rd_pop) begin
    n_pops++;
    if (!rd_valid) begin failures++; $display("FAIL pop without rd_valid"); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
