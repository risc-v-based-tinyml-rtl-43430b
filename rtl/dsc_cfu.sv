// dsc_cfu: fused depthwise-separable convolution accelerator, as a Custom
// Function Unit (CFU) of a RISC-V core.
//
// A MobileNetV2 inverted residual block (1x1 expansion to M channels, 3x3
// depthwise, 1x1 projection to cout channels) is computed one output pixel at a
// time without ever storing the intermediate maps F1 and F2. For output pixel
// (r, c) and expanded channel m the nine expansion engines compute channel m of
// F1 on the 3x3 tile around (r, c) (N/8 cycles of 8-way MACs), the expansion
// post process requantizes it, the depthwise engine turns the tile into F2[m]
// in one cycle, the depthwise post process requantizes it and the 56
// projection engines accumulate F2[m] times their weight m. After m = M-1 the
// pixel's cout outputs are complete; the projection post process requantizes
// them and holds them for the CPU. F1 and F2 exist only in pipeline registers.
//
// Pipeline (the paper's five-stage "v3" intra-stage pipeline, with the issue
// and result stages around it):
//   issue  : IC item (row, col, m, k) -> IFMAP window read (with padding) and
//            expansion filter read (address m*nc + k)
//   S1     : Expansion MAC (accumulates over k)
//   S2     : Expansion Quantize (nine lanes)
//   S3     : Depthwise MAC
//   S4     : Depthwise Quantize
//   S5     : Projection MAC
//   result : Projection Post Process (quantize and read)
// Items for successive channels and pixels follow each other without a gap, so
// several pixels are in flight at a pixel boundary. Steady-state throughput is
// one expanded channel every N/8 cycles, i.e. M*N/8 cycles per output pixel.
// The only stall: a finished pixel reaches the projection post process while
// its hold register is still occupied (the CPU has not read the previous
// outputs); then every stage holds.
//
// Ports are the CFU-Playground command/response bus: cmd_payload_function_id =
// {funct7, funct3}, inputs_0/1 = rs1/rs2 values, rsp_payload_outputs_0 -> rd.
// The instruction encoding is described in instruction_controller.sv.
// Stride 1 only (the four benchmarked blocks are stride 1); residual addition is
// left to software, as the paper hands the outputs to the CPU.
//
// Lint lists a few unused bits here, all deliberate: the expanded-channel count
// in cfg is only used by the controller, busy is only reported through the
// status read, the expansion filter address is truncated to the 12-bit buffer,
// and some of the item flags carried to S5 are needed only in earlier stages.
module dsc_cfu
  import dsc_pkg::*;
(
  input  logic        clk,
  input  logic        reset,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [9:0]  cmd_payload_function_id,
  input  logic [31:0] cmd_payload_inputs_0,
  input  logic [31:0] cmd_payload_inputs_1,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output logic [31:0] rsp_payload_outputs_0
);
  layer_cfg_t cfg;
  logic        stall, en, pipe_idle, busy;

  // ---- controller ----------------------------------------------------------
  logic [31:0] wr_data;
  logic        if_wr_en, wr_hi, exw_wr_en, dww_wr_en, prw_wr_en;
  logic [3:0]  if_wr_bank, dww_wr_tap;
  logic [7:0]  if_wr_addr;
  logic [11:0] exw_wr_addr;
  logic [8:0]  wr_ch;
  logic [5:0]  prw_wr_engine;
  logic [2:0]  qp_wr_en;
  qfield_e     qp_wr_field;
  logic        iss_valid, iss_kfirst, iss_klast, iss_mfirst, iss_mlast;
  logic [7:0]  iss_row, iss_col;
  logic [9:0]  iss_m;
  logic [5:0]  iss_k;
  logic        rd_valid, rd_pop;
  logic [31:0] rd_data;

  instruction_controller u_ic (
    .clk, .rst(reset),
    .cmd_valid, .cmd_ready, .cmd_function_id(cmd_payload_function_id),
    .cmd_in0(cmd_payload_inputs_0), .cmd_in1(cmd_payload_inputs_1),
    .rsp_valid, .rsp_ready, .rsp_out(rsp_payload_outputs_0),
    .cfg, .wr_data, .if_wr_en, .if_wr_bank, .if_wr_addr, .wr_hi,
    .exw_wr_en, .exw_wr_addr, .dww_wr_en, .dww_wr_tap, .wr_ch,
    .prw_wr_en, .prw_wr_engine, .qp_wr_en, .qp_wr_field,
    .iss_valid, .iss_row, .iss_col, .iss_m, .iss_k,
    .iss_kfirst, .iss_klast, .iss_mfirst, .iss_mlast,
    .stall, .pipe_idle, .rd_valid, .rd_data, .rd_pop, .busy
  );

  assign en = !stall;

  // ---- issue: window and filter reads ----------------------------------------
  logic [IF_BANKS-1:0][7:0]   bank_addr;
  logic [EX_ENGINES-1:0][3:0] pos_bank;
  logic [EX_ENGINES-1:0]      pos_valid;
  logic [EX_ENGINES-1:0][WORD_W-1:0] tile;
  logic [EX_ENGINES-1:0]      tile_valid;
  logic [WORD_W-1:0]          exw;
  logic [15:0]                exw_rd_addr;

  pad_addr_gen u_pag (
    .h(cfg.h), .w(cfg.w), .nc(cfg.nc), .row(iss_row), .col(iss_col), .chunk(iss_k),
    .bank_addr, .pos_bank, .pos_valid
  );

  ifmap_buffer u_ifmap (
    .clk, .wr_en(if_wr_en), .wr_bank(if_wr_bank), .wr_addr(if_wr_addr),
    .wr_hi, .wr_data,
    .rd_en(en), .rd_addr(bank_addr), .rd_pos_bank(pos_bank), .rd_pos_valid(pos_valid),
    .pad_value(int8_t'(-cfg.ex_in_off)), .tile, .tile_valid
  );

  assign exw_rd_addr = 16'(iss_m * cfg.nc) + 16'(iss_k);

  ex_weight_buffer u_exw (
    .clk, .wr_en(exw_wr_en), .wr_addr(exw_wr_addr), .wr_hi, .wr_data,
    .rd_en(en), .rd_addr(exw_rd_addr[11:0]), .rd_data(exw)
  );

  // ---- stage metadata ------------------------------------------------------
  typedef struct packed {
    logic       v;
    logic [9:0] m;
    logic       kfirst, klast, mfirst, mlast;
  } meta_t;

  meta_t s1, s2, s3, s4, s5;
  logic [EX_ENGINES-1:0] s2_mask;

  always_ff @(posedge clk) begin
    if (reset) begin
      s1 <= '0; s2 <= '0; s3 <= '0; s4 <= '0; s5 <= '0;
      s2_mask <= '0;
    end else if (en) begin
      s1 <= '{v: iss_valid, m: iss_m, kfirst: iss_kfirst, klast: iss_klast,
              mfirst: iss_mfirst, mlast: iss_mlast};
      s2.v <= s1.v && s1.klast;
      if (s1.v && s1.klast) begin
        s2.m <= s1.m; s2.mfirst <= s1.mfirst; s2.mlast <= s1.mlast;
        s2.kfirst <= s1.kfirst; s2.klast <= s1.klast;
        s2_mask <= tile_valid;
      end
      s3 <= s2;
      s4 <= s3;
      s5 <= s4;
    end
  end

  // ---- S1: Expansion MAC ---------------------------------------------------
  acc_t [EX_ENGINES-1:0] ex_raw;
  logic                  ex_v;
  qparam_t               ex_q, dw_q, pr_q;

  ex_unit u_ex (
    .clk, .rst(reset), .en, .in_valid(s1.v), .first(s1.kfirst), .last(s1.klast),
    .tile, .weights(exw), .offset(cfg.ex_in_off), .out_valid(ex_v), .raw(ex_raw)
  );

  quant_param_buffer #(.DEPTH(DWW_DEPTH)) u_ex_bias (
    .clk, .wr_en(qp_wr_en[0]), .wr_addr(wr_ch), .wr_field(qp_wr_field), .wr_data,
    .rd_en(en), .rd_addr(s1.m[8:0]), .rd_data(ex_q)
  );

  // ---- S2: Expansion Quantize --------------------------------------------
  int8_t [EX_ENGINES-1:0] f1;
  logic                   f1_v;
  int8_t [DW_TAPS-1:0]    dww;

  ex_post_process u_expp (
    .clk, .rst(reset), .en, .in_valid(ex_v), .raw(ex_raw), .pos_valid(s2_mask),
    .q(ex_q), .zp(cfg.ex_zp), .act_min(cfg.ex_min), .act_max(cfg.ex_max),
    .out_valid(f1_v), .f1
  );

  dw_weight_buffer u_dww (
    .clk, .wr_en(dww_wr_en), .wr_tap(dww_wr_tap), .wr_addr(wr_ch), .wr_data(wr_data[7:0]),
    .rd_en(en), .rd_addr(s2.m[8:0]), .rd_data(dww)
  );

  // ---- S3: Depthwise MAC ----------------------------------------------------
  acc_t dw_raw;
  logic dw_v;

  dw_engine u_dw (
    .clk, .rst(reset), .en, .in_valid(f1_v), .f1, .w(dww), .offset(cfg.dw_in_off),
    .out_valid(dw_v), .raw(dw_raw)
  );

  quant_param_buffer #(.DEPTH(DWW_DEPTH)) u_dw_bias (
    .clk, .wr_en(qp_wr_en[1]), .wr_addr(wr_ch), .wr_field(qp_wr_field), .wr_data,
    .rd_en(en), .rd_addr(s3.m[8:0]), .rd_data(dw_q)
  );

  // ---- S4: Depthwise Quantize ------------------------------------------------
  int8_t f2;
  logic  f2_v;

  dw_post_process u_dwpp (
    .clk, .rst(reset), .en, .in_valid(dw_v), .raw(dw_raw), .q(dw_q),
    .zp(cfg.dw_zp), .act_min(cfg.dw_min), .act_max(cfg.dw_max),
    .out_valid(f2_v), .f2
  );

  // ---- S5: Projection MAC ---------------------------------------------------
  acc_t [PR_ENGINES-1:0] pr_acc;
  logic                  pr_v, pr_ready;

  pr_unit u_pr (
    .clk, .rst(reset), .en,
    .wr_en(prw_wr_en), .wr_engine(prw_wr_engine), .wr_addr(wr_ch), .wr_data(wr_data[7:0]),
    .in_valid(f2_v), .first(s5.mfirst), .last(s5.mlast), .addr(s5.m[8:0]),
    .x(f2), .offset(cfg.pr_in_off), .out_valid(pr_v), .acc(pr_acc)
  );

  // ---- result: Projection Post Process ----------------------------------
  logic       prm_rd_en, post_idle;
  logic [5:0] prm_addr;

  quant_param_buffer #(.DEPTH(64)) u_pr_bias (
    .clk, .wr_en(qp_wr_en[2]), .wr_addr(wr_ch[5:0]), .wr_field(qp_wr_field), .wr_data,
    .rd_en(prm_rd_en), .rd_addr(prm_addr), .rd_data(pr_q)
  );

  pr_post_process u_prpp (
    .clk, .rst(reset), .cout(cfg.cout), .zp(cfg.pr_zp),
    .act_min(cfg.pr_min), .act_max(cfg.pr_max),
    .in_valid(pr_v), .in_ready(pr_ready), .acc(pr_acc),
    .prm_rd_en, .prm_addr, .prm_data(pr_q),
    .rd_valid, .rd_data, .rd_pop, .idle(post_idle)
  );

  assign stall     = pr_v && !pr_ready;
  assign pipe_idle = !(s1.v || ex_v || f1_v || dw_v || f2_v || pr_v) && post_idle;
endmodule
