// instruction_controller: the Instruction Controller (IC) of the CFU.
//
// The CPU reaches the accelerator only through R-type custom instructions:
// function_id = {funct7, funct3} selects the operation and the two source
// registers arrive as in0 (rs1) and in1 (rs2); the 32-bit result goes back
// to rd. The paper fixes this interface style but not the instruction set;
// the encoding below is this design's:
//
//   funct3 OP_CFG    (0) write layer register funct7 (cfg_reg_e) with in0
//   funct3 OP_IFMAP  (1) in1 = {hi[31], chunk[21:16], row[15:8], col[7:0]}:
//                        write in0 into half hi of that pixel's chunk word
//   funct3 OP_EXW    (2) in1 = {hi[31], addr[11:0]}: expansion filter word half
//   funct3 OP_DWW    (3) in1 = {tap[19:16], m[8:0]}: one depthwise weight in0[7:0]
//   funct3 OP_PRW    (4) in1 = {engine[21:16], m[8:0]}: one projection weight
//   funct3 OP_QPARAM (5) funct7[1:0] = stage (0 ex, 1 dw, 2 pr),
//                        funct7[3:2] = field (qfield_e), in1 = channel, in0 = value
//   funct3 OP_START  (6) start the layer: every output pixel in raster order
//   funct3 OP_READ   (7) funct7 = 0: next 32-bit word of output pixels, the
//                        response waits until one is ready; funct7 = 1: status
//                        {30'b0, busy_issuing, busy}
//
// Sequencing: after OP_START the IC issues one work item per cycle into the
// pipeline, looping (outermost first) over output row, output column, expanded
// channel m and input chunk k. An item is held while stall is high. The IC's
// role of orchestrating the stages is the paper's; the loop order follows the
// paper's per-pixel, channel-by-channel dataflow.
//
// Handshake: cmd_ready is low while a response is pending or a read waits;
// rsp_valid stays high until rsp_ready. Reset is synchronous, active high.
//
// in1 bits [30:22] are not part of any encoding and are ignored.
module instruction_controller
  import dsc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // CFU command / response
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [9:0]  cmd_function_id,
  input  logic [31:0] cmd_in0,
  input  logic [31:0] cmd_in1,
  output logic        rsp_valid,
  input  logic        rsp_ready,
  output logic [31:0] rsp_out,
  // configuration
  output layer_cfg_t  cfg,
  // buffer loading (data is wr_data for all)
  output logic [31:0] wr_data,
  output logic        if_wr_en,
  output logic [3:0]  if_wr_bank,
  output logic [7:0]  if_wr_addr,
  output logic        wr_hi,
  output logic        exw_wr_en,
  output logic [11:0] exw_wr_addr,
  output logic        dww_wr_en,
  output logic [3:0]  dww_wr_tap,
  output logic [8:0]  wr_ch,
  output logic        prw_wr_en,
  output logic [5:0]  prw_wr_engine,
  output logic [2:0]  qp_wr_en,
  output qfield_e     qp_wr_field,
  // work items into the pipeline
  output logic        iss_valid,
  output logic [7:0]  iss_row,
  output logic [7:0]  iss_col,
  output logic [9:0]  iss_m,
  output logic [5:0]  iss_k,
  output logic        iss_kfirst,
  output logic        iss_klast,
  output logic        iss_mfirst,
  output logic        iss_mlast,
  input  logic        stall,
  input  logic        pipe_idle,
  // output pixels
  input  logic        rd_valid,
  input  logic [31:0] rd_data,
  output logic        rd_pop,
  output logic        busy
);
  logic [2:0] f3;
  logic [6:0] f7;
  logic       accept;
  logic       read_wait;

  assign f3 = cmd_function_id[2:0];
  assign f7 = cmd_function_id[9:3];
  assign cmd_ready = !rsp_valid && !read_wait;
  assign accept = cmd_valid && cmd_ready;

  // ---- buffer writes, in the accept cycle --------------------------------
  assign wr_data       = cmd_in0;
  assign wr_hi         = cmd_in1[31];
  assign if_wr_en      = accept && f3 == OP_IFMAP;
  assign if_wr_bank    = bank_of(9'(cmd_in1[15:8]), 9'(cmd_in1[7:0]));
  assign if_wr_addr    = addr_of(9'(cmd_in1[15:8]), 9'(cmd_in1[7:0]), cfg.w, cfg.nc, cmd_in1[21:16]);
  assign exw_wr_en     = accept && f3 == OP_EXW;
  assign exw_wr_addr   = cmd_in1[11:0];
  assign dww_wr_en     = accept && f3 == OP_DWW;
  assign dww_wr_tap    = cmd_in1[19:16];
  assign wr_ch         = cmd_in1[8:0];
  assign prw_wr_en     = accept && f3 == OP_PRW;
  assign prw_wr_engine = cmd_in1[21:16];
  assign qp_wr_field   = qfield_e'(f7[3:2]);
  always_comb begin
    qp_wr_en = '0;
    if (accept && f3 == OP_QPARAM && f7[1:0] != 2'd3) qp_wr_en[f7[1:0]] = 1'b1;
  end

  // ---- sequencer ---------------------------------------------------------
  logic issuing;
  assign iss_valid  = issuing;
  assign iss_kfirst = iss_k == '0;
  assign iss_klast  = iss_k == cfg.nc - 6'd1;
  assign iss_mfirst = iss_m == '0;
  assign iss_mlast  = iss_m == cfg.m - 10'd1;
  assign busy       = issuing || !pipe_idle;

  always_ff @(posedge clk) begin
    if (rst) begin
      issuing <= 1'b0;
      iss_row <= '0;
      iss_col <= '0;
      iss_m   <= '0;
      iss_k   <= '0;
    end else if (accept && f3 == OP_START && !issuing) begin
      issuing <= 1'b1;
      iss_row <= '0;
      iss_col <= '0;
      iss_m   <= '0;
      iss_k   <= '0;
    end else if (issuing && !stall) begin
      if (!iss_klast) iss_k <= iss_k + 6'd1;
      else begin
        iss_k <= '0;
        if (!iss_mlast) iss_m <= iss_m + 10'd1;
        else begin
          iss_m <= '0;
          if (iss_col != cfg.w - 8'd1) iss_col <= iss_col + 8'd1;
          else begin
            iss_col <= '0;
            if (iss_row != cfg.h - 8'd1) iss_row <= iss_row + 8'd1;
            else issuing <= 1'b0;
          end
        end
      end
    end
  end

  // ---- configuration registers -------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      cfg <= '0;
    end else if (accept && f3 == OP_CFG) begin
      case (cfg_reg_e'(f7[4:0]))
        CR_H:         cfg.h         <= cmd_in0[7:0];
        CR_W:         cfg.w         <= cmd_in0[7:0];
        CR_NC:        cfg.nc        <= cmd_in0[5:0];
        CR_M:         cfg.m         <= cmd_in0[9:0];
        CR_COUT:      cfg.cout      <= cmd_in0[6:0];
        CR_EX_IN_OFF: cfg.ex_in_off <= cmd_in0[8:0];
        CR_DW_IN_OFF: cfg.dw_in_off <= cmd_in0[8:0];
        CR_PR_IN_OFF: cfg.pr_in_off <= cmd_in0[8:0];
        CR_EX_ZP:     cfg.ex_zp     <= cmd_in0[7:0];
        CR_DW_ZP:     cfg.dw_zp     <= cmd_in0[7:0];
        CR_PR_ZP:     cfg.pr_zp     <= cmd_in0[7:0];
        CR_EX_MIN:    cfg.ex_min    <= cmd_in0[7:0];
        CR_EX_MAX:    cfg.ex_max    <= cmd_in0[7:0];
        CR_DW_MIN:    cfg.dw_min    <= cmd_in0[7:0];
        CR_DW_MAX:    cfg.dw_max    <= cmd_in0[7:0];
        CR_PR_MIN:    cfg.pr_min    <= cmd_in0[7:0];
        CR_PR_MAX:    cfg.pr_max    <= cmd_in0[7:0];
        default:      ;
      endcase
    end
  end

  // ---- responses ---------------------------------------------------------
  assign rd_pop = read_wait && rd_valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      rsp_valid <= 1'b0;
      rsp_out   <= '0;
      read_wait <= 1'b0;
    end else begin
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (rd_pop) begin
        read_wait <= 1'b0;
        rsp_valid <= 1'b1;
        rsp_out   <= rd_data;
      end
      if (accept) begin
        if (f3 == OP_READ && f7 == 7'd0) begin
          read_wait <= 1'b1;
        end else begin
          rsp_valid <= 1'b1;
          rsp_out   <= (f3 == OP_READ) ? {30'b0, issuing, busy} : 32'b0;
        end
      end
    end
  end

  // A response is held until the CPU takes it.
  a_rsp_hold: assert property (@(posedge clk) disable iff (rst)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_out));
endmodule
