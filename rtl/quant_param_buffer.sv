// quant_param_buffer: a per-channel bias buffer (used three times: expansion,
// depthwise and projection).
//
// Each entry holds the bias, the Q31 requantization multiplier and the shift of
// one channel (qparam_t). The CPU writes one field per instruction; the
// post-processing pipeline reads a whole entry per cycle. The paper names the
// three bias buffers and says bias addition and requantization are applied per
// stage; storing the per-channel multiplier and shift next to the bias, as
// int8 models with per-channel quantization need, is this design's choice.
//
// Timing: synchronous write; synchronous read with enable, one cycle latency.
module quant_param_buffer
  import dsc_pkg::*;
#(
  parameter int unsigned DEPTH = DWW_DEPTH
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  qfield_e                  wr_field,
  input  logic [31:0]              wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output qparam_t                  rd_data
);
  logic signed [31:0] bias_mem  [DEPTH];
  logic signed [31:0] mult_mem  [DEPTH];
  logic signed [7:0]  shift_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      case (wr_field)
        QF_BIAS:  bias_mem[wr_addr]  <= wr_data;
        QF_MULT:  mult_mem[wr_addr]  <= wr_data;
        QF_SHIFT: shift_mem[wr_addr] <= wr_data[7:0];
        default:  ;
      endcase
    end
    if (rd_en) begin
      rd_data.bias  <= bias_mem[rd_addr];
      rd_data.mult  <= mult_mem[rd_addr];
      rd_data.shift <= shift_mem[rd_addr];
    end
  end
endmodule
