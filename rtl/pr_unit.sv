// pr_unit: the Projection Unit, ENGINES projection engines side by side.
//
// The F2 element of expanded channel m is broadcast to every engine at once;
// engine j multiplies it with its own weight m and accumulates output channel j
// of the current pixel. After the last expanded channel all ENGINES output
// channels of the pixel are complete together. Engine count (56) and the
// broadcast are the paper's. Weights are loaded per engine through wr_engine.
//
// Timing: out_valid one cycle after the last channel of a pixel; frozen while
// en is low.
//
// The engines run in lockstep, so engine 0's out_valid stands for the unit and
// the other valid outputs are left unconnected (listed as unused by lint).
module pr_unit
  import dsc_pkg::*;
#(
  parameter int unsigned ENGINES = PR_ENGINES,
  parameter int unsigned DEPTH   = PRW_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     en,
  input  logic                     wr_en,
  input  logic [5:0]               wr_engine,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  int8_t                    wr_data,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  int8_t                    x,
  input  off_t                     offset,
  output logic                     out_valid,
  output acc_t [ENGINES-1:0]       acc
);
  logic [ENGINES-1:0] v;

  for (genvar j = 0; j < ENGINES; j++) begin : g_eng
    pr_engine #(.DEPTH(DEPTH)) u_eng (
      .clk, .rst, .en,
      .wr_en(wr_en && wr_engine == 6'(j)), .wr_addr, .wr_data,
      .in_valid, .first, .last, .addr, .x, .offset,
      .out_valid(v[j]), .acc_out(acc[j])
    );
  end

  assign out_valid = v[0];
endmodule
