// ex_unit: the Expansion Unit, nine Expansion Engines in an input-stationary
// arrangement.
//
// The nine pixels of the 3x3 tile around the current output pixel stay on the
// tile inputs while the expansion filters stream past: engine p works on tile
// position p (p = 3*dy + dx) and every engine receives the same filter chunk.
// After the N/8 chunks of filter m the unit delivers the nine raw values of
// channel m of the intermediate map F1 for the whole tile at once. Nine engines,
// the broadcast filter and the stationary tile are the paper's.
//
// The engines run in lockstep, so engine 0's out_valid stands for the unit and
// the other eight are left unconnected (a lint tool lists them as unused).
//
// Timing: raw/out_valid one cycle after the last chunk; frozen while en is low.
module ex_unit
  import dsc_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst,
  input  logic                              en,
  input  logic                              in_valid,
  input  logic                              first,
  input  logic                              last,
  input  logic [EX_ENGINES-1:0][WORD_W-1:0] tile,
  input  logic [WORD_W-1:0]                 weights,
  input  off_t                              offset,
  output logic                              out_valid,
  output acc_t [EX_ENGINES-1:0]             raw
);
  logic [EX_ENGINES-1:0] v;

  for (genvar p = 0; p < EX_ENGINES; p++) begin : g_eng
    ex_engine u_eng (
      .clk, .rst, .en, .in_valid, .first, .last,
      .ifmap(tile[p]), .weights, .offset,
      .out_valid(v[p]), .acc_out(raw[p])
    );
  end

  assign out_valid = v[0];
endmodule
