// nla_learned_map: the "learned mappings" stage of a NeuraLUT-Assemble
// network, placed in front of every non-assemble L-LUT layer.
//
// Every L-LUT of such a layer sees only F of the IN_N values produced by
// the layer before (or of the network inputs). Which F is decided after a
// first, dense training run with a hardware-aware group regulariser and
// structured pruning; afterwards the choice is fixed, so in hardware the
// stage is a constant routing network: output group j, slot k carries input
// value nla_pkg::map_index(SEED, LAYER, j, k, IN_N, F).
//
// The paper fixes what the stage does (select F inputs per L-LUT, chosen by
// training); the trained connection lists are not published, so this design
// derives them from a seed with F distinct picks per L-LUT.
//
// Interface: in_vals holds IN_N values of BW bits, value i in
// [i*BW +: BW]; sel holds W groups of F values, value k of group j in
// [(j*F+k)*BW +: BW], ready to be used as the address of L-LUT j.
// Timing: combinational. After synthesis the stage is nothing but wires,
// every output bit being a copy of one input bit: a learned mapping has no
// logic of its own, its whole function is which input feeds which L-LUT.
module nla_learned_map #(
  parameter int unsigned SEED  = 1,
  parameter int unsigned LAYER = 0,
  parameter int unsigned IN_N  = 784,
  parameter int unsigned BW    = 1,
  parameter int unsigned W     = 2160,
  parameter int unsigned F     = 6
) (
  input  logic [IN_N*BW-1:0]  in_vals,
  output logic [W*F*BW-1:0]   sel
);

  for (genvar j = 0; j < W; j++) begin : g_lut
    for (genvar k = 0; k < F; k++) begin : g_in
      localparam int unsigned SRC = nla_pkg::map_index(SEED, LAYER, j, k, IN_N, F);
      assign sel[(j*F+k)*BW +: BW] = in_vals[SRC*BW +: BW];
    end
  end

endmodule
