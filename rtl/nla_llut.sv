// nla_llut: one logical LUT (L-LUT) of a NeuraLUT-Assemble network.
//
// After training, the sub-network inside every L-LUT (a small MLP with its
// own skip connections) is evaluated for every possible combination of its
// F quantised inputs, and the results become a read-only truth table of
// 2^(F*IN_BW) entries of OUT_BW bits. In hardware the L-LUT is nothing but
// that ROM, read asynchronously: the F input codes, concatenated with input
// k in bits [k*IN_BW +: IN_BW], form the address. Synthesis maps the ROM
// onto physical 6-input LUTs (one per output bit when F*IN_BW <= 6, a
// circuit of them otherwise).
//
// The ROM-per-L-LUT structure follows the paper. The table contents are not
// published; they are filled at elaboration by nla_pkg::llut_entry(), a
// seeded stand-in neuron, and would be replaced by the trained table.
//
// Interface: addr (F*IN_BW bits) in, data (OUT_BW bits) out.
// Timing: purely combinational, no clock.
module nla_llut #(
  parameter int unsigned SEED   = 1,
  parameter int unsigned LAYER  = 0,   // layer index, selects the table
  parameter int unsigned IDX    = 0,   // L-LUT index within its layer
  parameter int unsigned F      = 6,   // fan-in (Table II)
  parameter int unsigned IN_BW  = 1,   // bits per input (Table II, beta)
  parameter int unsigned OUT_BW = 1    // bits per output (Table II, beta)
) (
  input  logic [F*IN_BW-1:0] addr,
  output logic [OUT_BW-1:0]  data
);

  localparam int unsigned AW      = F * IN_BW;
  localparam int unsigned ENTRIES = 1 << AW;

  // The whole truth table as one constant vector, entry a in bits
  // [a*OUT_BW +: OUT_BW] (the same form as an FPGA LUT's INIT value).
  typedef logic [ENTRIES*OUT_BW-1:0] table_t;

  function automatic table_t build_table();
    table_t t = '0;
    for (int unsigned a = 0; a < ENTRIES; a++)
      t[a*OUT_BW +: OUT_BW] = OUT_BW'(nla_pkg::llut_entry(SEED, LAYER, IDX, F, IN_BW, OUT_BW, 32'(a)));
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_comb data = TABLE[addr*OUT_BW +: OUT_BW];

endmodule
