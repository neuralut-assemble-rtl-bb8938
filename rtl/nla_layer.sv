// nla_layer: one L-LUT layer of a NeuraLUT-Assemble network, with its input
// connectivity and an optional pipeline register.
//
// The layer holds W L-LUTs of fan-in F. How their inputs are wired depends
// on the layer kind (a_l in the paper's parameter list):
//   * ASSEMBLE = 1 (fixed sparsity, inner tree level): L-LUT j reads the
//     outputs j*F .. j*F+F-1 of the layer before, so consecutive groups of
//     F L-LUTs feed one L-LUT and layers of this kind stack into trees.
//     This needs IN_N == W*F.
//   * ASSEMBLE = 0 (first level of a tree): L-LUT j reads the F values
//     chosen by a learned mapping (nla_learned_map) from all IN_N inputs.
// With REGISTERED = 1 the layer outputs pass through a register; the top
// sets it after every PIPE_EVERY-th layer and after the last one, as in the
// two pipelining strategies the paper compares (a register after every
// layer, or after every three).
//
// Interface: in_act carries IN_N values of IN_BW bits (value i in
// [i*IN_BW +: IN_BW]); out_act carries W values of OUT_BW bits. in_valid is
// carried alongside, as this design's own addition, so users can tell which
// outputs are meaningful; only the valid bit is reset (active-low rst_n).
// Timing: combinational from in_act to out_act when REGISTERED = 0, one
// clock cycle of latency when REGISTERED = 1; a new input every cycle.
module nla_layer #(
  parameter int unsigned SEED       = 1,
  parameter int unsigned LAYER      = 0,
  parameter int unsigned IN_N       = 784,
  parameter int unsigned IN_BW      = 1,
  parameter int unsigned OUT_BW     = 1,
  parameter int unsigned W          = 2160,
  parameter int unsigned F          = 6,
  parameter bit          ASSEMBLE   = 1'b0,
  parameter bit          REGISTERED = 1'b0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [IN_N*IN_BW-1:0] in_act,
  output logic                 out_valid,
  output logic [W*OUT_BW-1:0]  out_act
);

  logic [W*F*IN_BW-1:0] lut_in;   // address of every L-LUT
  logic [W*OUT_BW-1:0]  lut_out;

  if (ASSEMBLE) begin : g_tree
    if (IN_N != W * F) begin : g_bad
      $error("assemble layer %0d: IN_N (%0d) must equal W*F (%0d)", LAYER, IN_N, W * F);
    end
    // fixed grouping: L-LUT j reads inputs j*F .. j*F+F-1
    assign lut_in = in_act[W*F*IN_BW-1:0];
  end else begin : g_map
    nla_learned_map #(
      .SEED (SEED), .LAYER(LAYER), .IN_N(IN_N), .BW(IN_BW), .W(W), .F(F)
    ) u_map (
      .in_vals (in_act),
      .sel     (lut_in)
    );
  end

  for (genvar j = 0; j < W; j++) begin : g_lut
    nla_llut #(
      .SEED(SEED), .LAYER(LAYER), .IDX(j), .F(F), .IN_BW(IN_BW), .OUT_BW(OUT_BW)
    ) u_llut (
      .addr (lut_in[j*F*IN_BW +: F*IN_BW]),
      .data (lut_out[j*OUT_BW +: OUT_BW])
    );
  end

  if (REGISTERED) begin : g_reg
    always_ff @(posedge clk) out_act <= lut_out;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_valid <= 1'b0;
      else        out_valid <= in_valid;
    end
  end else begin : g_comb
    assign out_act   = lut_out;
    assign out_valid = in_valid;
  end

endmodule
