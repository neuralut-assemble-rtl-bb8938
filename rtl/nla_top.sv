// nla_top: a complete NeuraLUT-Assemble inference core.
//
// The network is a chain of L-LUT layers described by nla_pkg for the
// selected configuration NET (default: the MNIST network, 784 one-bit pixels
// in, ten 6-bit class scores out, six layers of widths
// 2160/360/2160/360/60/10 and fan-in 6). A non-assemble layer starts a new
// forest of trees: a learned mapping picks each first-level L-LUT's inputs,
// and the assemble layers that follow combine consecutive groups of F
// outputs until the next non-assemble layer or the network output. All
// arithmetic of the trained sub-networks is folded into the L-LUT ROMs, so
// the core is only ROMs, fixed wiring and pipeline registers.
//
// Pipelining: a register follows every PIPE_EVERY-th layer and the last
// layer. PIPE_EVERY = 3 is the latency-oriented strategy the paper uses in
// its main comparison; PIPE_EVERY = 1 registers every layer (throughput-
// oriented). The latency is nla_pkg::net_latency() = ceil(layers / PIPE_EVERY) clock
// cycles, and a new input vector is accepted every cycle.
//
// Interface: in_data holds net_in_n values of net_in_bw bits (feature i in
// [i*in_bw +: in_bw]); out_data holds net_out_n values of net_out_bw bits.
// in_valid/out_valid and the active-low asynchronous reset of the valid
// pipeline are this design's own choice; the paper evaluates the core out
// of context and names no I/O protocol.
module nla_top #(
  parameter nla_pkg::net_e NET        = nla_pkg::NET_MNIST,
  parameter int unsigned   PIPE_EVERY = 3,
  parameter int unsigned   SEED       = 1
) (
  input  logic                                                         clk,
  input  logic                                                         rst_n,
  input  logic                                                         in_valid,
  input  logic [nla_pkg::net_in_n(NET)*nla_pkg::net_in_bw(NET)-1:0]    in_data,
  output logic                                                         out_valid,
  output logic [nla_pkg::net_out_n(NET)*nla_pkg::net_out_bw(NET)-1:0]  out_data
);

  localparam int unsigned NL      = nla_pkg::net_layers(NET);
  localparam int unsigned MAXB    = nla_pkg::net_max_bits(NET);
  localparam int unsigned IN_BITS = nla_pkg::net_in_n(NET) * nla_pkg::net_in_bw(NET);

  // act[l] is the input of layer l, act[NL] the network output; each is
  // MAXB wide and used from bit 0 upwards.
  logic [MAXB-1:0] act   [NL+1];
  logic            valid [NL+1];

  if (IN_BITS < MAXB) begin : g_pad_in
    assign act[0] = {{(MAXB-IN_BITS){1'b0}}, in_data};
  end else begin : g_full_in
    assign act[0] = in_data;
  end
  assign valid[0] = in_valid;

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam nla_pkg::layer_cfg_t C = nla_pkg::layer_cfg(NET, l);
    localparam int unsigned IB = C.in_n * C.in_bw;
    localparam int unsigned OB = C.w * C.out_bw;
    localparam bit REG = ((l + 1) % PIPE_EVERY == 0) || (l + 1 == NL);

    logic [OB-1:0] y;

    nla_layer #(
      .SEED(SEED), .LAYER(l), .IN_N(C.in_n), .IN_BW(C.in_bw), .OUT_BW(C.out_bw),
      .W(C.w), .F(C.f), .ASSEMBLE(C.assemble), .REGISTERED(REG)
    ) u_layer (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (valid[l]),
      .in_act    (act[l][IB-1:0]),
      .out_valid (valid[l+1]),
      .out_act   (y)
    );

    if (OB < MAXB) begin : g_pad
      assign act[l+1] = {{(MAXB-OB){1'b0}}, y};
    end else begin : g_full
      assign act[l+1] = y;
    end
  end

  assign out_data  = act[NL][$bits(out_data)-1:0];
  assign out_valid = valid[NL];

endmodule
