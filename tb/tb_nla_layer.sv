// tb_nla_layer: checks one L-LUT layer of each kind.
//
// uL is the first layer of the NID network: 60 L-LUTs of fan-in 6 behind a
// learned mapping over 593 one-bit inputs, with its pipeline register.
// uT is the fourth NID layer: an assemble (tree) layer of 3 L-LUTs each
// reading 3 consecutive two-bit values, without a register. A stream of
// random vectors is driven one per clock, with occasional idle cycles; uL's
// outputs must equal the reference layer exactly one cycle later with
// out_valid following in_valid, uT's outputs must equal the reference in
// the same cycle. Reset must clear the valid bit.
module tb_nla_layer;
  import nla_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        vL_in, vL_out, vT_in, vT_out;
  logic [592:0] xL;  logic [119:0] yL;
  logic [17:0]  xT;  logic [5:0]   yT;

  nla_layer #(.SEED(1), .LAYER(0), .IN_N(593), .IN_BW(1), .OUT_BW(2), .W(60), .F(6),
              .ASSEMBLE(1'b0), .REGISTERED(1'b1))
    uL (.clk, .rst_n, .in_valid(vL_in), .in_act(xL), .out_valid(vL_out), .out_act(yL));
  nla_layer #(.SEED(1), .LAYER(3), .IN_N(9), .IN_BW(2), .OUT_BW(2), .W(3), .F(3),
              .ASSEMBLE(1'b1), .REGISTERED(1'b0))
    uT (.clk, .rst_n, .in_valid(vT_in), .in_act(xT), .out_valid(vT_out), .out_act(yT));

  task automatic check(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uint_q_t expL, prevL, xq, yq;
    logic prev_v;
    vL_in = 0; vT_in = 0; xL = '0; xT = '0;
    repeat (3) @(posedge clk);
    #1 check("valid cleared by reset", vL_out, 0);
    rst_n = 1;
    prev_v = 0;
    for (int t = 0; t < 200; t++) begin
      // drive a new vector after the clock edge
      @(negedge clk);
      vL_in = ($urandom % 5) != 0;
      vT_in = vL_in;
      xq.delete();
      for (int i = 0; i < 593; i++) begin xL[i] = 1'($urandom); xq.push_back(xL[i]); end
      xT = 18'($urandom);
      #1;
      // tree layer: combinational
      yq.delete();
      for (int i = 0; i < 9; i++) yq.push_back(xT[i*2 +: 2]);
      yq = ref_layer(3, 1, 3, yq);
      for (int j = 0; j < 3; j++) check($sformatf("T t%0d j%0d", t, j), yT[j*2 +: 2], yq[j]);
      check("T valid passes through", vT_out, vT_in);
      expL = ref_layer(3, 1, 0, xq);
      @(posedge clk); #1;
      // registered layer: one cycle later
      check($sformatf("L valid t%0d", t), vL_out, vL_in);
      for (int j = 0; j < 60; j++) check($sformatf("L t%0d j%0d", t, j), yL[j*2 +: 2], expL[j]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
