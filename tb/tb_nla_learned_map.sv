// tb_nla_learned_map: checks the learned-mapping routing stage.
//
// Two instances: the NID second learned mapping (20 two-bit values into 9
// groups of 3) and the MNIST input mapping (784 pixels into 2160 groups of
// 6). Random input vectors are applied; every output slot must carry the
// input value the reference connection list names, and the F picks of
// every group must be distinct inputs.
module tb_nla_learned_map;
  import nla_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [20*2-1:0]  in_a;  logic [9*3*2-1:0]  sel_a;
  logic [783:0]     in_b;  logic [2160*6-1:0] sel_b;

  nla_learned_map #(.SEED(1), .LAYER(2), .IN_N(20),  .BW(2), .W(9),    .F(3)) ua (.in_vals(in_a), .sel(sel_a));
  nla_learned_map #(.SEED(1), .LAYER(0), .IN_N(784), .BW(1), .W(2160), .F(6)) ub (.in_vals(in_b), .sel(sel_b));

  task automatic check(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // distinct picks per group
    for (int j = 0; j < 9; j++)
      for (int k = 0; k < 3; k++)
        for (int m = k + 1; m < 3; m++)
          check($sformatf("A group %0d picks %0d,%0d distinct", j, k, m),
                ref_map(1, 2, j, k, 20, 3) != ref_map(1, 2, j, m, 20, 3), 1);
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < 40; i++)  in_a[i] = 1'($urandom);
      for (int i = 0; i < 784; i++) in_b[i] = 1'($urandom);
      #1;
      for (int j = 0; j < 9; j++)
        for (int k = 0; k < 3; k++) begin
          automatic int unsigned s = ref_map(1, 2, j, k, 20, 3);
          check($sformatf("A g%0d k%0d", j, k), sel_a[(j*3+k)*2 +: 2], in_a[s*2 +: 2]);
        end
      for (int j = 0; j < 2160; j++)
        for (int k = 0; k < 6; k++) begin
          automatic int unsigned s = ref_map(1, 0, j, k, 784, 6);
          check($sformatf("B g%0d k%0d", j, k), sel_b[j*6+k], in_b[s]);
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
