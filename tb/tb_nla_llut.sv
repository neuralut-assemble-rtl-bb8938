// tb_nla_llut: exhaustive check of the L-LUT ROM.
//
// Four L-LUT shapes from the published networks are instantiated (6x1-bit
// in / 1-bit out as in MNIST, 3x2-bit in / 2-bit out as in NID, 2x4-bit in /
// 4-bit out and 1x8-bit in / 4-bit out as in JSC CERNBox). Every address
// of every ROM is applied and the output compared with the reference
// model's L-LUT function. The L-LUT is combinational, so each address is
// held for one time step before it is read back.
module tb_nla_llut;
  import nla_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [5:0] a0;  logic [0:0] d0;
  logic [5:0] a1;  logic [1:0] d1;
  logic [7:0] a2;  logic [3:0] d2;
  logic [7:0] a3;  logic [3:0] d3;

  nla_llut #(.SEED(1), .LAYER(0), .IDX(17),  .F(6), .IN_BW(1), .OUT_BW(1)) u0 (.addr(a0), .data(d0));
  nla_llut #(.SEED(1), .LAYER(2), .IDX(5),   .F(3), .IN_BW(2), .OUT_BW(2)) u1 (.addr(a1), .data(d1));
  nla_llut #(.SEED(7), .LAYER(3), .IDX(31),  .F(2), .IN_BW(4), .OUT_BW(4)) u2 (.addr(a2), .data(d2));
  nla_llut #(.SEED(1), .LAYER(0), .IDX(300), .F(1), .IN_BW(8), .OUT_BW(4)) u3 (.addr(a3), .data(d3));

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
    int seen [4][int];
    for (int a = 0; a < 256; a++) begin
      a0 = 6'(a); a1 = 6'(a); a2 = 8'(a); a3 = 8'(a);
      #1;
      if (a < 64) begin
        check($sformatf("u0 addr %0d", a), d0, ref_entry(1, 0, 17, 6, 1, 1, a));
        check($sformatf("u1 addr %0d", a), d1, ref_entry(1, 2, 5, 3, 2, 2, a));
        seen[0][d0] = 1; seen[1][d1] = 1;
      end
      check($sformatf("u2 addr %0d", a), d2, ref_entry(7, 3, 31, 2, 4, 4, a));
      check($sformatf("u3 addr %0d", a), d3, ref_entry(1, 0, 300, 1, 8, 4, a));
      seen[2][d2] = 1; seen[3][d3] = 1;
    end
    // a usable table takes more than one value
    for (int i = 0; i < 4; i++) check($sformatf("u%0d distinct outputs > 1", i),
                                      seen[i].num() > 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
