// tb_nla_top_full: the inference core at its default size, the MNIST
// network of the paper (784 one-bit pixels, 2160/360/2160/360/60/10
// L-LUTs of fan-in 6, ten 6-bit class scores, a register after every third
// layer, so a latency of 2 cycles).
//
// Random binary images are streamed in, mostly back to back with some idle
// cycles; every output vector is compared with the reference model and
// every latency with the expected 2 cycles. The idle input must leave
// out_valid low.
module tb_nla_top_full;
  import nla_ref_pkg::*;

  localparam int N_VEC = 24;
  localparam int LAT   = 2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [783:0] in_data = '0;
  logic [59:0]  out_data;
  always #5 clk = ~clk;

  nla_top dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_data);

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
    uint_q_t exp_q [$];
    int      iss_q [$];
    int      cyc = 0, sent = 0, idle = 0, distinct = 0;
    int unsigned first_score = 0;
    repeat (2) @(posedge clk);
    #1 check("out_valid low in reset", out_valid, 0);
    @(negedge clk) rst_n = 1;
    while (sent < N_VEC || exp_q.size() != 0) begin
      @(negedge clk);
      in_valid = (sent < N_VEC) && (($urandom % 4) != 0);
      if (in_valid) begin
        automatic uint_q_t x;
        for (int i = 0; i < 784; i++) begin
          in_data[i] = 1'($urandom);
          x.push_back(in_data[i]);
        end
        exp_q.push_back(ref_forward(0, 1, x));
        iss_q.push_back(cyc);
        sent++;
      end else if (sent < N_VEC) idle++;
      @(posedge clk);
      cyc++;
      #1;
      if (out_valid) begin
        if (exp_q.size() == 0) check("out_valid without input", 1, 0);
        else begin
          automatic uint_q_t e = exp_q.pop_front();
          automatic int      c = iss_q.pop_front();
          check("latency", cyc - c, LAT);
          for (int j = 0; j < 10; j++) begin
            check($sformatf("image %0d score %0d", sent, j), out_data[j*6 +: 6], e[j]);
            if (checks == 3 && j == 0) first_score = e[j];
            if (e[j] != first_score) distinct++;
          end
        end
      end
    end
    check("idle cycles occurred", idle > 0, 1);
    check("scores not all equal", distinct > 0, 1);
    $display("streamed %0d images with %0d idle cycles", sent, idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
