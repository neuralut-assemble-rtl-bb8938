// nla_top_harness: drives one nla_top configuration end to end and checks
// it against the reference model (nla_ref_pkg::ref_forward).
//
// After reset it feeds N_VEC random input vectors, one per clock when
// in_valid is drawn high (about four cycles in five), so the pipeline sees
// both back-to-back inputs and idle cycles. Each accepted vector's expected
// output is queued with its issue cycle; whenever out_valid is high the
// oldest entry is popped and the output and the latency (which must be
// ceil(layers / PIPE_EVERY) cycles) are compared. It reports its totals
// and the number of times each mechanism occurred on its outputs.
module nla_top_harness #(
  parameter nla_pkg::net_e NET        = nla_pkg::NET_NID,
  parameter int unsigned   PIPE_EVERY = 1,
  parameter int unsigned   N_VEC      = 50
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_back_to_back,  // consecutive valid inputs
  output int   n_bubbles,       // idle cycles inside the stream
  output int   n_results,       // outputs compared
  output int   n_map_layers,    // learned-mapping layers traversed
  output int   n_tree_layers,   // assemble (tree) layers traversed
  output int   n_latency_ok     // results with the expected latency
);
  import nla_ref_pkg::*;

  localparam int unsigned IN_N   = nla_pkg::net_in_n(NET);
  localparam int unsigned IN_BW  = nla_pkg::net_in_bw(NET);
  localparam int unsigned OUT_N  = nla_pkg::net_out_n(NET);
  localparam int unsigned OUT_BW = nla_pkg::net_out_bw(NET);
  localparam int unsigned LAT    = nla_pkg::net_latency(NET, PIPE_EVERY);
  localparam int          NETI   = int'(NET);

  logic                     rst_n = 1'b0;
  logic                     in_valid = 1'b0, out_valid;
  logic [IN_N*IN_BW-1:0]    in_data = '0;
  logic [OUT_N*OUT_BW-1:0]  out_data;

  nla_top #(.NET(NET), .PIPE_EVERY(PIPE_EVERY), .SEED(1)) dut (
    .clk, .rst_n, .in_valid, .in_data, .out_valid, .out_data
  );

  task automatic check(string what, int unsigned got, int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL net%0d pipe%0d %s: got %0d expected %0d",
                                  NETI, PIPE_EVERY, what, got, exp);
    end
  endtask

  initial begin
    uint_q_t   exp_q [$];
    int        iss_q [$];
    automatic int   cyc = 0, sent = 0;
    automatic logic prev_v = 1'b0;
    done = 0; checks = 0; failures = 0; n_back_to_back = 0; n_bubbles = 0;
    n_results = 0; n_map_layers = 0; n_tree_layers = 0; n_latency_ok = 0;
    repeat (2) @(posedge clk);
    #1 check("out_valid low in reset", out_valid, 0);
    @(negedge clk) rst_n = 1'b1;
    while (sent < N_VEC || exp_q.size() != 0) begin
      @(negedge clk);
      in_valid = (sent < N_VEC) && (($urandom % 5) != 0);
      if (in_valid) begin
        automatic uint_q_t x;
        for (int i = 0; i < IN_N; i++) begin
          automatic int unsigned v = $urandom % (1 << IN_BW);
          in_data[i*IN_BW +: IN_BW] = IN_BW'(v);
          x.push_back(v);
        end
        exp_q.push_back(ref_forward(NETI, 1, x));
        iss_q.push_back(cyc);
        sent++;
        if (prev_v) n_back_to_back++;
      end else if (sent > 0 && sent < N_VEC) begin
        n_bubbles++;
      end
      prev_v = in_valid;
      @(posedge clk);
      cyc++;
      #1;
      if (out_valid) begin
        if (exp_q.size() == 0) begin
          check("out_valid without input", 1, 0);
        end else begin
          automatic uint_q_t e = exp_q.pop_front();
          automatic int      c = iss_q.pop_front();
          check("latency", cyc - c, LAT);
          if (cyc - c == LAT) n_latency_ok++;
          for (int j = 0; j < OUT_N; j++)
            check($sformatf("output %0d", j), out_data[j*OUT_BW +: OUT_BW], e[j]);
          n_results++;
          for (int l = 0; l < ref_layers(NETI); l++)
            if (ref_assemble(NETI, l)) n_tree_layers++; else n_map_layers++;
        end
      end
      if (cyc > 20 * (N_VEC + 10)) begin
        check("results drained", exp_q.size(), 0);
        break;
      end
    end
    done = 1;
  end
endmodule
