// tb_nla_top: end-to-end test of the inference core on the smaller
// published networks and both pipelining strategies.
//
// Four harnesses run in parallel: NID with a register after every layer
// (5 cycles latency) and after every three layers (2 cycles), JSC OpenML
// with three-layer pipelining (3 cycles) and JSC CERNBox, whose first layer
// has 8-bit inputs and whose L-LUTs exceed 6 inputs, with per-layer
// pipelining (7 cycles). Every output is compared with the reference model
// and every latency with ceil(layers / PIPE_EVERY). Each mechanism of the
// design (learned mappings, tree layers, per-layer and three-layer
// pipelining, back-to-back inputs, idle cycles) must occur at least once.
module tb_nla_top;
  localparam int NH = 4;
  logic clk = 0;
  always #5 clk = ~clk;

  logic done [NH];
  int   c [NH], f [NH], b2b [NH], bub [NH], res [NH], mp [NH], tr [NH], lat [NH];

  nla_top_harness #(.NET(nla_pkg::NET_NID),         .PIPE_EVERY(1), .N_VEC(60)) h0 (
    .clk, .done(done[0]), .checks(c[0]), .failures(f[0]), .n_back_to_back(b2b[0]),
    .n_bubbles(bub[0]), .n_results(res[0]), .n_map_layers(mp[0]), .n_tree_layers(tr[0]),
    .n_latency_ok(lat[0]));
  nla_top_harness #(.NET(nla_pkg::NET_NID),         .PIPE_EVERY(3), .N_VEC(60)) h1 (
    .clk, .done(done[1]), .checks(c[1]), .failures(f[1]), .n_back_to_back(b2b[1]),
    .n_bubbles(bub[1]), .n_results(res[1]), .n_map_layers(mp[1]), .n_tree_layers(tr[1]),
    .n_latency_ok(lat[1]));
  nla_top_harness #(.NET(nla_pkg::NET_JSC_OPENML),  .PIPE_EVERY(3), .N_VEC(60)) h2 (
    .clk, .done(done[2]), .checks(c[2]), .failures(f[2]), .n_back_to_back(b2b[2]),
    .n_bubbles(bub[2]), .n_results(res[2]), .n_map_layers(mp[2]), .n_tree_layers(tr[2]),
    .n_latency_ok(lat[2]));
  nla_top_harness #(.NET(nla_pkg::NET_JSC_CERNBOX), .PIPE_EVERY(1), .N_VEC(60)) h3 (
    .clk, .done(done[3]), .checks(c[3]), .failures(f[3]), .n_back_to_back(b2b[3]),
    .n_bubbles(bub[3]), .n_results(res[3]), .n_map_layers(mp[3]), .n_tree_layers(tr[3]),
    .n_latency_ok(lat[3]));

  int checks = 0, failures = 0;

  task automatic need(string what, int count);
    checks++;
    $display("mechanism %-28s occurred %0d times", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism %s never occurred", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int all_b2b = 0, all_bub = 0, all_map = 0, all_tree = 0;
    // the harnesses clear done at time 0; look only after the first edges
    repeat (4) @(posedge clk);
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < NH; i++) begin
      checks += c[i]; failures += f[i];
      all_b2b += b2b[i]; all_bub += bub[i]; all_map += mp[i]; all_tree += tr[i];
    end
    need("learned-mapping layer", all_map);
    need("assemble (tree) layer", all_tree);
    need("per-layer pipelining", lat[0] + lat[3]);
    need("three-layer pipelining", lat[1] + lat[2]);
    need("back-to-back inputs", all_b2b);
    need("idle input cycles", all_bub);
    need("NID results", res[0] + res[1]);
    need("JSC OpenML results", res[2]);
    need("JSC CERNBox results", res[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
