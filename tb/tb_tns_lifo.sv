// tb_tns_lifo -- self-checking test of the length-k tree-node LIFO.
//
// A queue model follows random push / pop / clear traffic on two LIFOs (k = 2, the default,
// and k = 3). Each cycle the test compares top_ci, top_mask, empty, full and count with the
// model. Pushing onto a full LIFO must drop the oldest node (the bottom entry), as the paper's
// LIFO keeps the most recent k nodes; a directed sequence checks that case explicitly.
// Push and pop are never asserted together (the controller never does so).
module tb_tns_lifo;
  localparam int N = 32;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        clear [2], push [2], pop [2];
  logic [4:0]  push_ci [2];
  logic [N-1:0] push_mask [2];
  logic [4:0]  top_ci [2];
  logic [N-1:0] top_mask [2];
  logic        empty [2], full [2];
  logic [1:0]  count2;
  logic [1:0]  count3;

  tns_lifo #(.K(2), .N(N), .CIW(5)) u_k2 (
    .clk, .rst_n, .clear(clear[0]), .push(push[0]), .pop(pop[0]), .push_ci(push_ci[0]),
    .push_mask(push_mask[0]), .top_ci(top_ci[0]), .top_mask(top_mask[0]), .empty(empty[0]),
    .full(full[0]), .count(count2)
  );
  tns_lifo #(.K(3), .N(N), .CIW(5)) u_k3 (
    .clk, .rst_n, .clear(clear[1]), .push(push[1]), .pop(pop[1]), .push_ci(push_ci[1]),
    .push_mask(push_mask[1]), .top_ci(top_ci[1]), .top_mask(top_mask[1]), .empty(empty[1]),
    .full(full[1]), .count(count3)
  );

  typedef struct packed { logic [4:0] ci; logic [N-1:0] mask; } node_t;
  node_t model [2][$];

  task automatic compare(input int g, input string when);
    int kk, cnt;
    kk  = g + 2;
    cnt = (g == 0) ? int'(count2) : int'(count3);
    checks++;
    if (cnt != model[g].size() || empty[g] != (model[g].size() == 0) ||
        full[g] != (model[g].size() == kk) ||
        (model[g].size() > 0 && (top_ci[g] != model[g][$].ci || top_mask[g] != model[g][$].mask))) begin
      failures++;
      $display("FAIL k=%0d %s: count %0d/%0d top %0d/%h", kk, when, cnt, model[g].size(),
               top_ci[g], top_mask[g]);
    end
  endtask

  task automatic step(input int g, input int op, input node_t nd);
    @(negedge clk);
    clear[g] = (op == 3 || op == 4); push[g] = (op == 1 || op == 4); pop[g] = (op == 2);
    push_ci[g] = nd.ci; push_mask[g] = nd.mask;
    @(posedge clk);
    if (op == 3 || op == 4) model[g] = {};
    if (op == 1 || op == 4) begin
      if (model[g].size() == g + 2) void'(model[g].pop_front());
      model[g].push_back(nd);
    end
    if (op == 2 && model[g].size() > 0) void'(model[g].pop_back());
    @(negedge clk);
    clear[g] = 1'b0; push[g] = 1'b0; pop[g] = 1'b0;
    compare(g, $sformatf("after op %0d", op));
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    node_t a, b, c;
    for (int g = 0; g < 2; g++) begin
      clear[g] = 1'b0; push[g] = 1'b0; pop[g] = 1'b0; push_ci[g] = '0; push_mask[g] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare(0, "reset"); compare(1, "reset");

    // directed: k = 2 overflow keeps the two newest nodes
    a = '{ci: 5'd1, mask: 32'h0000_000F};
    b = '{ci: 5'd2, mask: 32'h0000_00F0};
    c = '{ci: 5'd3, mask: 32'h0000_0F00};
    step(0, 1, a); step(0, 1, b); step(0, 1, c);
    checks++;
    if (top_ci[0] != 5'd3 || !full[0]) begin failures++; $display("FAIL overflow top"); end
    step(0, 2, a);
    checks++;
    if (top_ci[0] != 5'd2 || top_mask[0] != 32'h0000_00F0) begin
      failures++; $display("FAIL oldest node not dropped");
    end
    step(0, 2, a);
    checks++;
    if (!empty[0]) begin failures++; $display("FAIL not empty after two pops"); end
    step(0, 2, a);                         // pop on empty is ignored

    // random traffic: 1 push, 2 pop, 3 clear, 4 clear+push (restart with a new node)
    for (int i = 0; i < 3000; i++) begin
      int g, op, r;
      node_t nd;
      g  = i % 2;
      r  = $urandom_range(99);
      op = (r < 45) ? 1 : (r < 85) ? 2 : (r < 93) ? 3 : 4;
      nd.ci = 5'($urandom());
      nd.mask = $urandom();
      step(g, op, nd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
