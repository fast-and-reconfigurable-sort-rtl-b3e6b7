// tb_ne_fifo -- self-checking test of the bit-slice cross-array FIFO.
//
// A small FIFO (depth 4) and the default one (depth 32) see random pushes of survivor groups
// {sign flag, number mask}, pops and clears, checked each cycle against a queue model:
// head_valid / head_mask / head_neg show the oldest group, ready drops when full (a push then
// is refused, as the state controller stalls), empty when nothing is stored. Pushes while
// full and pops while empty are avoided, as in the system (both are asserted against).
module tb_ne_fifo;
  localparam int N = 32;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_full = 0;

  logic clear [2], push [2], pop [2], push_neg [2];
  logic [N-1:0] push_mask [2], head_mask [2];
  logic ready [2], head_valid [2], head_neg [2], empty [2];

  ne_fifo #(.N(N), .DEPTH(4)) u_small (.clk, .rst_n, .clear(clear[0]), .push(push[0]),
    .push_mask(push_mask[0]), .push_neg(push_neg[0]), .ready(ready[0]),
    .head_valid(head_valid[0]), .head_mask(head_mask[0]), .head_neg(head_neg[0]),
    .pop(pop[0]), .empty(empty[0]));
  ne_fifo u_dflt (.clk, .rst_n, .clear(clear[1]), .push(push[1]),
    .push_mask(push_mask[1]), .push_neg(push_neg[1]), .ready(ready[1]),
    .head_valid(head_valid[1]), .head_mask(head_mask[1]), .head_neg(head_neg[1]),
    .pop(pop[1]), .empty(empty[1]));

  logic [N:0] model [2][$];

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < 2; g++) begin
      clear[g] = 1'b0; push[g] = 1'b0; pop[g] = 1'b0; push_neg[g] = 1'b0; push_mask[g] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6000; t++) begin
      int depth;
      @(negedge clk);
      for (int g = 0; g < 2; g++) begin
        depth = (g == 0) ? 4 : 32;
        checks++;
        if (ready[g] != (model[g].size() < depth) || empty[g] != (model[g].size() == 0) ||
            head_valid[g] != (model[g].size() != 0) ||
            (model[g].size() != 0 && {head_neg[g], head_mask[g]} != model[g][0])) begin
          failures++;
          $display("FAIL fifo %0d: size %0d ready %b empty %b head %b/%h", g, model[g].size(),
                   ready[g], empty[g], head_neg[g], head_mask[g]);
        end
        if (!ready[g]) n_full++;
        clear[g] = ($urandom_range(199) == 0);
        push[g]  = ready[g] && ($urandom_range(99) < ((t / 1000) % 2 == 0 ? 70 : 30));
        pop[g]   = !empty[g] && ($urandom_range(99) < ((t / 1000) % 2 == 0 ? 30 : 70));
        push_neg[g] = 1'($urandom());
        push_mask[g] = $urandom();
      end
      @(posedge clk);
      for (int g = 0; g < 2; g++) begin
        if (clear[g]) model[g] = {};
        else begin
          logic [N:0] pushed;
          pushed = {push_neg[g], push_mask[g]};
          if (pop[g] && model[g].size() > 0) void'(model[g].pop_front());
          if (push[g]) model[g].push_back(pushed);
        end
      end
    end
    checks++;
    if (n_full == 0) begin
      failures++;
      $display("FAIL full condition never reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
