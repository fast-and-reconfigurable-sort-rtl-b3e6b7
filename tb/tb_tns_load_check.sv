// tb_tns_load_check -- self-checking test of the Load Check.
//
// The Load Check says whether the LIFO top node still holds a number that is not sorted
// (load = node valid and node_mask & ~sorted not empty). Random node masks and sorted
// vectors, with forced cases of fully sorted nodes, are checked against that rule.
// Combinational; each vector is checked 1 ns after it is applied.
module tb_tns_load_check;
  localparam int N = 32;
  logic node_valid, load;
  logic [N-1:0] node_mask, sorted;
  int checks = 0, failures = 0;
  int n_load = 0, n_skip = 0;

  tns_load_check #(.N(N)) dut (.node_valid, .node_mask, .sorted, .load);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic e;
      node_valid = ($urandom_range(9) != 0);
      node_mask  = $urandom() & $urandom();
      sorted     = $urandom();
      if ($urandom_range(2) == 0) sorted = sorted | node_mask;   // fully sorted node
      #1;
      e = node_valid && ((node_mask & ~sorted) != '0);
      checks++;
      if (load != e) begin
        failures++;
        $display("FAIL valid=%b mask=%h sorted=%h load=%b", node_valid, node_mask, sorted, load);
      end
      if (e) n_load++; else if (node_valid) n_skip++;
    end
    checks++;
    if (n_load == 0 || n_skip == 0) begin
      failures++;
      $display("FAIL both outcomes must occur");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
