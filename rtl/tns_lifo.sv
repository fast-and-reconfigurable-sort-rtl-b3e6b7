// tns_lifo -- length-K last-in-first-out store of recorded tree nodes.
//
// Each entry is a tree node: the column (digit row) index to resume from and the number
// status at that node (one bit per number, 1 = was valid when the node was read). The state
// controller pushes a node on state recording and reads the top on state reloading; a node is
// removed (pop) once the load check finds all its numbers sorted. When a push meets a full
// LIFO the oldest node is dropped, so the K most recent nodes are kept, as the paper
// describes ("record the k most recent tree nodes"). clear empties the store; a push in the same
// cycle as clear lands in an empty LIFO. Push and pop are never asserted together.
// One clock of latency: top_* reflect pushes and pops from the next cycle on.
module tns_lifo #(
  parameter int unsigned K   = 2,
  parameter int unsigned N   = 32,
  parameter int unsigned CIW = 5
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           push,
  input  logic           pop,
  input  logic [CIW-1:0] push_ci,
  input  logic [N-1:0]   push_mask,
  output logic [CIW-1:0] top_ci,
  output logic [N-1:0]   top_mask,
  output logic           empty,
  output logic           full,
  output logic [$clog2(K+1)-1:0] count
);
  typedef logic [$clog2(K+1)-1:0] cnt_t;

  logic [CIW-1:0] ci_q   [K];
  logic [N-1:0]   mask_q [K];
  cnt_t           cnt_q;
  cnt_t           base;

  assign base = clear ? cnt_t'(0) : cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      for (int i = 0; i < K; i++) begin
        ci_q[i]   <= '0;
        mask_q[i] <= '0;
      end
    end else if (push) begin
      if (base == cnt_t'(K)) begin
        for (int i = 0; i + 1 < K; i++) begin
          ci_q[i]   <= ci_q[i+1];
          mask_q[i] <= mask_q[i+1];
        end
        ci_q[K-1]   <= push_ci;
        mask_q[K-1] <= push_mask;
      end else begin
        ci_q[int'(base)]   <= push_ci;
        mask_q[int'(base)] <= push_mask;
        cnt_q        <= base + cnt_t'(1);
      end
    end else if (clear) begin
      cnt_q <= '0;
    end else if (pop && cnt_q != '0) begin
      cnt_q <= cnt_q - cnt_t'(1);
    end
  end

  always_comb begin
    top_ci   = '0;
    top_mask = '0;
    if (cnt_q != '0) begin
      top_ci   = ci_q[int'(cnt_q) - 1];
      top_mask = mask_q[int'(cnt_q) - 1];
    end
  end

  assign empty = (cnt_q == '0);
  assign full  = (cnt_q == cnt_t'(K));
  assign count = cnt_q;

  a_pp: assert property (@(posedge clk) disable iff (!rst_n) !(push && pop))
    else $error("tns_lifo: push and pop together");
endmodule
