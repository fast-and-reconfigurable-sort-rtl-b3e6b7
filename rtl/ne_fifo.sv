// ne_fifo -- cross-array processor configured for the bit-slice (BS) strategy.
//
// Between the sub-sorter holding the upper digits and the one holding the next lower
// digits, it queues the number status of each min/max located by the upper slice: a mask
// of the numbers sharing that min/max on the upper digits (one number, or several equal
// ones that the lower slice must tell apart), plus a flag telling whether the group is
// negative (for sign-magnitude and floating point data, whose sign bit lives in the upper
// slice). The lower slice uses each entry to initialise its number status. The queue lets the
// two slices work as a pipeline on different search iterations.
//
// Interface: push/push_mask/push_neg with ready = not full; head_* valid while not empty,
// pop consumes the head. One cycle latency from push to head. DEPTH defaults to 32, one entry
// per number of a 32-number array, so it can never fill (the paper only says the FIFOs are
// made large enough).
module ne_fifo #(
  parameter int unsigned N     = 32,
  parameter int unsigned DEPTH = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         push,
  input  logic [N-1:0] push_mask,
  input  logic         push_neg,
  output logic         ready,
  output logic         head_valid,
  output logic [N-1:0] head_mask,
  output logic         head_neg,
  input  logic         pop,
  output logic         empty
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [N:0]  mem_q [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [AW:0]   cnt_q;
  logic          do_push, do_pop;

  assign ready      = (cnt_q != (AW+1)'(DEPTH));
  assign empty      = (cnt_q == '0);
  assign head_valid = !empty;
  assign {head_neg, head_mask} = mem_q[rd_q];
  assign do_push    = push && ready;
  assign do_pop     = pop && !empty;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else if (clear) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) wr_q <= inc(wr_q);
      if (do_pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem_q[wr_q] <= {push_neg, push_mask};
  end

  a_push: assert property (@(posedge clk) disable iff (!rst_n) !(push && !ready))
    else $error("ne_fifo: push while full");
  a_pop: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("ne_fifo: pop while empty");
endmodule
