// prune_mask -- in-situ pruning mask for the matrix-vector multiplication that follows a sort.
//
// While TNS locates the smallest-magnitude weights of a layer one by one, each located
// weight address (bank, index) sets its bit in a mask register; the matching input of the
// later in-memory MVM is then forced to 0, which discards that weight (the paper's in-situ
// pruning: "I[TNS_min(abs(W))] = 0"). The number of weights to prune, N x p, is chosen by
// the sorter's output limit; this block only records and applies the mask.
//
// Interface: clear empties the mask; rec_valid/rec_addr record one address per cycle; x_in
// are the MVM input codes, x_out the same inputs with pruned positions at zero
// (combinational); mask is the current pruning mask; count the number of pruned weights.
module prune_mask #(
  parameter int unsigned NW = 1024,
  parameter int unsigned XW = 8,
  localparam int unsigned AW = $clog2(NW)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          rec_valid,
  input  logic [AW-1:0] rec_addr,
  input  logic [XW-1:0] x_in  [NW],
  output logic [XW-1:0] x_out [NW],
  output logic [NW-1:0] mask,
  output logic [AW:0]   count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask  <= '0;
      count <= '0;
    end else if (clear) begin
      mask  <= '0;
      count <= '0;
    end else if (rec_valid && !mask[rec_addr]) begin
      mask[rec_addr] <= 1'b1;
      count          <= count + (AW+1)'(1);
    end
  end

  always_comb
    for (int i = 0; i < NW; i++) x_out[i] = mask[i] ? '0 : x_in[i];
endmodule
