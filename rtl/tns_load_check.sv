// tns_load_check -- Load Check of the TNS logic module.
//
// Looks at a recorded tree node (normally the LIFO output) and tells whether it still has
// numbers to sort: the node's number status is ANDed with "not sorted" and ORed together
// (the paper builds the OR from NOT and NAND gates). load = 1 means the node must be reloaded;
// load = 0 means the node and its whole sub-tree are sorted and the node can be discarded.
// Combinational.
module tns_load_check #(
  parameter int unsigned N = 32
) (
  input  logic         node_valid,
  input  logic [N-1:0] node_mask,
  input  logic [N-1:0] sorted,
  output logic         load
);
  assign load = node_valid && (|(node_mask & ~sorted));
endmodule
