// tns_minmax_check -- Min/Max Check of the TNS logic module.
//
// After number exclusion it decides whether the current search iteration has located a
// min/max. Last-number check: exactly one valid number is left, whatever digit has been
// reached. Otherwise, if the least significant digit has been read, the survivors are equal
// (repeated numbers): one of them is output now and the controller stays on the LSB for the
// others (repeated-number check). Otherwise the search moves to the next digit.
//
// Counts are kept saturated at 2 (0, 1, "2 or more"), which is all the checks need. With
// sync_en (multi-bank) the decision uses the cross-array count g_cnt, and only the bank that
// holds the grant outputs. grp_mode (head of a bit-slice chain) hands the whole survivor set
// on instead of picking one number. pick is one-hot, lowest index first (assumed order among
// equal values; the paper does not fix it). Combinational.
module tns_minmax_check #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0] v_ne,
  input  logic         at_lsb,
  input  logic         sync_en,
  input  logic [1:0]   g_cnt,
  input  logic         grant,
  input  logic         grp_mode,
  output logic [1:0]   l_cnt,
  output logic         found,
  output logic         last,
  output logic         repeat_hit,
  output logic [N-1:0] pick
);
  logic [1:0] cnt;
  logic [N-1:0] first;

  always_comb begin
    l_cnt = 2'd0;
    for (int i = 0; i < N; i++)
      if (v_ne[i] && l_cnt != 2'd2) l_cnt = l_cnt + 2'd1;
    first = v_ne & (~v_ne + N'(1));        // lowest set bit
  end

  assign cnt        = sync_en ? g_cnt : l_cnt;
  assign last       = (cnt == 2'd1);
  assign repeat_hit = at_lsb && (cnt == 2'd2);
  assign found      = last || repeat_hit;

  always_comb begin
    pick = '0;
    if (found) begin
      if (grp_mode)                   pick = v_ne;
      else if (!sync_en || grant)     pick = first;
    end
  end
endmodule
