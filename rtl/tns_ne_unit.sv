// tns_ne_unit -- "All 0's or 1's" check and number exclusion (NE) of one digit read.
//
// Input is the set of valid numbers taking part in this DR (v_in) and their DR values.
// For each bit of the digit, from its most significant bit down, the unit checks whether
// the valid results hold both 0's and 1's; only then (ren) it excludes the numbers reading
// the losing value. With binary cells this is the paper's single-bit NE; with ML-n-bit cells
// the bit-wise enables en[n-1..0] are applied in turn, which leaves only the numbers holding
// the smallest (min search) or largest (max search) digit, as the paper's multi-level NE does.
//
// Which value loses follows the data-type rules of the paper:
//   unsigned            min: exclude 1's           max: exclude 0's
//   two's complement    the sign bit is inverted: min excludes 0's there, max excludes 1's
//   sign-magnitude/FP   sign bit: min excludes 0's (positives), max excludes 1's (negatives);
//                       other bits: min excludes 0's while unsorted negatives remain, else 1's;
//                       max excludes 0's while unsorted positives remain, else 1's
// sign_digit marks the digit holding the sign bit (its top used bit is the sign).
//
// Multi-bank synchronisation: l_has0/l_has1 report whether this bank's valid results hold a 0
// ("not all 1's") or a 1 ("not all 0's") on digit bit 0. With sync_en the bank decides on
// the cross-array ORed g_has0/g_has1 instead, so that all banks exclude as one sorter. The
// paper uses this with binary cells; sync is applied to bit 0 only, so it is meant for
// ml_bits = 1. Combinational.
module tns_ne_unit
  import msim_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned MLB = 3
) (
  input  logic [N-1:0]   v_in,
  input  logic [MLB-1:0] dr [N],
  input  logic [1:0]     ml_bits,
  input  dtype_e         dtype,
  input  logic           find_max,
  input  logic           sign_digit,
  input  logic           neg_rem,
  input  logic           pos_rem,
  input  logic           sync_en,
  input  logic           g_has0,
  input  logic           g_has1,
  output logic           l_has0,
  output logic           l_has1,
  output logic [N-1:0]   v_out,
  output logic           ren
);
  logic [MLB-1:0] excl_ones;
  // Polarity per digit bit: 1 = numbers reading 1 are excluded.
  always_comb begin
    for (int b = 0; b < MLB; b++) begin
      logic is_sign;
      is_sign = sign_digit && (b == int'(ml_bits) - 1);
      unique case (dtype)
        DT_TWOS:    excl_ones[b] = is_sign ? find_max : !find_max;
        DT_SIGNMAG: excl_ones[b] = is_sign ? find_max : (find_max ? !pos_rem : !neg_rem);
        default:    excl_ones[b] = !find_max;
      endcase
    end
  end

  // Local bit-0 report for the cross-array processor (multi-bank sync is for binary cells,
  // where bit 0 is the whole digit).
  always_comb begin
    logic [N-1:0] ones0;
    for (int i = 0; i < N; i++) ones0[i] = dr[i][0];
    l_has0 = |(v_in & ~ones0);
    l_has1 = |(v_in & ones0);
  end

  always_comb begin
    logic [N-1:0] v, ones;
    logic h0, h1;
    ones   = '0;
    h0     = 1'b0;
    h1     = 1'b0;
    v      = v_in;
    ren    = 1'b0;
    for (int b = MLB - 1; b >= 0; b--) begin
      if (b < int'(ml_bits)) begin
        for (int i = 0; i < N; i++) ones[i] = dr[i][b];
        h1 = |(v & ones);
        h0 = |(v & ~ones);
        if (b == 0 && sync_en) begin
          h0 = g_has0;
          h1 = g_has1;
        end
        if (h0 && h1) begin
          ren = 1'b1;
          v   = excl_ones[b] ? (v & ~ones) : (v & ones);
        end
      end
    end
    v_out = v;
  end
endmodule
