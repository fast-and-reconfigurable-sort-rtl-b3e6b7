// digit_processor -- BEHAVIOURAL MODEL of the digit processor on the read PCB.
//
// Each bit line current flows through a sampling resistor R_S; comparators turn the sampled
// voltage into digit-read (DR) results. For single-level cells one comparator against V_REF
// (0.1 V) per bit line acts as the sense amplifier; for an n-bit multi-level cell an array of
// 2^n - 1 comparators per bit line (thermometer code) gives an n-bit value. Comparing V = I * R_S with V_ref is done here as
// comparing I with V_ref / R_S, a constant per comparator. That structure is
// the paper's; the multi-level reference voltages, placed midway between the sense voltages of
// adjacent conductance targets, are this design's choice.
//
// Interface: bl_i_pa (bit line currents in pA), ml_bits (1 = binary, 2..MLB = bits per cell),
// dr[c] (DR value of number c, right aligned, bit ml_bits-1 is the most significant).
// Combinational.
module digit_processor
  import msim_pkg::*;
#(
  parameter int unsigned COLS = ARRAY_COLS,
  parameter int unsigned MLB  = MLB_MAX
) (
  input  logic [31:0]    bl_i_pa [COLS],
  input  logic [1:0]     ml_bits,
  output logic [MLB-1:0] dr [COLS]
);
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      int unsigned code;
      code = 0;
      for (int unsigned n = 1; n <= MLB; n++)
        if ((ml_bits <= 2'd1 && n == 1) || (ml_bits > 2'd1 && 32'(ml_bits) == n))
          for (int unsigned j = 1; j < (1 << n); j++)
            if (bl_i_pa[c] > iref_pa(n, j)) code = code + 1;
      dr[c] = MLB'(code);
    end
  end
endmodule
