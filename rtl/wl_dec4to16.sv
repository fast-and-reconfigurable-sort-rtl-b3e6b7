// wl_dec4to16 -- 4-to-16 line decoder with enable, the building block of the word-line
// decoder of the digit selector. Output j is high when en is high and a == j.
// Purely combinational.
module wl_dec4to16 (
  input  logic        en,
  input  logic [3:0]  a,
  output logic [15:0] y
);
  always_comb begin
    y = '0;
    if (en) y[a] = 1'b1;
  end
endmodule
