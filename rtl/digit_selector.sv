// digit_selector -- word-line selection for one 1T1R array.
//
// The state controller sends a 5-bit row address (the digit position to read); a 5-32
// decoder made of two 4-16 decoders and one inverter on the top address bit turns on exactly
// one of 32 word-line switches. This structure follows the paper. An asserted wl[j] stands for
// the analog switch connecting word line j to V_ON; a low one stands for the switch grounding
// it. Combinational: the word line follows the address in the same cycle.
//
// Interface: en (read or program access), addr (row), wl (one-hot word lines).
module digit_selector (
  input  logic        en,
  input  logic [4:0]  addr,
  output logic [31:0] wl
);
  logic addr4_n;
  assign addr4_n = ~addr[4];          // the inverter that picks one of the two decoders

  wl_dec4to16 u_dec_lo (.en(en & addr4_n), .a(addr[3:0]), .y(wl[15:0]));
  wl_dec4to16 u_dec_hi (.en(en & addr[4]), .a(addr[3:0]), .y(wl[31:16]));

  always_comb begin
    if (en) assert ($onehot(wl)) else $error("digit_selector: word lines not one-hot");
  end
endmodule
