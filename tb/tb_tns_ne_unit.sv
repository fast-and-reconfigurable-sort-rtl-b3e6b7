// tb_tns_ne_unit -- self-checking test of the number-exclusion (NE) unit.
//
// Random working sets and digit reads for 1-, 2- and 3-bit digits, the three data types and
// min / max searches are applied. The reference keeps, from the working set, the numbers whose
// digit is extreme in the search direction: on a sign digit the sign bit decides first
// (negative first for min in both signed formats), then the remaining digit bits; for
// sign-magnitude magnitudes the direction flips while only negative numbers remain (min) or
// no positive number remains (max), signalled by neg_rem / pos_rem. ren must be high exactly
// when the digit read held both 0's and 1's (so some number was excluded). In multi-bank sync
// mode (binary digits), exclusion follows the global has-0 / has-1 flags, and the local
// flags are checked. Combinational; each vector is checked 1 ns after it is applied.
module tb_tns_ne_unit;
  import msim_pkg::*;
  localparam int N = 32;
  localparam int MLB = 3;
  logic [N-1:0] v_in, v_out;
  logic [MLB-1:0] dr [N];
  logic [1:0] ml_bits;
  dtype_e dtype;
  logic find_max, sign_digit, neg_rem, pos_rem, sync_en, g_has0, g_has1, l_has0, l_has1, ren;
  int checks = 0, failures = 0;
  int n_ren = 0, n_sync = 0;

  tns_ne_unit #(.N(N), .MLB(MLB)) dut (.v_in, .dr, .ml_bits, .dtype, .find_max, .sign_digit,
    .neg_rem, .pos_rem, .sync_en, .g_has0, .g_has1, .l_has0, .l_has1, .v_out, .ren);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 6000; t++) begin
      int m, best;
      logic [N-1:0] e_v, set;
      logic e_h0, e_h1, sgn_first, big;
      m = $urandom_range(1, 3);
      ml_bits = 2'(m);
      v_in = $urandom();
      for (int i = 0; i < N; i++) dr[i] = MLB'($urandom() & ((1 << m) - 1));
      case ($urandom_range(2))
        0: dtype = DT_UNSIGNED;
        1: dtype = DT_TWOS;
        default: dtype = DT_SIGNMAG;
      endcase
      find_max = 1'($urandom());
      sign_digit = 1'($urandom());
      sync_en = (m == 1) && ($urandom_range(3) == 0);
      e_h0 = 1'b0; e_h1 = 1'b0;
      for (int i = 0; i < N; i++) if (v_in[i]) begin
        if (dr[i][0]) e_h1 = 1'b1; else e_h0 = 1'b1;
      end
      g_has0 = e_h0 | 1'($urandom());
      g_has1 = e_h1 | 1'($urandom());
      // neg_rem / pos_rem as the controller would hold them for this working set
      neg_rem = 1'($urandom()); pos_rem = 1'($urandom());
      if (dtype == DT_SIGNMAG && sign_digit) begin
        neg_rem = 1'b0; pos_rem = 1'b0;
        for (int i = 0; i < N; i++) if (v_in[i]) begin
          if (dr[i][m-1]) neg_rem = 1'b1; else pos_rem = 1'b1;
        end
      end
      #1;
      // reference
      set = v_in;
      sgn_first = (dtype != DT_UNSIGNED) && sign_digit;
      if (sgn_first) begin
        logic [N-1:0] s1;
        logic want;
        want = !find_max;                    // min prefers negative (sign 1)
        s1 = '0;
        for (int i = 0; i < N; i++) if (set[i] && dr[i][m-1] == want) s1[i] = 1'b1;
        if (s1 != '0) set = s1;
      end
      // remaining bits
      big = find_max;
      if (dtype == DT_SIGNMAG) big = find_max ? pos_rem : neg_rem;
      begin
        int bits, lo_best;
        bits = sgn_first ? m - 1 : m;
        lo_best = -1;
        if (dtype == DT_TWOS && sgn_first) big = find_max;
        for (int i = 0; i < N; i++) if (set[i]) begin
          int d;
          d = int'(dr[i]) & ((1 << bits) - 1);
          if (lo_best < 0 || (big ? d > lo_best : d < lo_best)) lo_best = d;
        end
        e_v = '0;
        for (int i = 0; i < N; i++)
          if (set[i] && (int'(dr[i]) & ((1 << bits) - 1)) == lo_best) e_v[i] = 1'b1;
      end
      if (sync_en) begin
        logic ex1;
        ex1 = sgn_first ? find_max : !big;
        e_v = v_in;
        if (g_has0 && g_has1)
          for (int i = 0; i < N; i++) if (v_in[i] && dr[i][0] == ex1) e_v[i] = 1'b0;
        n_sync++;
      end
      checks++;
      if (v_out != e_v || ren != (sync_en ? (g_has0 && g_has1) : (e_v != v_in)) ||
          l_has0 != e_h0 || l_has1 != e_h1) begin
        failures++;
        $display("FAIL m=%0d %s max=%b sign=%b sync=%b: v_out %h expected %h ren %b",
                 m, dtype.name(), find_max, sign_digit, sync_en, v_out, e_v, ren);
      end
      if (ren) n_ren++;
    end
    checks++;
    if (n_ren == 0 || n_sync == 0) begin
      failures++;
      $display("FAIL exclusions or sync not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
