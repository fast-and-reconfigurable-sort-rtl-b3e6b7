// tb_tns_minmax_check -- self-checking test of the Min/Max Check.
//
// Random survivor sets (mostly sparse, so that one, two and many survivors all occur) are
// applied with random at_lsb, multi-bank sync (g_cnt, grant) and bit-slice group mode. A
// reference model checks the saturating local count, the last-number exit (one survivor),
// the repeated-number exit (LSB reached with two or more), and the located set: the lowest
// index, all survivors in group mode, nothing for a bank without the multi-bank grant.
// Combinational; each vector is checked 1 ns after it is applied.
module tb_tns_minmax_check;
  localparam int N = 32;
  logic [N-1:0] v_ne, pick;
  logic at_lsb, sync_en, grant, grp_mode, found, last, repeat_hit;
  logic [1:0] g_cnt, l_cnt;
  int checks = 0, failures = 0;
  int n_last = 0, n_rep = 0;

  tns_minmax_check #(.N(N)) dut (.v_ne, .at_lsb, .sync_en, .g_cnt, .grant, .grp_mode,
                                 .l_cnt, .found, .last, .repeat_hit, .pick);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int pop, cnt, e_cnt;
      logic [N-1:0] e_pick;
      logic e_last, e_rep;
      case ($urandom_range(3))
        0: v_ne = '0;
        1: v_ne = N'(1) << $urandom_range(N - 1);
        2: v_ne = (N'(1) << $urandom_range(N - 1)) | (N'(1) << $urandom_range(N - 1));
        default: v_ne = $urandom();
      endcase
      at_lsb = 1'($urandom()); sync_en = 1'($urandom()); grant = 1'($urandom());
      grp_mode = 1'($urandom()); g_cnt = 2'($urandom_range(2));
      #1;
      pop = $countones(v_ne);
      e_cnt = (pop > 2) ? 2 : pop;
      cnt = sync_en ? int'(g_cnt) : e_cnt;
      e_last = (cnt == 1);
      e_rep  = at_lsb && (cnt == 2);
      e_pick = '0;
      if (e_last || e_rep) begin
        if (grp_mode) e_pick = v_ne;
        else if (!sync_en || grant)
          for (int i = N - 1; i >= 0; i--) if (v_ne[i]) e_pick = N'(1) << i;
      end
      checks++;
      if (int'(l_cnt) != e_cnt || last != e_last || repeat_hit != e_rep ||
          found != (e_last || e_rep) || pick != e_pick) begin
        failures++;
        $display("FAIL v=%h lsb=%b sync=%b gcnt=%0d grant=%b grp=%b: cnt %0d last %b rep %b pick %h",
                 v_ne, at_lsb, sync_en, g_cnt, grant, grp_mode, l_cnt, last, repeat_hit, pick);
      end
      if (e_last) n_last++;
      if (e_rep) n_rep++;
    end
    checks++;
    if (n_last == 0 || n_rep == 0) begin
      failures++;
      $display("FAIL last / repeat exits not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
