// tb_ca_mb_sync -- self-checking test of the multi-bank cross-array processor.
//
// For four banks, random local reports are applied and compared with a reference: every
// global flag is the OR of the local flags, the global survivor count is the sum of the local
// counts saturated at 2, and the grant goes to the lowest bank that still has a survivor (so
// among equal values the lowest global address is output first). The output controller is
// checked to pass on the one bank that outputs, with its bank number.
// Combinational; each vector is checked 1 ns after it is applied.
module tb_ca_mb_sync;
  localparam int NB = 4;
  logic [NB-1:0] l_has0, l_has1, l_topload, l_lenload, l_negrem, l_posrem, l_left, grant;
  logic [1:0] l_cnt [NB];
  logic g_has0, g_has1, g_topload, g_lenload, g_negrem, g_posrem, g_left;
  logic [1:0] g_cnt;
  logic [NB-1:0] bank_valid;
  logic [4:0] bank_idx [NB];
  logic out_valid;
  logic [1:0] out_bank;
  logic [4:0] out_idx;
  int checks = 0, failures = 0;

  ca_mb_sync #(.NB(NB), .IDXW(5)) dut (
    .l_has0, .l_has1, .l_cnt, .l_topload, .l_lenload, .l_negrem, .l_posrem, .l_left,
    .g_has0, .g_has1, .g_cnt, .g_topload, .g_lenload, .g_negrem, .g_posrem, .g_left,
    .grant, .bank_valid, .bank_idx, .out_valid, .out_bank, .out_idx
  );

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int sum, vb;
      logic [NB-1:0] e_grant;
      {l_has0, l_has1, l_topload, l_lenload} = 16'($urandom());
      {l_negrem, l_posrem, l_left} = 12'($urandom());
      for (int b = 0; b < NB; b++) begin
        l_cnt[b] = ($urandom_range(2) == 0) ? 2'($urandom_range(2)) : 2'd0;
        bank_idx[b] = 5'($urandom());
      end
      vb = $urandom_range(NB);
      bank_valid = (vb == NB) ? '0 : NB'(1) << vb;
      #1;
      sum = 0;
      e_grant = '0;
      for (int b = 0; b < NB; b++) begin
        sum += int'(l_cnt[b]);
        if (e_grant == '0 && l_cnt[b] != 2'd0) e_grant[b] = 1'b1;
      end
      checks++;
      if (g_has0 != |l_has0 || g_has1 != |l_has1 || g_topload != |l_topload ||
          g_lenload != |l_lenload || g_negrem != |l_negrem || g_posrem != |l_posrem ||
          g_left != |l_left || int'(g_cnt) != ((sum > 2) ? 2 : sum) || grant != e_grant) begin
        failures++;
        $display("FAIL sync: cnt %0d (sum %0d) grant %b expected %b", g_cnt, sum, grant, e_grant);
      end
      checks++;
      if (out_valid != (vb < NB) ||
          (vb < NB && (int'(out_bank) != vb || out_idx != bank_idx[vb]))) begin
        failures++;
        $display("FAIL output controller: bank %0d", vb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
