// tb_digit_processor -- self-checking test of the digit processor (sense amplifiers and
// comparator arrays).
//
// Bit-line currents are made from the conductance targets of every level for binary, 2-bit
// and 3-bit cells (G x V_READ), spread by up to +/- 9 % (inside the write-verify window), and
// the digit read must return the stored level on every bit line. Binary reads of the DC
// set / reset states must give 1 / 0 (the V_REF = 0.1 V comparator).
// Combinational; checked 1 ns after each vector.
module tb_digit_processor;
  import msim_pkg::*;
  logic [31:0] bl_i_pa [32];
  logic [1:0] ml_bits;
  logic [2:0] dr [32];
  int checks = 0, failures = 0;

  digit_processor dut (.bl_i_pa, .ml_bits, .dr);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned lv [32];
    for (int t = 0; t < 600; t++) begin
      int n;
      bit ok;
      n = 1 + t % 3;
      ml_bits = 2'(n);
      for (int c = 0; c < 32; c++) begin
        int unsigned gt;
        int spread;
        lv[c] = $urandom_range((1 << n) - 1);
        gt = level_target_ns(lv[c], n);
        if (t < 50 && n == 1) gt = (lv[c] != 0) ? G_LRS_NS : G_HRS_NS;
        spread = $urandom_range(18) - 9;                  // percent
        gt = int'(longint'(gt) * (100 + longint'(spread)) / 100);
        bl_i_pa[c] = gt * V_READ_MV;
      end
      #1;
      ok = 1'b1;
      for (int c = 0; c < 32; c++) if (int'(dr[c]) != lv[c]) ok = 1'b0;
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL %0d-bit read: dr[0]=%0d expected %0d", n, dr[0], lv[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
