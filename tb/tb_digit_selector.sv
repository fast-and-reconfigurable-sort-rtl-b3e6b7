// tb_digit_selector -- self-checking test of the 5-32 word-line decoder.
//
// All 32 addresses with the enable high must turn on exactly word line addr (one-hot), and
// with the enable low no word line may be on. Combinational; checked 1 ns after each vector.
module tb_digit_selector;
  logic en;
  logic [4:0] addr;
  logic [31:0] wl;
  int checks = 0, failures = 0;

  digit_selector dut (.en, .addr, .wl);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 32; a++) begin
        en = 1'(e);
        addr = 5'(a);
        #1;
        checks++;
        if (wl != (e != 0 ? 32'(1) << a : 32'd0)) begin
          failures++;
          $display("FAIL en=%0d addr=%0d wl=%h", e, a, wl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
