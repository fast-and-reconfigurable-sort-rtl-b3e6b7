// tb_write_verify_ctrl -- self-checking test of the write-verify programming controller.
//
// A cell model in the testbench follows the controller's operations with the same step rule
// as the array model (DC reset to the high resistance state; SET / RESET pulses change the
// conductance by 1/16, at least 200 nS). Every conductance level of the 3-bit multi-level
// table is written from random starting states; the test checks that the flow starts with a
// reset, that the cell ends inside [G_t - dG, G_t + dG] with success, that the pulse count
// matches the pulses seen, and the latency of the flowchart: reset, read, check, then one
// read + check per pulse, and a registered done (4 + 2 x pulses cycles from start to done). With a pulse budget
// n_max too small, the controller must stop after n_max pulses and report failure.
module tb_write_verify_ctrl;
  import msim_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0;
  logic [31:0] g_target = '0, g_tol = '0, g_read;
  logic [9:0] n_max = 10'd100;
  cell_op_e op;
  logic busy, done, success;
  logic [9:0] pulses;

  write_verify_ctrl dut (.clk, .rst_n, .start, .g_target, .g_tol, .n_max, .g_read, .op,
                         .busy, .done, .success, .pulses);

  int unsigned g;
  int n_pulse_seen, n_reset_seen;
  assign g_read = g;

  always @(posedge clk) begin
    int unsigned step;
    step = (g / 16 > 200) ? g / 16 : 200;
    case (op)
      CELL_DC_RESET:    begin g <= G_HRS_NS; n_reset_seen++; end
      CELL_DC_SET:      g <= G_LRS_NS;
      CELL_PULSE_SET:   begin g <= (g + step > G_MAX_NS) ? G_MAX_NS : g + step; n_pulse_seen++; end
      CELL_PULSE_RESET: begin g <= (g - step < G_MIN_NS) ? G_MIN_NS : g - step; n_pulse_seen++; end
      default: ;
    endcase
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_cell(input int unsigned tgt, input int unsigned tol, input int nmax,
                         input bit expect_ok);
    int cyc;
    @(negedge clk);
    g = $urandom_range(G_MAX_NS, G_MIN_NS);
    g_target = tgt; g_tol = tol; n_max = 10'(nmax);
    n_pulse_seen = 0; n_reset_seen = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done && cyc < 1000) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (success != expect_ok || n_reset_seen != 1 || int'(pulses) != n_pulse_seen ||
        cyc != 4 + 2 * n_pulse_seen ||
        (expect_ok && (g + tol < tgt || g > tgt + tol)) ||
        (!expect_ok && n_pulse_seen != nmax)) begin
      failures++;
      $display("FAIL target %0d: g %0d success %b pulses %0d/%0d resets %0d cycles %0d",
               tgt, g, success, pulses, n_pulse_seen, n_reset_seen, cyc);
    end
  endtask

  initial begin
    g = G_HRS_NS;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 5; rep++)
      for (int lv = 0; lv < 8; lv++)
        write_cell(level_target_ns(lv, 3), level_tol_ns(lv, 3), 100, 1'b1);
    // a level below the reset state needs RESET pulses
    write_cell(1000, 100, 100, 1'b1);
    // pulse budget exhausted
    write_cell(level_target_ns(7, 3), level_tol_ns(7, 3), 3, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
