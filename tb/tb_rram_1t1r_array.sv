// tb_rram_1t1r_array -- self-checking test of the 1T1R array model.
//
// A conductance model of all 32 x 32 cells follows random programming operations (DC set /
// reset, SET / RESET pulses, including runs of pulses that reach the clamps). After every
// operation the test checks the verify read of the addressed cell and the bit-line currents
// of a random word-line pattern (usually one word line, sometimes several, whose currents
// must add up; no current while read_en is low): I = sum G x V_READ in pA.
module tb_rram_1t1r_array;
  import msim_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] wl = '0;
  logic read_en = 1'b0;
  logic [31:0] bl_i_pa [32];
  cell_op_e prog_op = CELL_NOP;
  logic [4:0] prog_row = '0, prog_col = '0;
  logic [31:0] meas_g_ns;

  rram_1t1r_array dut (.clk, .wl, .read_en, .bl_i_pa, .prog_op, .prog_row, .prog_col,
                       .meas_g_ns);

  int unsigned g [32][32];

  function automatic int unsigned step_of(input int unsigned x);
    return (x / 16 > 200) ? x / 16 : 200;
  endfunction

  task automatic check_reads();
    bit ok;
    ok = (meas_g_ns == g[prog_row][prog_col]);
    for (int c = 0; c < 32; c++) begin
      longint unsigned s;
      s = 0;
      if (read_en) for (int r = 0; r < 32; r++) if (wl[r]) s += longint'(g[r][c]);
      if (bl_i_pa[c] != 32'(s * V_READ_MV)) ok = 1'b0;
    end
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL cell (%0d,%0d): meas %0d expected %0d", prog_row, prog_col, meas_g_ns,
               g[prog_row][prog_col]);
    end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_clamp_hi, n_clamp_lo;
    n_clamp_hi = 0; n_clamp_lo = 0;
    for (int r = 0; r < 32; r++) for (int c = 0; c < 32; c++) g[r][c] = G_HRS_NS;
    @(negedge clk);
    read_en = 1'b1; wl = 32'h1;
    #1 check_reads();
    for (int t = 0; t < 3000; t++) begin
      int r, c, k;
      @(negedge clk);
      r = (t % 500 < 100) ? 3 : $urandom_range(31);
      c = (t % 500 < 100) ? 7 : $urandom_range(31);
      prog_row = 5'(r); prog_col = 5'(c);
      k = $urandom_range(9);
      prog_op = (k < 2) ? CELL_DC_SET : (k < 4) ? CELL_DC_RESET :
                (k < 7) ? CELL_PULSE_SET : CELL_PULSE_RESET;
      if (t % 500 < 50) prog_op = CELL_PULSE_SET;
      else if (t % 500 < 100) prog_op = CELL_PULSE_RESET;
      @(posedge clk);
      case (prog_op)
        CELL_DC_SET:    g[r][c] = G_LRS_NS;
        CELL_DC_RESET:  g[r][c] = G_HRS_NS;
        CELL_PULSE_SET: begin
          g[r][c] = g[r][c] + step_of(g[r][c]);
          if (g[r][c] >= G_MAX_NS) begin g[r][c] = G_MAX_NS; n_clamp_hi++; end
        end
        default: begin
          g[r][c] = (g[r][c] > step_of(g[r][c])) ? g[r][c] - step_of(g[r][c]) : 0;
          if (g[r][c] <= G_MIN_NS) begin g[r][c] = G_MIN_NS; n_clamp_lo++; end
        end
      endcase
      @(negedge clk);
      prog_op = CELL_NOP;
      read_en = ($urandom_range(9) != 0);
      wl = ($urandom_range(4) == 0) ? $urandom() : 32'(1) << $urandom_range(31);
      #1 check_reads();
    end
    checks++;
    if (n_clamp_hi == 0 || n_clamp_lo == 0) begin
      failures++;
      $display("FAIL conductance clamps not reached");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
