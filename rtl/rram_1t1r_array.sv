// rram_1t1r_array -- BEHAVIOURAL MODEL of the 32x32 1T1R memristor crossbar chip
// (TiN/TaOx/HfO2/TiN devices on 180 nm CMOS). It is not synthesizable hardware: the
// cells are analog conductances, kept here as integers in nanosiemens.
//
// Organisation (as in the paper): one word line (WL) per digit position, one bit line (BL)
// per stored number, so a digit read (DR) of digit j turns on WL j, applies V_READ on the
// source lines and returns the current of every bit line at once. A cell in the low
// resistance state (high conductance) stores 1, the high resistance state stores 0.
// Multi-level cells hold one of eight conductance states.
//
// Read: bl_i_pa[c] = sum over active word lines r of G[r][c] * V_READ, in picoamperes
// (nS x mV), combinational, only while read_en is high.
// Programming (one cell per clock edge, at prog_row/prog_col): DC set/reset jump to the LRS/HRS
// values; a SET pulse raises the conductance by 1/16 (at least 200 nS), a RESET pulse lowers it
// by 1/16, both clamped to [G_MIN, G_MAX]. Conductances are kept in 16 bits (up to 65535 nS). These step sizes are this model's own choice,
// shaped after the gradual pulse response the paper reports; device variation is not modelled.
// meas_g_ns returns the addressed cell's conductance, the verify read of write-verify.
// The array starts with every cell in the high resistance state.
module rram_1t1r_array
  import msim_pkg::*;
#(
  parameter int unsigned ROWS = ARRAY_ROWS,
  parameter int unsigned COLS = ARRAY_COLS
) (
  input  logic                    clk,
  input  logic [ROWS-1:0]         wl,
  input  logic                    read_en,
  output logic [31:0]             bl_i_pa [COLS],
  input  cell_op_e                prog_op,
  input  logic [$clog2(ROWS)-1:0] prog_row,
  input  logic [$clog2(COLS)-1:0] prog_col,
  output logic [31:0]             meas_g_ns
);
  logic [15:0] g_ns [ROWS][COLS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        g_ns[r][c] = 16'(G_HRS_NS);
  end

  function automatic logic [15:0] pulse_up(input logic [15:0] g);
    logic [16:0] step, n;
    step = ((g >> 4) > 16'd200) ? 17'(g >> 4) : 17'd200;
    n = 17'(g) + step;
    return (n > 17'(G_MAX_NS)) ? 16'(G_MAX_NS) : n[15:0];
  endfunction

  function automatic logic [15:0] pulse_down(input logic [15:0] g);
    logic [15:0] step, n;
    step = ((g >> 4) > 16'd200) ? (g >> 4) : 16'd200;
    n = (g > step) ? g - step : 16'd0;
    return (n < 16'(G_MIN_NS)) ? 16'(G_MIN_NS) : n;
  endfunction

  always_ff @(posedge clk) begin
    case (prog_op)
      CELL_DC_SET:      g_ns[prog_row][prog_col] <= 16'(G_LRS_NS);
      CELL_DC_RESET:    g_ns[prog_row][prog_col] <= 16'(G_HRS_NS);
      CELL_PULSE_SET:   g_ns[prog_row][prog_col] <= pulse_up(g_ns[prog_row][prog_col]);
      CELL_PULSE_RESET: g_ns[prog_row][prog_col] <= pulse_down(g_ns[prog_row][prog_col]);
      default: ;
    endcase
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [31:0] gsum;
      gsum = '0;
      if (read_en)
        for (int r = 0; r < ROWS; r++)
          if (wl[r]) gsum = gsum + 32'(g_ns[r][c]);
      bl_i_pa[c] = gsum * V_READ_MV;
    end
  end

  assign meas_g_ns = 32'(g_ns[prog_row][prog_col]);
endmodule
