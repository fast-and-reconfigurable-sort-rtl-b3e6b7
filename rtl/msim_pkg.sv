// msim_pkg -- types and constants shared by the memristor sort-in-memory (MSIM) design.
//
// The array geometry (32 word lines = digit positions, 32 bit lines = numbers), the read
// voltage, the sampling resistor and the comparator reference follow the experimental system
// (32x32 1T1R chip, V_READ = 0.2 V, R_S = 100 kOhm, V_REF = 0.1 V). The numeric conductance
// values of the binary states and of the eight multi-level targets are this design's own
// choice: the paper plots them but does not print them. They are only used by the
// behavioural array and comparator models and by the write-verify targets.
package msim_pkg;

  localparam int unsigned ARRAY_ROWS = 32;   // word lines: one per digit position
  localparam int unsigned ARRAY_COLS = 32;   // bit lines: one per stored number
  localparam int unsigned MLB_MAX    = 3;    // up to ML-3-bit cells (8 conductance states)

  // Electrical operating point of the read path (Table of experimental conditions).
  localparam int unsigned V_READ_MV  = 200;
  localparam int unsigned R_S_KOHM   = 100;
  localparam int unsigned V_REF_MV   = 100;

  // Binary states reached by DC set/reset (assumed values, ON/OFF ratio 20 > 16.14).
  localparam int unsigned G_HRS_NS   = 2000;
  localparam int unsigned G_LRS_NS   = 40000;
  localparam int unsigned G_MIN_NS   = 500;
  localparam int unsigned G_MAX_NS   = 60000;

  // Number representation handled by number exclusion.
  typedef enum logic [1:0] {
    DT_UNSIGNED = 2'd0,   // unsigned fixed point
    DT_TWOS     = 2'd1,   // two's complement fixed point
    DT_SIGNMAG  = 2'd2    // sign-and-magnitude, also IEEE-754 floating point
  } dtype_e;

  // Sorting strategy of the multi-array system.
  typedef enum logic [1:0] {
    CA_TNS = 2'd0,        // basic TNS on bank 0 (binary or multi-level cells)
    CA_MB  = 2'd1,        // multi-bank: all banks synchronised as one long sorter
    CA_BS  = 2'd2,        // bit-slice: banks hold digit slices, chained by NE FIFOs
    CA_PML = 2'd3         // pseudo multi-level: banks 0 and 1 read together as 2-bit digits
  } ca_mode_e;

  // Programming operation applied to one cell.
  typedef enum logic [2:0] {
    CELL_NOP         = 3'd0,
    CELL_DC_SET      = 3'd1,   // DC sweep to the low resistance state (logic 1)
    CELL_DC_RESET    = 3'd2,   // DC sweep to the high resistance state (logic 0)
    CELL_PULSE_SET   = 3'd3,   // one SET pulse on the top electrode: conductance up
    CELL_PULSE_RESET = 3'd4    // one RESET pulse on the bottom electrode: conductance down
  } cell_op_e;

  // One-cycle event flags reported by a sub-sorter, used for statistics and tests.
  typedef struct packed {
    logic dr;          // a digit read was performed
    logic sr;          // a tree node was recorded (state recording)
    logic sr_drop;     // recording into a full LIFO dropped its oldest node
    logic reload;      // a recorded node was reloaded
    logic redundant;   // a cycle was spent discarding a fully sorted node
    logic restart;     // a search restarted at the MSB because the LIFO was empty
    logic last;        // last-number check located a min/max
    logic repeat_hit;  // repeated-number check located one of several equal values
    logic grp_out;     // a survivor group was handed to the next bit slice
    logic grp_in;      // a survivor group was taken from the previous bit slice
    logic stall;       // the sub-sorter waited for FIFO space
  } tns_ev_t;

  // Eight non-linearly spaced target conductances for multi-level cells (assumed values).
  function automatic int unsigned gt_ns(input int unsigned i);
    case (i)
      0: return 2000;
      1: return 4000;
      2: return 7000;
      3: return 11000;
      4: return 16000;
      5: return 22000;
      6: return 30000;
      default: return 40000;
    endcase
  endfunction

  // Conductance target of value v stored in an n-bit cell: states are picked from the
  // eight-state table with stride 2^(3-n).
  function automatic int unsigned level_target_ns(input int unsigned v, input int unsigned n);
    return gt_ns(v << (MLB_MAX - n));
  endfunction

  // Error tolerance of the write-verify window: 10 % of the target, as a table so that no
  // divider is built.
  function automatic int unsigned gtol_ns(input int unsigned i);
    case (i)
      0: return 200;
      1: return 400;
      2: return 700;
      3: return 1100;
      4: return 1600;
      5: return 2200;
      6: return 3000;
      default: return 4000;
    endcase
  endfunction

  function automatic int unsigned level_tol_ns(input int unsigned v, input int unsigned n);
    return gtol_ns(v << (MLB_MAX - n));
  endfunction

  // Sense voltage in microvolts for a conductance, V = G * V_READ * R_S.
  function automatic int unsigned sense_uv(input int unsigned g_ns);
    return (g_ns * V_READ_MV / 1000) * R_S_KOHM;
  endfunction

  // Reference voltage (microvolts) of comparator j (1 .. 2^n-1) of an n-bit comparator array:
  // midway between the sense voltages of adjacent used states.
  function automatic int unsigned vref_uv(input int unsigned n, input int unsigned j);
    if (n <= 1) return V_REF_MV * 1000;
    return (sense_uv(level_target_ns(j - 1, n)) + sense_uv(level_target_ns(j, n))) / 2;
  endfunction

  // Comparator threshold as a bit-line current in picoamperes, I = V_ref / R_S.
  function automatic int unsigned iref_pa(input int unsigned n, input int unsigned j);
    return vref_uv(n, j) * 1000 / R_S_KOHM;
  endfunction

endpackage
