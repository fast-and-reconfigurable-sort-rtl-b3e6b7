// write_verify_ctrl -- closed-loop write-verify programming of one memristor cell.
//
// Follows the paper's write-verify flowchart: reset the device to the high resistance state
// (n = 0), read its conductance, finish if G_t - dG <= G <= G_t + dG; otherwise, while
// n < n_max, apply a SET pulse (G too low) or a RESET pulse (G too high), n = n + 1, and read
// again. When n reaches n_max without convergence the cell is counted as a programming
// failure (success = 0). The verify read is the array's measured conductance of the
// addressed cell (g_read), sampled one cycle after each operation.
//
// Interface: start (one cycle, with g_target/g_tol/n_max stable until done), op to the array
// (one operation per cycle, CELL_NOP between), busy, done (one-cycle pulse), success and the
// number of pulses applied (pulses). States: IDLE, RESET, READ, CHECK.
module write_verify_ctrl
  import msim_pkg::*;
#(
  parameter int unsigned GW = 32,
  parameter int unsigned NW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [GW-1:0] g_target,
  input  logic [GW-1:0] g_tol,
  input  logic [NW-1:0] n_max,
  input  logic [GW-1:0] g_read,
  output cell_op_e      op,
  output logic          busy,
  output logic          done,
  output logic          success,
  output logic [NW-1:0] pulses
);
  typedef enum logic [1:0] {W_IDLE, W_RESET, W_READ, W_CHECK} wv_state_e;
  wv_state_e state_q;
  logic [NW-1:0] n_q;
  logic lo, hi;

  assign lo = (g_read + g_tol < g_target);         // G < G_t - dG
  assign hi = (g_read > g_target + g_tol);         // G > G_t + dG

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= W_IDLE;
      n_q     <= '0;
      done    <= 1'b0;
      success <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state_q)
        W_IDLE:  if (start) begin
                   state_q <= W_RESET;
                   n_q     <= '0;
                 end
        W_RESET: state_q <= W_READ;
        W_READ:  state_q <= W_CHECK;
        default: begin                                   // W_CHECK
          if (!lo && !hi) begin
            state_q <= W_IDLE; done <= 1'b1; success <= 1'b1;
          end else if (n_q < n_max) begin
            n_q     <= n_q + NW'(1);
            state_q <= W_READ;
          end else begin
            state_q <= W_IDLE; done <= 1'b1; success <= 1'b0;
          end
        end
      endcase
    end
  end

  always_comb begin
    op = CELL_NOP;
    case (state_q)
      W_RESET: op = CELL_DC_RESET;
      W_CHECK: if ((lo || hi) && n_q < n_max) op = lo ? CELL_PULSE_SET : CELL_PULSE_RESET;
      default: op = CELL_NOP;
    endcase
  end

  assign busy   = (state_q != W_IDLE);
  assign pulses = n_q;
endmodule
