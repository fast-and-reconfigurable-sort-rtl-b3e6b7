// tns_state_ctrl -- state controller of one TNS sub-sorter (tree node skipping).
//
// The controller finds the min (or max) of the numbers stored in one array, one search
// iteration after another, by digit reads (DR) from the most significant digit down, and
// outputs the numbers in sorted order. It holds the paper's state registers (digit register
// col_q, number-exclusion register en_q, and the per-number sorted flags), a length-K LIFO of
// tree nodes, and the logic module (NE unit, Min/Max Check, Load Check).
//
// One clock = one cycle of the paper's examples. In each cycle the controller
//   1. chooses the working set V and digit c: the NE register and digit register while a search
//      goes on; after a min/max, the LIFO top (its numbers that are not yet sorted, from its
//      recorded column), or V = all unsorted from the MSB when the LIFO is empty;
//   2. reads digit c (row_addr/rd_en to the digit selector; dr comes back the same cycle);
//   3. if the valid results hold both 0's and 1's (ren), records the node {next column, V}
//      (state recording; the current column at the LSB and for multi-level digits) and
//      excludes numbers (NE);
//   4. runs the Min/Max Check: one survivor = last number; LSB reached = repeated numbers,
//      output one per cycle while staying on the LSB; else go on with the next digit;
//   5. after a min/max, Load Check on the LIFO top: a node whose numbers are all sorted is
//      popped at once. A node found fully sorted when it is about to be reloaded costs one
//      redundant cycle to pop (the paper's extra cycle for duplicated node states).
// With k = 3 this reproduces the paper's 10-cycle example {9,6,14,2,14,3}.
//
// Cross-array hooks: sync_en (multi-bank) makes exclusion, count, load and finish decisions
// on ORed/summed signals from all banks (g_*); grp_out (bit-slice head) hands each located
// survivor set to the next slice through gout_* instead of outputting one number; grp_in
// (bit-slice tail) takes its working universe from gin_* and sorts within it. Data types:
// has_sign marks the bank holding the sign digit (msb_row); its sign bits are latched from
// the first DR, which reads the MSB with all numbers valid.
//
// Interface timing: start pulses in IDLE; busy until done (a one-cycle pulse also held as
// the DONE state until the next start). out_valid/out_idx are registered, one cycle after
// the cycle that located the number. halt stops sorting (used for partial sorts).
// Assumed (not given by the paper): the register encoding, the lowest index first among equal
// values, and the registered outputs.
module tns_state_ctrl
  import msim_pkg::*;
#(
  parameter int unsigned N    = 32,
  parameter int unsigned ROWS = 32,
  parameter int unsigned K    = 2,
  parameter int unsigned MLB  = 3,
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned IDXW = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration, stable while busy
  input  dtype_e          dtype,
  input  logic            find_max,
  input  logic [1:0]      ml_bits,
  input  logic [RAW-1:0]  msb_row,
  input  logic [RAW-1:0]  lsb_row,
  input  logic [N-1:0]    num_en,
  input  logic            has_sign,
  input  logic            grp_in,
  input  logic            grp_out,
  input  logic            sync_en,
  // control
  input  logic            start,
  input  logic            halt,
  output logic            busy,
  output logic            done,
  // digit selector / digit processor
  output logic            rd_en,
  output logic [RAW-1:0]  row_addr,
  input  logic [MLB-1:0]  dr [N],
  // sorted output
  output logic            out_valid,
  output logic [IDXW-1:0] out_idx,
  // bit-slice: survivor groups to the next slice
  output logic            gout_valid,
  output logic [N-1:0]    gout_mask,
  output logic            gout_neg,
  input  logic            gout_ready,
  // bit-slice: survivor groups from the previous slice
  input  logic            gin_valid,
  input  logic [N-1:0]    gin_mask,
  input  logic            gin_neg,
  input  logic            gin_last,
  output logic            gin_pop,
  // multi-bank synchronisation: local reports and cross-array results
  output logic            l_has0,
  output logic            l_has1,
  output logic [1:0]      l_cnt,
  output logic            l_topload,
  output logic            l_lenload,
  output logic            l_negrem,
  output logic            l_posrem,
  output logic            l_left,
  input  logic            g_has0,
  input  logic            g_has1,
  input  logic [1:0]      g_cnt,
  input  logic            g_topload,
  input  logic            g_lenload,
  input  logic            g_negrem,
  input  logic            g_posrem,
  input  logic            g_left,
  input  logic            grant,
  // statistics
  output tns_ev_t         ev
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e         state_q;
  logic [N-1:0]   sorted_q, avail_q, en_q, sign_q;
  logic [RAW-1:0] col_q;
  logic           reload_q, first_q;

  logic [N-1:0]   unsorted, v_work, sign_eff;
  logic [RAW-1:0] c_work;
  logic           running, take_grp, wait_grp, redundant, do_dr, from_lifo, restart;

  logic [N-1:0]   v_ne, pick;
  logic           ren, found, last, rep, at_lsb;

  // LIFO
  logic           lifo_clear, lifo_push, lifo_pop, lifo_empty, lifo_full;
  logic [RAW-1:0] top_ci, push_ci;
  logic [N-1:0]   top_mask;

  logic [$clog2(K+1)-1:0] lifo_count;
  tns_lifo #(.K(K), .N(N), .CIW(RAW)) u_lifo (
    .clk, .rst_n, .clear(lifo_clear), .push(lifo_push), .pop(lifo_pop),
    .push_ci, .push_mask(v_work), .top_ci, .top_mask, .empty(lifo_empty), .full(lifo_full),
    .count(lifo_count)
  );

  // ---------------------------------------------------------------- working set selection

  assign running  = (state_q == S_RUN);
  assign unsorted = avail_q & ~sorted_q;

  tns_load_check #(.N(N)) u_top_check (
    .node_valid(!lifo_empty), .node_mask(top_mask), .sorted(sorted_q), .load(l_topload)
  );

  always_comb begin
    take_grp  = 1'b0;
    wait_grp  = 1'b0;
    redundant = 1'b0;
    from_lifo = 1'b0;
    restart   = 1'b0;
    v_work    = en_q;
    c_work    = col_q;
        if (grp_in && reload_q && unsorted == '0) begin
      // bit-slice tail: current group exhausted, take the next one
      if (gin_valid) begin
        take_grp = 1'b1;
        v_work   = gin_mask;
        c_work   = msb_row;
      end else begin
        wait_grp = 1'b1;
      end
    end else if (reload_q) begin
      if (!lifo_empty) begin
        if (sync_en ? g_topload : l_topload) begin
          from_lifo = 1'b1;
          v_work    = top_mask & ~sorted_q;
          c_work    = top_ci;
        end else begin
          redundant = 1'b1;
        end
      end else begin
        restart = 1'b1;
        v_work  = unsorted;
        c_work  = msb_row;
      end
    end
  end

  assign do_dr    = running && !wait_grp && !redundant;
  assign rd_en    = do_dr;
  assign row_addr = c_work;

  // sign bits: from the group flag, from the first DR of the sign digit, or latched
  always_comb begin
    sign_eff = sign_q;
    if (take_grp) begin
      sign_eff = gin_neg ? gin_mask : '0;
    end else if (first_q && has_sign) begin
      for (int i = 0; i < N; i++) sign_eff[i] = dr[i][ml_bits - 2'd1];
    end
  end

  logic [N-1:0] unsorted_eff;
  assign unsorted_eff = take_grp ? gin_mask : unsorted;
  assign l_negrem = |(sign_eff & unsorted_eff);
  assign l_posrem = |(~sign_eff & unsorted_eff);

  // ---------------------------------------------------------------- NE and checks

  tns_ne_unit #(.N(N), .MLB(MLB)) u_ne (
    .v_in(v_work), .dr, .ml_bits, .dtype, .find_max,
    .sign_digit(has_sign && c_work == msb_row),
    .neg_rem(sync_en ? g_negrem : l_negrem), .pos_rem(sync_en ? g_posrem : l_posrem),
    .sync_en, .g_has0, .g_has1, .l_has0, .l_has1, .v_out(v_ne), .ren
  );

  assign at_lsb = (c_work == lsb_row);

  tns_minmax_check #(.N(N)) u_mm (
    .v_ne, .at_lsb, .sync_en, .g_cnt, .grant, .grp_mode(grp_out),
    .l_cnt, .found, .last, .repeat_hit(rep), .pick
  );

  // ---------------------------------------------------------------- recording and reloading
  logic         stall, stay, fin;
  logic [N-1:0] sorted_next;

  assign stall       = do_dr && grp_out && found && !gout_ready;
  assign sorted_next = (take_grp ? '0 : sorted_q) | pick;
  assign stay        = rep && !grp_out;        // more equal values wait on the LSB
  assign push_ci     = (at_lsb || ml_bits > 2'd1) ? c_work : c_work + RAW'(1);

  assign lifo_clear  = (running && take_grp && !stall) || (!running && start);
  assign lifo_push   = do_dr && ren && !stall;

  // Load Check at the end of a search iteration (len), on the LIFO top after this cycle
  tns_load_check #(.N(N)) u_len_check (
    .node_valid(!lifo_empty), .node_mask(top_mask), .sorted(sorted_next), .load(l_lenload)
  );

  always_comb begin
    lifo_pop = 1'b0;
    if (running && redundant) lifo_pop = 1'b1;
    else if (do_dr && found && !stay && !stall && !lifo_push && !take_grp && !lifo_empty
             && !(sync_en ? g_lenload : l_lenload))
      lifo_pop = 1'b1;
  end

  assign l_left = |((take_grp ? gin_mask : avail_q) & ~sorted_next);
  assign fin    = grp_in ? (wait_grp && gin_last)
                         : !(sync_en ? g_left : l_left);

  assign gout_valid = do_dr && grp_out && found;
  assign gout_mask  = v_ne;
  assign gout_neg   = |(v_ne & sign_eff);
  assign gin_pop    = running && take_grp && !stall;

  // ---------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      sorted_q  <= '0;
      avail_q   <= '0;
      en_q      <= '0;
      sign_q    <= '0;
      col_q     <= '0;
      reload_q  <= 1'b0;
      first_q   <= 1'b0;
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= 1'b0;
      case (state_q)
        S_IDLE, S_DONE: begin
          if (start) begin
            state_q  <= S_RUN;
            sorted_q <= '0;
            avail_q  <= grp_in ? '0 : num_en;
            en_q     <= '0;
            sign_q   <= '0;
            col_q    <= msb_row;
            reload_q <= 1'b1;            // empty LIFO: the first search starts at the MSB
            first_q  <= !grp_in;
          end
        end
        default: begin                     // S_RUN
          if (halt) begin
            state_q <= S_DONE;
          end else if (!stall && (do_dr || redundant)) begin
            if (take_grp) avail_q <= gin_mask;
            if (do_dr) begin
              first_q  <= 1'b0;
              sign_q   <= sign_eff;
              sorted_q <= sorted_next;
              if (found) begin
                en_q     <= v_ne & ~pick;
                col_q    <= c_work;
                reload_q <= !stay;
                if (!grp_out && |pick) begin
                  out_valid <= 1'b1;
                  for (int i = N - 1; i >= 0; i--)
                    if (pick[i]) out_idx <= IDXW'(i);
                end
              end else begin
                en_q     <= v_ne;
                col_q    <= c_work + RAW'(1);
                reload_q <= 1'b0;
              end
              if (fin) state_q <= S_DONE;
            end
          end else if (wait_grp && gin_last) begin
            state_q <= S_DONE;
          end
        end
      endcase
    end
  end

  assign busy = running;
  assign done = (state_q == S_DONE);

  always_comb begin
    ev           = '0;
    ev.dr        = do_dr && !stall;
    ev.sr        = lifo_push;
    ev.sr_drop   = lifo_push && lifo_full && !lifo_clear;
    ev.reload    = do_dr && from_lifo && !stall;
    ev.redundant = running && redundant;
    ev.restart   = do_dr && restart && !first_q && !stall;
    ev.last      = do_dr && found && last && !stall;
    ev.repeat_hit= do_dr && found && rep && !stall;
    ev.grp_out   = gout_valid && gout_ready;
    ev.grp_in    = gin_pop;
    ev.stall     = stall;
  end

  // A reloaded node always holds an unsorted number; repeated values only occur on the LSB.
  a_lifo: assert property (@(posedge clk) disable iff (!rst_n) lifo_count <= ($clog2(K+1))'(K))
    else $error("LIFO over capacity");
  a_reload: assert property (@(posedge clk) disable iff (!rst_n)
    (do_dr && from_lifo && !sync_en) |-> (v_work != '0)) else $error("reload of empty node");
  a_repeat: assert property (@(posedge clk) disable iff (!rst_n)
    (do_dr && rep) |-> at_lsb) else $error("repeat away from LSB");
endmodule
