// msim_top -- reconfigurable memristor sort-in-memory system (NB banks of 32x32 1T1R arrays).
//
// Each bank is one TNS sub-sorter: a 1T1R array (one word line per digit position, one bit
// line per number), its digit selector (5-32 word-line decoder), its digit processor
// (sampling resistors and comparators) and its state controller. Cross-array processors
// join the banks for the paper's strategies, chosen at run time by `mode`:
//   CA_TNS  basic tree node skipping on bank 0 (binary cells, or ML-2/3-bit cells with
//           ml_bits = 2/3);
//   CA_MB   multi-bank: all NB banks run synchronised through ca_mb_sync as one sorter of
//           NB x 32 numbers (binary cells); outputs carry the bank number;
//   CA_BS   bit-slice: banks 0 .. bs_slices-1 hold successive digit slices of the same 32
//           numbers (bank 0 the most significant); each slice hands the survivors of every
//           located min/max to the next slice through an ne_fifo; the last slice outputs;
//   CA_PML  pseudo multi-level: banks 0 and 1 hold the even (upper) and odd (lower) bits of
//           each 2-bit digit in binary cells; both are read on the same row and bank 0's
//           controller processes them as ML-2-bit digits.
// Programming: one cell per request, either a DC set/reset (binary, prog_wv = 0, value bit 0)
// or write-verify to the multi-level target of prog_value at ml_bits bits per cell.
// In-situ pruning: with prune_en, every located number's address (bank x 32 + index) is
// recorded in a pruning mask that zeroes the matching inputs mvm_x_in -> mvm_x_out; out_limit
// (N x p) stops the sort after that many outputs (0 = sort everything).
//
// Timing: start pulses while idle; busy while sorting; done stays high after the sort until
// the next start. out_valid/out_bank/out_idx give the sorted order, one number per cycle at
// most, one cycle after the cycle that located it. cycle_count counts the busy cycles
// (one digit read or one reload per cycle, as in the paper's cycle counts). ev_any ORs the
// event flags of all banks.
// The structure follows the paper; the numbers of banks and of LIFO entries are parameters
// (defaults: 2 banks, the number of arrays of the paper's bit-slice and pseudo multi-level
// demonstrations, and k = 2, the LIFO size of its application demonstrations; the 32-bank
// split of its 1024-number multi-bank study is NB = 32), and the port encoding is this
// design's own.
// Lint note: rst_n is the asynchronous reset of every register and also the disable
// condition of the assertions, which a linter may report as a reset used both ways; the
// assertions are checks only and add no logic.
module msim_top
  import msim_pkg::*;
#(
  parameter int unsigned NB         = 2,
  parameter int unsigned K          = 2,
  parameter int unsigned FIFO_DEPTH = 32,
  parameter int unsigned XW         = 8,
  localparam int unsigned N    = ARRAY_COLS,
  localparam int unsigned ROWS = ARRAY_ROWS,
  localparam int unsigned MLB  = MLB_MAX,
  localparam int unsigned BW   = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned IDXW = $clog2(N),
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned CW   = $clog2(NB * N) + 1,
  localparam int unsigned NF   = (NB > 1) ? NB - 1 : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // cell programming
  input  logic            prog_valid,
  input  logic [BW-1:0]   prog_bank,
  input  logic [RAW-1:0]  prog_row,
  input  logic [IDXW-1:0] prog_col,
  input  logic            prog_wv,
  input  logic [MLB-1:0]  prog_value,
  input  logic [9:0]      prog_nmax,
  output logic            prog_busy,
  output logic            prog_done,
  output logic            prog_ok,
  output logic [9:0]      prog_pulses,
  // sort configuration
  input  ca_mode_e        mode,
  input  dtype_e          dtype,
  input  logic            find_max,
  input  logic [1:0]      ml_bits,
  input  logic [BW:0]     bs_slices,
  input  logic [RAW-1:0]  msb_row [NB],
  input  logic [RAW-1:0]  lsb_row [NB],
  input  logic [N-1:0]    num_en  [NB],
  input  logic [CW-1:0]   out_limit,
  // sort control and results
  input  logic            start,
  output logic            busy,
  output logic            done,
  output logic            out_valid,
  output logic [BW-1:0]   out_bank,
  output logic [IDXW-1:0] out_idx,
  output logic [CW-1:0]   out_count,
  output logic [31:0]     cycle_count,
  output tns_ev_t         ev_any,
  // in-situ pruning of the following MVM
  input  logic            prune_en,
  input  logic            prune_clear,
  input  logic [XW-1:0]   mvm_x_in  [NB*N],
  output logic [XW-1:0]   mvm_x_out [NB*N],
  output logic [NB*N-1:0] prune_mask_o,
  output logic [CW-1:0]   prune_count
);
  // ------------------------------------------------------------------ programming path
  logic           wv_start, wv_busy, wv_done, wv_ok;
  logic [9:0]     wv_pulses;
  cell_op_e       wv_op, cur_op;
  logic [BW-1:0]  pbank_q;
  logic [RAW-1:0] prow_q;
  logic [IDXW-1:0] pcol_q;
  logic           pval_q;
  logic           pdc_q, pdc_done_q;
  logic [31:0]    meas_g [NB];
  logic [31:0]    wv_target, wv_target_q, wv_tol, wv_tol_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pbank_q <= '0; prow_q <= '0; pcol_q <= '0; pval_q <= 1'b0;
      pdc_q <= 1'b0; pdc_done_q <= 1'b0;
    end else begin
      pdc_q      <= 1'b0;
      pdc_done_q <= pdc_q;
      if (prog_valid && !prog_busy) begin
        pbank_q <= prog_bank; prow_q <= prog_row; pcol_q <= prog_col; pval_q <= prog_value[0];
        pdc_q   <= !prog_wv;
      end
    end
  end

  assign wv_start  = prog_valid && !prog_busy && prog_wv;
  assign wv_target = level_target_ns(32'(prog_value), (ml_bits == 2'd0) ? 1 : 32'(ml_bits));
  assign wv_tol    = level_tol_ns(32'(prog_value), (ml_bits == 2'd0) ? 1 : 32'(ml_bits));

  // the target is held while the write-verify runs
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wv_target_q <= '0;
      wv_tol_q    <= '0;
    end else if (wv_start) begin
      wv_target_q <= wv_target;
      wv_tol_q    <= wv_tol;
    end

  write_verify_ctrl #(.GW(32), .NW(10)) u_wv (
    .clk, .rst_n, .start(wv_start), .g_target(wv_target_q), .g_tol(wv_tol_q),
    .n_max(prog_nmax), .g_read(meas_g[pbank_q]), .op(wv_op), .busy(wv_busy),
    .done(wv_done), .success(wv_ok), .pulses(wv_pulses)
  );

  assign cur_op      = pdc_q ? (pval_q ? CELL_DC_SET : CELL_DC_RESET) : wv_op;
  assign prog_busy   = wv_busy || pdc_q;
  assign prog_done   = wv_done || pdc_done_q;
  assign prog_ok     = wv_done ? wv_ok : 1'b1;
  assign prog_pulses = wv_pulses;

  // ------------------------------------------------------------------ banks
  logic           sc_rd   [NB];
  logic [RAW-1:0] sc_row  [NB];
  logic           sel_en  [NB];
  logic [4:0]     sel_row [NB];
  logic [31:0]    wl      [NB];
  logic [31:0]    bl_i    [NB][N];
  logic [MLB-1:0] dp_dr   [NB][N];
  logic [MLB-1:0] sc_dr   [NB][N];
  logic [1:0]     dp_ml, sc_ml;
  logic [NB-1:0]  sc_busy, sc_done, sc_ov;
  logic [IDXW-1:0] sc_idx [NB];
  tns_ev_t        sc_ev   [NB];

  // cross-array signals
  logic [NB-1:0]  l_has0, l_has1, l_topload, l_lenload, l_negrem, l_posrem, l_left;
  logic [1:0]     l_cnt [NB];
  logic           g_has0, g_has1, g_topload, g_lenload, g_negrem, g_posrem, g_left;
  logic [1:0]     g_cnt;
  logic [NB-1:0]  grant;
  logic [NB-1:0]  gout_valid, gout_neg, gin_pop;
  logic [NF-1:0]  fifo_ready, fifo_valid, fifo_neg, fifo_empty;
  logic [N-1:0]   gout_mask [NB];
  logic [N-1:0]   fifo_mask [NF];

  logic halt;
  logic is_mb, is_bs, is_pml;
  assign is_mb  = (mode == CA_MB);
  assign is_bs  = (mode == CA_BS);
  assign is_pml = (mode == CA_PML);
  assign dp_ml  = is_pml ? 2'd1 : ml_bits;
  assign sc_ml  = is_pml ? 2'd2 : ml_bits;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic part, grp_in_b, grp_out_b;
    assign part      = is_mb || (is_bs ? (b < int'(bs_slices)) : (b == 0));
    assign grp_out_b = is_bs && (b + 1 < int'(bs_slices));
    assign grp_in_b  = is_bs && (b > 0);

    // pseudo multi-level: bank 1 is read on bank 0's row
    if (b == 1) begin : g_pml_sel
      assign sel_en[b]  = is_pml ? sc_rd[0] : sc_rd[b];
      assign sel_row[b] = 5'(is_pml ? sc_row[0] : sc_row[b]);
    end else begin : g_sel
      assign sel_en[b]  = sc_rd[b];
      assign sel_row[b] = 5'(sc_row[b]);
    end

    digit_selector u_ds (.en(sel_en[b]), .addr(sel_row[b]), .wl(wl[b]));

    rram_1t1r_array #(.ROWS(ROWS), .COLS(N)) u_array (
      .clk, .wl(wl[b]), .read_en(sel_en[b]), .bl_i_pa(bl_i[b]),
      .prog_op((BW'(b) == pbank_q) ? cur_op : CELL_NOP),
      .prog_row(prow_q), .prog_col(pcol_q), .meas_g_ns(meas_g[b])
    );

    digit_processor #(.COLS(N), .MLB(MLB)) u_dp (
      .bl_i_pa(bl_i[b]), .ml_bits(dp_ml), .dr(dp_dr[b])
    );

    if (b == 0 && NB > 1) begin : g_pml_dr
      always_comb
        for (int i = 0; i < N; i++)
          sc_dr[b][i] = is_pml ? MLB'({dp_dr[0][i][0], dp_dr[1][i][0]}) : dp_dr[b][i];
    end else begin : g_dr
      assign sc_dr[b] = dp_dr[b];
    end

    logic gin_valid_b, gin_neg_b, gin_last_b, gout_ready_b;
    logic [N-1:0] gin_mask_b;
    if (b > 0) begin : g_gin
      assign gin_valid_b = fifo_valid[b-1];
      assign gin_mask_b  = fifo_mask[b-1];
      assign gin_neg_b   = fifo_neg[b-1];
      assign gin_last_b  = sc_done[b-1] && fifo_empty[b-1];
    end else begin : g_nogin
      assign gin_valid_b = 1'b0;
      assign gin_mask_b  = '0;
      assign gin_neg_b   = 1'b0;
      assign gin_last_b  = 1'b0;
    end
    if (b + 1 < NB) begin : g_gout
      assign gout_ready_b = fifo_ready[b];
    end else begin : g_nogout
      assign gout_ready_b = 1'b1;
    end

    tns_state_ctrl #(.N(N), .ROWS(ROWS), .K(K), .MLB(MLB)) u_sc (
      .clk, .rst_n, .dtype, .find_max, .ml_bits(sc_ml),
      .msb_row(msb_row[b]), .lsb_row(lsb_row[b]), .num_en(num_en[b]),
      .has_sign(is_mb || b == 0), .grp_in(grp_in_b), .grp_out(grp_out_b), .sync_en(is_mb),
      .start(start && part), .halt, .busy(sc_busy[b]), .done(sc_done[b]),
      .rd_en(sc_rd[b]), .row_addr(sc_row[b]), .dr(sc_dr[b]),
      .out_valid(sc_ov[b]), .out_idx(sc_idx[b]),
      .gout_valid(gout_valid[b]), .gout_mask(gout_mask[b]), .gout_neg(gout_neg[b]),
      .gout_ready(gout_ready_b),
      .gin_valid(gin_valid_b), .gin_mask(gin_mask_b), .gin_neg(gin_neg_b),
      .gin_last(gin_last_b), .gin_pop(gin_pop[b]),
      .l_has0(l_has0[b]), .l_has1(l_has1[b]), .l_cnt(l_cnt[b]), .l_topload(l_topload[b]),
      .l_lenload(l_lenload[b]), .l_negrem(l_negrem[b]), .l_posrem(l_posrem[b]),
      .l_left(l_left[b]),
      .g_has0, .g_has1, .g_cnt, .g_topload, .g_lenload, .g_negrem, .g_posrem, .g_left,
      .grant(grant[b]), .ev(sc_ev[b])
    );

    // bit-slice cross-array processor between bank b and bank b+1
    if (b + 1 < NB) begin : g_fifo
      ne_fifo #(.N(N), .DEPTH(FIFO_DEPTH)) u_fifo (
        .clk, .rst_n, .clear(start), .push(gout_valid[b] && fifo_ready[b]),
        .push_mask(gout_mask[b]),
        .push_neg(gout_neg[b]), .ready(fifo_ready[b]), .head_valid(fifo_valid[b]),
        .head_mask(fifo_mask[b]), .head_neg(fifo_neg[b]), .pop(gin_pop[b+1]),
        .empty(fifo_empty[b])
      );
    end else if (NB == 1) begin : g_nofifo
      assign fifo_ready[0] = 1'b1;
      assign fifo_valid[0] = 1'b0;
      assign fifo_mask[0]  = '0;
      assign fifo_neg[0]   = 1'b0;
      assign fifo_empty[0] = 1'b1;
    end
  end

  // multi-bank cross-array processor and output controller
  logic            mb_ov;
  logic [BW-1:0]   mb_bank;
  logic [IDXW-1:0] mb_idx;

  ca_mb_sync #(.NB(NB), .IDXW(IDXW)) u_mb (
    .l_has0, .l_has1, .l_cnt, .l_topload, .l_lenload, .l_negrem, .l_posrem, .l_left,
    .g_has0, .g_has1, .g_cnt, .g_topload, .g_lenload, .g_negrem, .g_posrem, .g_left,
    .grant, .bank_valid(sc_ov), .bank_idx(sc_idx),
    .out_valid(mb_ov), .out_bank(mb_bank), .out_idx(mb_idx)
  );

  // ------------------------------------------------------------------ result selection
  logic [BW-1:0] tail;
  assign tail = (is_bs && bs_slices != '0) ? BW'(bs_slices - 1'b1) : '0;

  always_comb begin
    if (is_mb) begin
      out_valid = mb_ov;
      out_bank  = mb_bank;
      out_idx   = mb_idx;
      busy      = sc_busy[0];
      done      = sc_done[0];
    end else begin
      out_valid = sc_ov[tail];
      out_bank  = tail;
      out_idx   = sc_idx[tail];
      busy      = |sc_busy;
      done      = sc_done[tail];
    end
  end

  always_comb begin
    ev_any = '0;
    for (int b = 0; b < NB; b++) ev_any = ev_any | sc_ev[b];
  end

  assign halt = (out_limit != '0) && ((out_count + CW'(out_valid)) >= out_limit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_count   <= '0;
      cycle_count <= '0;
    end else if (start && !busy) begin
      out_count   <= '0;
      cycle_count <= '0;
    end else begin
      if (out_valid) out_count <= out_count + CW'(1);
      if (busy) cycle_count <= cycle_count + 32'd1;
    end
  end

  // ------------------------------------------------------------------ in-situ pruning
  prune_mask #(.NW(NB * N), .XW(XW)) u_prune (
    .clk, .rst_n, .clear(prune_clear), .rec_valid(prune_en && out_valid),
    .rec_addr($clog2(NB * N)'({out_bank, out_idx})), .x_in(mvm_x_in), .x_out(mvm_x_out),
    .mask(prune_mask_o), .count(prune_count)
  );

  // the first bank never takes groups and the last never hands groups on
  a_chain: assert property (@(posedge clk) disable iff (!rst_n)
    !gin_pop[0] && !gout_valid[NB-1])
    else $error("msim_top: group transfer outside the slice chain (neg %b)", gout_neg[NB-1]);

  // multi-bank synchronisation is defined for binary cells only
  a_mb_binary: assert property (@(posedge clk) disable iff (!rst_n)
    (start && is_mb) |-> (ml_bits <= 2'd1))
    else $error("msim_top: multi-bank mode needs binary cells");
endmodule
