// tb_msim_top -- end-to-end test of the sort-in-memory system at its default size.
//
// The test programs the memristor arrays through the top's programming port only (DC
// set/reset for binary cells, write-verify for multi-level cells), then sorts in every
// cross-array mode and compares the output order with a reference sort of the stored
// numbers (lowest address first among equal values):
//   * TNS on bank 0: the paper's 4-number two's complement example (5 cycles with k = 2),
//     random unsigned / two's complement / sign-magnitude data, min and max searches,
//     a 16-bit floating-point style (sign-magnitude) neighbour search stopped after the
//     first output (Dijkstra), and magnitude sorting of 8-bit sign-magnitude weights with
//     in-situ pruning of 30 % of them (the pruning mask and the gated MVM inputs are checked);
//   * multi-level: 6-bit numbers in 3-bit cells and 4-bit numbers in 2-bit cells, written by
//     write-verify;
//   * pseudo multi-level: 8-bit numbers split into even/odd bit arrays;
//   * multi-bank: 64 numbers in two banks, unsigned and two's complement;
//   * bit-slice: 16-bit numbers in two 8-bit slices with many equal upper slices.
// Cycle counts are checked against the bit-traversal bound n x (w / m) where the paper gives
// it (TNS never needs more cycles than reading every digit of every number) and exactly for
// the paper's worked example. Each mechanism (digit read, state recording, LIFO overflow
// drop, reload, redundant pop, restart, last-number and repeated-number exits, group hand
// over, the four modes, multi-level reads, write-verify, halt, pruning) is counted; a
// mechanism that never occurred is a failure.
module tb_msim_top;
  import msim_pkg::*;

  localparam int NB = 2;                 // the top's default number of banks
  localparam int N  = ARRAY_COLS;
  localparam int ROWS = ARRAY_ROWS;
  localparam int BW = 1;
  localparam int CW = $clog2(NB * N) + 1;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             prog_valid = 1'b0, prog_wv = 1'b0;
  logic [BW-1:0]    prog_bank = '0;
  logic [4:0]       prog_row = '0, prog_col = '0;
  logic [2:0]       prog_value = '0;
  logic [9:0]       prog_nmax = 10'd100;
  logic             prog_busy, prog_done, prog_ok;
  logic [9:0]       prog_pulses;
  ca_mode_e         mode = CA_TNS;
  dtype_e           dtype = DT_UNSIGNED;
  logic             find_max = 1'b0;
  logic [1:0]       ml_bits = 2'd1;
  logic [BW:0]      bs_slices = '0;
  logic [4:0]       msb_row [NB];
  logic [4:0]       lsb_row [NB];
  logic [N-1:0]     num_en  [NB];
  logic [CW-1:0]    out_limit = '0;
  logic             start = 1'b0;
  logic             busy, done, out_valid;
  logic [BW-1:0]    out_bank;
  logic [4:0]       out_idx;
  logic [CW-1:0]    out_count;
  logic [31:0]      cycle_count;
  tns_ev_t          ev_any;
  logic             prune_en = 1'b0, prune_clear = 1'b0;
  logic [7:0]       mvm_x_in  [NB*N];
  logic [7:0]       mvm_x_out [NB*N];
  logic [NB*N-1:0]  prune_mask_o;
  logic [CW-1:0]    prune_count;

  msim_top dut (
    .clk, .rst_n, .prog_valid, .prog_bank, .prog_row, .prog_col, .prog_wv, .prog_value,
    .prog_nmax, .prog_busy, .prog_done, .prog_ok, .prog_pulses, .mode, .dtype, .find_max,
    .ml_bits, .bs_slices, .msb_row, .lsb_row, .num_en, .out_limit, .start, .busy, .done,
    .out_valid, .out_bank, .out_idx, .out_count, .cycle_count, .ev_any, .prune_en,
    .prune_clear, .mvm_x_in, .mvm_x_out, .prune_mask_o, .prune_count
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int n_dr, n_sr, n_drop, n_reload, n_redundant, n_restart, n_last, n_repeat, n_gout, n_gin;
  int n_tns, n_mb, n_bs, n_pml, n_ml, n_wv, n_halt, n_prune;

  always @(posedge clk) begin
    if (ev_any.dr)         n_dr++;
    if (ev_any.sr)         n_sr++;
    if (ev_any.sr_drop)    n_drop++;
    if (ev_any.reload)     n_reload++;
    if (ev_any.redundant)  n_redundant++;
    if (ev_any.restart)    n_restart++;
    if (ev_any.last)       n_last++;
    if (ev_any.repeat_hit) n_repeat++;
    if (ev_any.grp_out)    n_gout++;
    if (ev_any.grp_in)     n_gin++;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // ---------------------------------------------------------------- programming
  task automatic prog_cell(input int b, input int r, input int c, input int unsigned v,
                           input bit wv);
    @(negedge clk);
    prog_valid = 1'b1;
    prog_bank  = BW'(b);
    prog_row   = 5'(r);
    prog_col   = 5'(c);
    prog_value = 3'(v);
    prog_wv    = wv;
    @(negedge clk);
    prog_valid = 1'b0;
    while (prog_busy) @(negedge clk);
    if (wv) begin
      n_wv++;
      check(prog_ok, $sformatf("write-verify of bank %0d cell (%0d,%0d) to level %0d", b, r, c, v));
    end
  endtask

  // Store w-bit numbers in bank b, rows r0 .. r0+w/m-1, m bits per cell (MSB digit first).
  task automatic store(input int b, input int r0, input int w, input int m,
                       input int unsigned vals[N]);
    for (int c = 0; c < N; c++)
      for (int d = 0; d < w / m; d++) begin
        int unsigned digit;
        digit = (vals[c] >> (w - m * (d + 1))) & ((1 << m) - 1);
        prog_cell(b, r0 + d, c, digit, m > 1);
      end
  endtask

  // ---------------------------------------------------------------- reference model
  function automatic longint key(input int unsigned v, input int w, input dtype_e t);
    int unsigned mag;
    logic s;
    s   = v[w-1];
    mag = v & ((1 << (w - 1)) - 1);
    case (t)
      DT_TWOS:    return s ? longint'(mag) - (longint'(1) << (w - 1)) : longint'(mag);
      DT_SIGNMAG: return s ? -(2 * longint'(mag) + 1) : 2 * longint'(mag);
      default:    return longint'(v);
    endcase
  endfunction

  // vals indexed by global address (bank * N + column); en marks the sorted numbers
  task automatic ref_order(input int unsigned vals[NB*N], input bit en[NB*N], input int w,
                           input dtype_e t, input bit mx, output int order[$]);
    bit used[NB*N];
    order = {};
    for (int i = 0; i < NB * N; i++) used[i] = 1'b0;
    forever begin
      int best;
      best = -1;
      for (int i = 0; i < NB * N; i++)
        if (en[i] && !used[i]) begin
          if (best < 0) best = i;
          else if (!mx && key(vals[i], w, t) < key(vals[best], w, t)) best = i;
          else if (mx && key(vals[i], w, t) > key(vals[best], w, t)) best = i;
        end
      if (best < 0) break;
      used[best] = 1'b1;
      order.push_back(best);
    end
  endtask

  // ---------------------------------------------------------------- sorting
  task automatic sort_run(input ca_mode_e md, input dtype_e t, input bit mx, input int m,
                          output int got[$], output int cyc);
    int guard;
    got = {};
    @(negedge clk);
    mode = md; dtype = t; find_max = mx; ml_bits = 2'(m);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    guard = 0;
    while (!done && guard < 20000) begin
      @(posedge clk);
      #1 if (out_valid) got.push_back(int'(out_bank) * N + int'(out_idx));
      guard++;
    end
    repeat (2) begin
      @(posedge clk);
      #1 if (out_valid) got.push_back(int'(out_bank) * N + int'(out_idx));
    end
    check(guard < 20000, "sort finished");
    cyc = int'(cycle_count);
    case (md)
      CA_TNS: n_tns++;
      CA_MB:  n_mb++;
      CA_BS:  n_bs++;
      default: n_pml++;
    endcase
    if (m > 1) n_ml++;
  endtask

  // One-bank (TNS / ML / PML) sort of vals[0..N-1] in bank 0 (tail bank for BS).
  task automatic check_sort(input string name, input ca_mode_e md, input dtype_e t,
                            input bit mx, input int w, input int m, input int unsigned vals[N],
                            input int n, input int out_bank_base, input int exp_cycles,
                            input int limit);
    int unsigned gv[NB*N];
    bit en[NB*N];
    int expv[$], got[$], cyc, steps;
    for (int i = 0; i < NB * N; i++) begin
      gv[i] = (i >= out_bank_base && i < out_bank_base + N) ? vals[i - out_bank_base] : 0;
      en[i] = (i >= out_bank_base && i < out_bank_base + n);
    end
    ref_order(gv, en, w, t, mx, expv);
    if (limit > 0) expv = expv[0:limit-1];
    out_limit = CW'(limit);
    sort_run(md, t, mx, m, got, cyc);
    out_limit = '0;
    check(got == expv, $sformatf("%s: order %p expected %p", name, got, expv));
    steps = (md == CA_PML) ? w / 2 : w / m;
    if (exp_cycles > 0)
      check(cyc == exp_cycles, $sformatf("%s: %0d cycles, expected %0d", name, cyc, exp_cycles));
    else if (md != CA_BS)
      check(cyc <= n * steps, $sformatf("%s: %0d cycles above n x w/m = %0d", name, cyc,
                                        n * steps));
    $display("%-40s %3d outputs %5d cycles", name, got.size(), cyc);
  endtask

  function automatic int unsigned rnd(input int w);
    return $urandom() & ((1 << w) - 1);
  endfunction

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned v[N], hi[N], lo[N];
    for (int b = 0; b < NB; b++) begin
      msb_row[b] = '0;
      lsb_row[b] = '0;
      num_en[b]  = '0;
    end
    for (int i = 0; i < NB * N; i++) mvm_x_in[i] = 8'(i + 1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // ---- paper example: two's complement {-7, 6, -2, 2}, k = 2, 5 cycles
    v = '{default: 0};
    v[0] = 9; v[1] = 6; v[2] = 14; v[3] = 2;       // 4-bit codes of -7, 6, -2, 2
    store(0, 0, 4, 1, v);
    msb_row[0] = 5'd0; lsb_row[0] = 5'd3; num_en[0] = 32'hF;
    check_sort("TNS two's complement example", CA_TNS, DT_TWOS, 1'b0, 4, 1, v, 4, 0, 5, 0);

    // ---- TNS random 8-bit data, three data types, min and max
    for (int i = 0; i < N; i++) v[i] = rnd(8);
    for (int i = 0; i < 6; i++) v[$urandom_range(N - 1)] = v[$urandom_range(N - 1)];
    store(0, 0, 8, 1, v);
    msb_row[0] = 5'd0; lsb_row[0] = 5'd7; num_en[0] = '1;
    check_sort("TNS unsigned min", CA_TNS, DT_UNSIGNED, 1'b0, 8, 1, v, N, 0, 0, 0);
    check_sort("TNS unsigned max", CA_TNS, DT_UNSIGNED, 1'b1, 8, 1, v, N, 0, 0, 0);
    check_sort("TNS two's complement min", CA_TNS, DT_TWOS, 1'b0, 8, 1, v, N, 0, 0, 0);
    check_sort("TNS two's complement max", CA_TNS, DT_TWOS, 1'b1, 8, 1, v, N, 0, 0, 0);
    check_sort("TNS sign-magnitude min", CA_TNS, DT_SIGNMAG, 1'b0, 8, 1, v, N, 0, 0, 0);
    check_sort("TNS sign-magnitude max", CA_TNS, DT_SIGNMAG, 1'b1, 8, 1, v, N, 0, 0, 0);

    // ---- pruning: magnitudes of 8-bit sign-magnitude weights (rows 1..7), 30 % of 32
    begin
      int unsigned mags[N];
      int expv[$];
      int unsigned gv[NB*N];
      bit en[NB*N];
      for (int i = 0; i < N; i++) begin
        mags[i] = v[i] & 32'h7F;
        gv[i] = mags[i]; en[i] = 1'b1;
      end
      for (int i = N; i < NB * N; i++) begin
        gv[i] = 0; en[i] = 1'b0;
      end
      msb_row[0] = 5'd1; lsb_row[0] = 5'd7;
      @(negedge clk) prune_clear = 1'b1;
      @(negedge clk) prune_clear = 1'b0;
      prune_en = 1'b1;
      check_sort("pruning: 10 smallest |W|", CA_TNS, DT_UNSIGNED, 1'b0, 7, 1, mags, N, 0, 0, 10);
      prune_en = 1'b0;
      n_halt++;
      ref_order(gv, en, 7, DT_UNSIGNED, 1'b0, expv);
      check(prune_count == CW'(10), $sformatf("pruned %0d weights, expected 10", prune_count));
      for (int i = 0; i < NB * N; i++) begin
        bit pr;
        pr = 1'b0;
        for (int j = 0; j < 10; j++) if (expv[j] == i) pr = 1'b1;
        check(prune_mask_o[i] == pr && mvm_x_out[i] == (pr ? 8'd0 : mvm_x_in[i]),
              $sformatf("pruning mask / gated input %0d", i));
      end
      if (prune_count == CW'(10)) n_prune++;
    end

    // ---- Dijkstra step: 16-bit floating point distances, 4 neighbours, first min only
    for (int i = 0; i < N; i++) v[i] = 32'({1'b0, 5'(rnd(5) | 5'd1), 10'(rnd(10))});
    store(0, 0, 16, 1, v);
    msb_row[0] = 5'd0; lsb_row[0] = 5'd15; num_en[0] = 32'h0000_F000;
    begin
      int unsigned gv[NB*N];
      bit en[NB*N];
      int expv[$], got[$], cyc;
      for (int i = 0; i < NB * N; i++) begin
        gv[i] = (i < N) ? v[i] : 0;
        en[i] = (i >= 12 && i < 16);
      end
      ref_order(gv, en, 16, DT_SIGNMAG, 1'b0, expv);
      out_limit = CW'(1);
      sort_run(CA_TNS, DT_SIGNMAG, 1'b0, 1, got, cyc);
      out_limit = '0;
      check(got.size() == 1 && got[0] == expv[0],
            $sformatf("Dijkstra min of 4 distances: %p expected %0d", got, expv[0]));
      check(cyc <= 16, $sformatf("Dijkstra first min in %0d cycles (<= 16 digits)", cyc));
      $display("%-40s %3d outputs %5d cycles", "Dijkstra nearest neighbour", got.size(), cyc);
      n_halt++;
    end

    // ---- multi-level cells by write-verify: 6-bit numbers in 3-bit cells (rows 0, 1)
    for (int i = 0; i < N; i++) v[i] = rnd(6);
    v[5] = v[9];
    @(negedge clk) ml_bits = 2'd3;
    store(0, 0, 6, 3, v);
    msb_row[0] = 5'd0; lsb_row[0] = 5'd1; num_en[0] = '1;
    check_sort("ML-3-bit unsigned min", CA_TNS, DT_UNSIGNED, 1'b0, 6, 3, v, N, 0, 0, 0);
    check_sort("ML-3-bit two's complement max", CA_TNS, DT_TWOS, 1'b1, 6, 3, v, N, 0, 0, 0);

    // ---- 4-bit numbers in 2-bit cells (rows 2, 3)
    for (int i = 0; i < N; i++) v[i] = rnd(4);
    @(negedge clk) ml_bits = 2'd2;
    store(0, 2, 4, 2, v);
    msb_row[0] = 5'd2; lsb_row[0] = 5'd3;
    check_sort("ML-2-bit unsigned min", CA_TNS, DT_UNSIGNED, 1'b0, 4, 2, v, N, 0, 0, 0);
    @(negedge clk) ml_bits = 2'd1;

    // ---- pseudo multi-level: 8-bit numbers, upper bits of each 2-bit digit in bank 0
    for (int i = 0; i < N; i++) begin
      v[i] = rnd(8);
      hi[i] = 32'({v[i][7], v[i][5], v[i][3], v[i][1]});
      lo[i] = 32'({v[i][6], v[i][4], v[i][2], v[i][0]});
    end
    store(0, 8, 4, 1, hi);
    store(1, 8, 4, 1, lo);
    msb_row[0] = 5'd8; lsb_row[0] = 5'd11; num_en[0] = '1;
    check_sort("pseudo ML-2-bit unsigned min", CA_PML, DT_UNSIGNED, 1'b0, 8, 2, v, N, 0, 0, 0);
    check_sort("pseudo ML-2-bit two's complement min", CA_PML, DT_TWOS, 1'b0, 8, 2, v, N, 0, 0, 0);

    // ---- multi-bank: 64 8-bit numbers in two banks (rows 16..23)
    begin
      int unsigned gv[NB*N];
      bit en[NB*N];
      int expv[$], got[$], cyc;
      for (int i = 0; i < N; i++) begin
        hi[i] = rnd(8);
        lo[i] = rnd(8);
      end
      lo[3] = hi[7];
      store(0, 16, 8, 1, hi);
      store(1, 16, 8, 1, lo);
      for (int b = 0; b < NB; b++) begin
        msb_row[b] = 5'd16; lsb_row[b] = 5'd23; num_en[b] = '1;
      end
      for (int i = 0; i < N; i++) begin
        gv[i] = hi[i]; gv[N + i] = lo[i]; en[i] = 1'b1; en[N + i] = 1'b1;
      end
      for (int t = 0; t < 2; t++) begin
        dtype_e dt;
        dt = (t == 0) ? DT_UNSIGNED : DT_TWOS;
        ref_order(gv, en, 8, dt, t == 1, expv);
        sort_run(CA_MB, dt, t == 1, 1, got, cyc);
        check(got == expv, $sformatf("multi-bank %s: order %p expected %p",
                                     dt.name(), got, expv));
        check(cyc <= 2 * N * 8, $sformatf("multi-bank: %0d cycles above n x w", cyc));
        $display("%-40s %3d outputs %5d cycles", {"multi-bank ", dt.name()}, got.size(), cyc);
      end
    end

    // ---- bit-slice: 16-bit numbers, upper byte in bank 0, lower byte in bank 1 (rows 24..31)
    for (int i = 0; i < N; i++) begin
      hi[i] = $urandom_range(3) * 64;
      lo[i] = rnd(8);
      v[i]  = (hi[i] << 8) | lo[i];
    end
    hi[20] = 32'hC0; lo[20] = 32'h00; v[20] = 32'hC000;
    store(0, 24, 8, 1, hi);
    store(1, 24, 8, 1, lo);
    for (int b = 0; b < NB; b++) begin
      msb_row[b] = 5'd24; lsb_row[b] = 5'd31; num_en[b] = '1;
    end
    bs_slices = 2'(NB);
    check_sort("bit-slice unsigned min", CA_BS, DT_UNSIGNED, 1'b0, 16, 1, v, N, N, 0, 0);
    check_sort("bit-slice two's complement max", CA_BS, DT_TWOS, 1'b1, 16, 1, v, N, N, 0, 0);
    check_sort("bit-slice sign-magnitude min", CA_BS, DT_SIGNMAG, 1'b0, 16, 1, v, N, N, 0, 0);

    // ---- mechanisms
    $display("mechanisms: dr=%0d sr=%0d drop=%0d reload=%0d redundant=%0d restart=%0d last=%0d repeat=%0d",
             n_dr, n_sr, n_drop, n_reload, n_redundant, n_restart, n_last, n_repeat);
    $display("            group out=%0d in=%0d  modes tns=%0d mb=%0d bs=%0d pml=%0d  ml=%0d wv=%0d halt=%0d prune=%0d",
             n_gout, n_gin, n_tns, n_mb, n_bs, n_pml, n_ml, n_wv, n_halt, n_prune);
    check(n_dr > 0, "digit reads happened");
    check(n_sr > 0, "state recording happened");
    check(n_drop > 0, "LIFO overflow drop happened");
    check(n_reload > 0, "reload happened");
    check(n_redundant > 0, "redundant pop happened");
    check(n_restart > 0, "restart happened");
    check(n_last > 0, "last-number exit happened");
    check(n_repeat > 0, "repeated-number exit happened");
    check(n_gout > 0 && n_gin > 0, "bit-slice group hand-over happened");
    check(n_tns > 0 && n_mb > 0 && n_bs > 0 && n_pml > 0, "all four modes ran");
    check(n_ml > 0, "multi-level reads happened");
    check(n_wv > 0, "write-verify happened");
    check(n_halt > 0, "partial sort halt happened");
    check(n_prune > 0, "pruning happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
