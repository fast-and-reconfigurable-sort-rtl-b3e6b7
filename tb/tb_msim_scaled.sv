// tb_msim_scaled -- the sort-in-memory system with eight banks and one-entry bit-slice FIFOs.
//
// Two of the larger configurations are run end to end through the top's ports:
//   * multi-bank sorting of 256 8-bit numbers spread over 8 arrays (unsigned min and two's
//     complement max), checked against a reference sort (lowest global address first on
//     ties) and against the bit-traversal bound n x w cycles;
//   * bit-slice sorting of 32 32-bit numbers cut into eight 4-bit slices, one per array, with
//     many equal upper slices (large groups) in three data types. The FIFOs between the
//     slices hold a single group, so the slices must stall while the next one is busy; the
//     test fails if no stall, group hand-over or multi-bank run happened.
// All cells are written with DC set / reset through the programming port.
module tb_msim_scaled;
  import msim_pkg::*;

  localparam int NB = 8;
  localparam int N  = ARRAY_COLS;
  localparam int ROWS = ARRAY_ROWS;
  localparam int BW = 3;
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

  msim_top #(.NB(NB), .FIFO_DEPTH(1)) dut (
    .clk, .rst_n, .prog_valid, .prog_bank, .prog_row, .prog_col, .prog_wv, .prog_value,
    .prog_nmax, .prog_busy, .prog_done, .prog_ok, .prog_pulses, .mode, .dtype, .find_max,
    .ml_bits, .bs_slices, .msb_row, .lsb_row, .num_en, .out_limit, .start, .busy, .done,
    .out_valid, .out_bank, .out_idx, .out_count, .cycle_count, .ev_any, .prune_en,
    .prune_clear, .mvm_x_in, .mvm_x_out, .prune_mask_o, .prune_count
  );

  int checks = 0, failures = 0;

  // mechanism counters
  int n_dr, n_sr, n_drop, n_reload, n_redundant, n_restart, n_last, n_repeat, n_gout, n_gin;
  int n_tns, n_mb, n_bs, n_pml, n_ml, n_wv, n_halt, n_prune, n_stall;

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
    if (ev_any.stall)      n_stall++;
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
    int unsigned s[N], v[N];
    int unsigned gv[NB*N];
    bit en[NB*N];
    int expv[$], got[$], cyc;
    for (int b = 0; b < NB; b++) begin
      msb_row[b] = '0;
      lsb_row[b] = '0;
      num_en[b]  = '0;
    end
    for (int i = 0; i < NB * N; i++) mvm_x_in[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // ---- multi-bank: 256 numbers, rows 0..7 of every bank
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < N; i++) begin
        s[i] = rnd(8);
        if (i % 9 == 4) s[i] = 32'h5A;                  // equal values across banks
        gv[b * N + i] = s[i];
        en[b * N + i] = 1'b1;
      end
      store(b, 0, 8, 1, s);
      msb_row[b] = 5'd0; lsb_row[b] = 5'd7; num_en[b] = '1;
    end
    for (int t = 0; t < 2; t++) begin
      dtype_e dt;
      dt = (t == 0) ? DT_UNSIGNED : DT_TWOS;
      ref_order(gv, en, 8, dt, t == 1, expv);
      sort_run(CA_MB, dt, t == 1, 1, got, cyc);
      check(got == expv, $sformatf("multi-bank 256 %s: order differs", dt.name()));
      check(got.size() == NB * N, "multi-bank: every number output");
      check(cyc <= NB * N * 8, $sformatf("multi-bank: %0d cycles above n x w", cyc));
      $display("%-40s %3d outputs %5d cycles", {"multi-bank 8 x 32 ", dt.name()}, got.size(), cyc);
    end

    // ---- bit-slice: 32-bit numbers, slice b = bits 31-4b .. 28-4b in rows 8..11 of bank b
    for (int i = 0; i < N; i++) begin
      case ($urandom_range(3))
        0: v[i] = 32'h0000_0000;
        1: v[i] = 32'h0001_0000;
        2: v[i] = 32'hFFFF_0000;
        default: v[i] = 32'h8000_0000;
      endcase
      v[i] = v[i] | (($urandom_range(3) == 0) ? 32'h0 : (32'($urandom()) & 32'h0000_0F0F));
    end
    v[3] = v[17];
    for (int b = 0; b < NB; b++) begin
      for (int i = 0; i < N; i++) s[i] = (v[i] >> (28 - 4 * b)) & 32'hF;
      store(b, 8, 4, 1, s);
      msb_row[b] = 5'd8; lsb_row[b] = 5'd11; num_en[b] = '1;
    end
    bs_slices = 4'(NB);
    check_sort("bit-slice 8 x 4 bits unsigned min", CA_BS, DT_UNSIGNED, 1'b0, 32, 1, v, N,
               (NB - 1) * N, 0, 0);
    check_sort("bit-slice 8 x 4 bits two's compl. max", CA_BS, DT_TWOS, 1'b1, 32, 1, v, N,
               (NB - 1) * N, 0, 0);
    check_sort("bit-slice 8 x 4 bits sign-magn. min", CA_BS, DT_SIGNMAG, 1'b0, 32, 1, v, N,
               (NB - 1) * N, 0, 0);

    $display("mechanisms: group out=%0d in=%0d stall=%0d mb=%0d bs=%0d", n_gout, n_gin, n_stall,
             n_mb, n_bs);
    check(n_gout > 0 && n_gin > 0, "group hand-over happened");
    check(n_stall > 0, "full-FIFO stall happened");
    check(n_mb == 2 && n_bs == 3, "both modes ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
