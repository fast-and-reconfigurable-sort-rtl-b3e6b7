// tb_tns_state_ctrl -- self-checking test of one TNS sub-sorter state controller.
//
// Three controllers with LIFO sizes k = 1, 2, 3 read digits from numbers held in the
// testbench (an ideal array + digit processor). Checked:
//  * the paper's worked examples: {9,6,14,2,14,3} unsigned, k = 3, sorts in 10 cycles;
//    {-7,6,-2,2} two's complement, k = 2, in 5 cycles; {9,2,14,3} with 2-bit digits, k = 1, in
//    5 cycles; each with the exact output order;
//  * random data sets (unsigned, two's complement, sign-magnitude; min and max search; 1, 2 and
//    3 bits per digit) against an independent reference sort (ties: lowest index first), and
//    that no sort takes more cycles than bit traversal (numbers x digits).
module tb_tns_state_ctrl;
  import msim_pkg::*;
  localparam int N = 8, ROWS = 8, MLB = 3, NI = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // per-instance stimulus
  dtype_e         dtype   [NI];
  logic           fmax    [NI];
  logic [1:0]     mlb     [NI];
  logic [2:0]     lsb     [NI];
  logic [N-1:0]   nen     [NI];
  logic           start   [NI];
  logic           busy    [NI], done [NI], rd_en [NI], ov [NI];
  logic [2:0]     row     [NI];
  logic [2:0]     oidx    [NI];
  logic [MLB-1:0] dr      [NI][N];
  int unsigned    data    [NI][N];
  int             width   [NI];
  tns_ev_t        ev      [NI];

  for (genvar g = 0; g < NI; g++) begin : g_dut
    always_comb
      for (int i = 0; i < N; i++) begin
        int sh;
        sh = width[g] - (int'(row[g]) + 1) * int'(mlb[g]);
        dr[g][i] = (sh >= 0) ? MLB'((data[g][i] >> sh) & ((1 << mlb[g]) - 1)) : '0;
      end
    tns_state_ctrl #(.N(N), .ROWS(ROWS), .K(g + 1), .MLB(MLB)) u_dut (
      .clk, .rst_n, .dtype(dtype[g]), .find_max(fmax[g]), .ml_bits(mlb[g]),
      .msb_row(3'd0), .lsb_row(lsb[g]), .num_en(nen[g]),
      .has_sign(1'b1), .grp_in(1'b0), .grp_out(1'b0), .sync_en(1'b0),
      .start(start[g]), .halt(1'b0), .busy(busy[g]), .done(done[g]),
      .rd_en(rd_en[g]), .row_addr(row[g]), .dr(dr[g]),
      .out_valid(ov[g]), .out_idx(oidx[g]),
      .gout_valid(), .gout_mask(), .gout_neg(), .gout_ready(1'b1),
      .gin_valid(1'b0), .gin_mask('0), .gin_neg(1'b0), .gin_last(1'b0), .gin_pop(),
      .l_has0(), .l_has1(), .l_cnt(), .l_topload(), .l_lenload(), .l_negrem(), .l_posrem(),
      .l_left(), .g_has0(1'b0), .g_has1(1'b0), .g_cnt(2'd0), .g_topload(1'b0),
      .g_lenload(1'b0), .g_negrem(1'b0), .g_posrem(1'b0), .g_left(1'b0), .grant(1'b1),
      .ev(ev[g])
    );
  end

  // reference key: a signed integer that orders the numbers of the data type
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

  task automatic run(input int g, input int w, input int n, input dtype_e t, input logic mx,
                     input int m, input int unsigned vals[N], input int exp_cycles,
                     input string name);
    int got[$];
    int expv[$];
    int cyc;
    logic used[N];
    width[g] = w; dtype[g] = t; fmax[g] = mx; mlb[g] = 2'(m);
    lsb[g] = 3'(w / m - 1);
    for (int i = 0; i < N; i++) begin
      data[g][i] = vals[i];
      nen[g][i]  = (i < n);
      used[i]    = 1'b0;
    end
    // reference order: repeatedly take the smallest (largest) key, lowest index on ties
    for (int r = 0; r < n; r++) begin
      int best;
      best = -1;
      for (int i = 0; i < n; i++)
        if (!used[i]) begin
          if (best < 0) best = i;
          else if (!mx && key(vals[i], w, t) < key(vals[best], w, t)) best = i;
          else if (mx && key(vals[i], w, t) > key(vals[best], w, t)) best = i;
        end
      used[best] = 1'b1;
      expv.push_back(best);
    end
    @(negedge clk) start[g] = 1'b1;
    @(negedge clk) start[g] = 1'b0;
    cyc = 0;
    while (!done[g]) begin
      @(posedge clk);
      if (busy[g]) cyc++;
      #1 if (ov[g]) got.push_back(int'(oidx[g]));
    end
    repeat (2) begin
      @(posedge clk); #1 if (ov[g]) got.push_back(int'(oidx[g]));
    end
    checks++;
    if (got != expv) begin
      failures++;
      $display("FAIL %s: order %p expected %p", name, got, expv);
    end
    if (exp_cycles > 0) begin
      checks++;
      if (cyc != exp_cycles) begin
        failures++;
        $display("FAIL %s: %0d cycles, expected %0d", name, cyc, exp_cycles);
      end
    end else begin
      checks++;
      if (cyc > n * (w / m)) begin
        failures++;
        $display("FAIL %s: %0d cycles exceed bit traversal %0d", name, cyc, n * (w / m));
      end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned v[N];
    for (int g = 0; g < NI; g++) begin
      start[g] = 1'b0; width[g] = 4; mlb[g] = 2'd1; lsb[g] = 3'd3; nen[g] = '0;
      dtype[g] = DT_UNSIGNED; fmax[g] = 1'b0;
      for (int i = 0; i < N; i++) data[g][i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    v = '{9, 6, 14, 2, 14, 3, 0, 0};
    run(2, 4, 6, DT_UNSIGNED, 1'b0, 1, v, 10, "paper TNS k=3");
    v = '{9, 6, 14, 2, 0, 0, 0, 0};                            // 4-bit codes of -7, 6, -2, 2
    run(1, 4, 4, DT_TWOS, 1'b0, 1, v, 5, "paper two's complement k=2");
    v = '{9, 2, 14, 3, 0, 0, 0, 0};
    run(0, 4, 4, DT_UNSIGNED, 1'b0, 2, v, 5, "paper ML-2-bit k=1");
    v = '{9, 2, 14, 3, 0, 0, 0, 0};
    run(1, 4, 4, DT_UNSIGNED, 1'b1, 1, v, 0, "max search");

    for (int r = 0; r < 120; r++) begin
      int g, m, n;
      dtype_e t;
      g = r % NI;
      m = 1 + (r / 3) % 3;
      n = 1 + int'($urandom_range(N - 1));
      t = dtype_e'((r / 9) % 3);
      for (int i = 0; i < N; i++) v[i] = $urandom_range(63) & ((r % 4 == 0) ? 32'h33 : 32'h3f);
      run(g, 6, n, t, 1'(r / 27 % 2), m, v, 0, $sformatf("random %0d", r));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
