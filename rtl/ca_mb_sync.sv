// ca_mb_sync -- cross-array processor configured for the multi-bank (MB) strategy.
//
// NB sub-sorters, each holding a different part of the numbers, must behave as one long
// TNS sorter: they read the same digit, record and reload nodes together, and exclude,
// check for the last number and check for repeats across all banks. Following the paper, the
// "not all 0's" (has1), "not all 1's" (has0) and load signals of all banks are ORed and sent
// back; the same OR is applied to the load check at the end of an iteration, to the
// "numbers left" flag and to the floating-point sign flags (negatives/positives still unsorted).
// The per-bank survivor counts (saturated at 2) are added and saturated into g_cnt, which
// gives the cross-array last-number and repeated-number checks. The grant goes to the
// lowest-numbered bank holding a survivor, so only one bank outputs per cycle (the
// lowest-index-first order among equal values is this design's choice).
//
// The output controller merges the registered outputs of the banks (at most one valid per
// cycle) into one stream with a bank number. Combinational.
module ca_mb_sync #(
  parameter int unsigned NB   = 32,
  parameter int unsigned IDXW = 5,
  localparam int unsigned BW  = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic [NB-1:0]   l_has0,
  input  logic [NB-1:0]   l_has1,
  input  logic [1:0]      l_cnt [NB],
  input  logic [NB-1:0]   l_topload,
  input  logic [NB-1:0]   l_lenload,
  input  logic [NB-1:0]   l_negrem,
  input  logic [NB-1:0]   l_posrem,
  input  logic [NB-1:0]   l_left,
  output logic            g_has0,
  output logic            g_has1,
  output logic [1:0]      g_cnt,
  output logic            g_topload,
  output logic            g_lenload,
  output logic            g_negrem,
  output logic            g_posrem,
  output logic            g_left,
  output logic [NB-1:0]   grant,
  // output controller
  input  logic [NB-1:0]   bank_valid,
  input  logic [IDXW-1:0] bank_idx [NB],
  output logic            out_valid,
  output logic [BW-1:0]   out_bank,
  output logic [IDXW-1:0] out_idx
);
  assign g_has0    = |l_has0;
  assign g_has1    = |l_has1;
  assign g_topload = |l_topload;
  assign g_lenload = |l_lenload;
  assign g_negrem  = |l_negrem;
  assign g_posrem  = |l_posrem;
  assign g_left    = |l_left;

  always_comb begin
    logic seen;
    g_cnt = 2'd0;
    seen  = 1'b0;
    grant = '0;
    for (int b = 0; b < NB; b++) begin
      if (g_cnt + l_cnt[b] >= 2'd2 || (l_cnt[b] == 2'd2)) g_cnt = 2'd2;
      else g_cnt = g_cnt + l_cnt[b];
      if (!seen && l_cnt[b] != 2'd0) begin
        grant[b] = 1'b1;
        seen     = 1'b1;
      end
    end
  end

  always_comb begin
    out_valid = 1'b0;
    out_bank  = '0;
    out_idx   = '0;
    for (int b = NB - 1; b >= 0; b--)
      if (bank_valid[b]) begin
        out_valid = 1'b1;
        out_bank  = BW'(b);
        out_idx   = bank_idx[b];
      end
  end
endmodule
