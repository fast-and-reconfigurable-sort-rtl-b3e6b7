// tb_prune_mask -- self-checking test of the in-situ pruning mask.
//
// Random weight addresses located by the sorter are recorded (repeats included) and the
// mask, the count of distinct pruned weights and the gated MVM inputs (zero where pruned)
// are compared with a model every cycle; clear restarts the mask. Default size: 1024
// weights, 8-bit inputs.
module tb_prune_mask;
  localparam int NW = 1024;
  localparam int XW = 8;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 1'b0, rec_valid = 1'b0;
  logic [9:0] rec_addr = '0;
  logic [XW-1:0] x_in [NW];
  logic [XW-1:0] x_out [NW];
  logic [NW-1:0] mask;
  logic [10:0] count;

  prune_mask dut (.clk, .rst_n, .clear, .rec_valid, .rec_addr, .x_in, .x_out, .mask, .count);

  bit model [NW];
  int mcount;

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NW; i++) begin
      x_in[i] = XW'($urandom() | 1);
      model[i] = 1'b0;
    end
    mcount = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      clear     = ($urandom_range(999) == 0);
      rec_valid = ($urandom_range(3) != 0);
      rec_addr  = 10'($urandom_range(t % 700 < 350 ? 63 : NW - 1));
      @(posedge clk);
      if (clear) begin
        for (int i = 0; i < NW; i++) model[i] = 1'b0;
        mcount = 0;
      end else if (rec_valid && !model[rec_addr]) begin
        model[rec_addr] = 1'b1;
        mcount++;
      end
      #1;
      begin
        bit ok;
        ok = (int'(count) == mcount);
        for (int i = 0; i < NW; i++)
          if (mask[i] != model[i] || x_out[i] != (model[i] ? XW'(0) : x_in[i])) ok = 1'b0;
        checks++;
        if (!ok) begin
          failures++;
          $display("FAIL cycle %0d: count %0d expected %0d", t, count, mcount);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
