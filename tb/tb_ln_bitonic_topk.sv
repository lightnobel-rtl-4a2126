// tb_ln_bitonic_topk: random tokens (with repeated magnitudes) are sorted; the whole
// order of indices and magnitudes must match a reference ranking, and `done` must
// come 28 cycles after `start` for 128 values.
module tb_ln_bitonic_topk;
  import ln_pkg::*;
  import tb_ln_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [127:0][VW-1:0] din, mag;
  logic [127:0][6:0] idx;
  int checks = 0, failures = 0;
  ln_bitonic_topk dut (.*);
  initial begin
    start = 0; din = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      vec_t v; int order [HZ]; int cyc;
      v = (t % 3 == 0) ? rand_token(4, 0, 0) : rand_token(300, 4, 3000);
      for (int c = 0; c < HZ; c++) din[c] = v[c];
      rank(v, order);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 0;
      while (!done) begin @(posedge clk); cyc++; #1; end
      checks++;
      if (cyc != 28) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int r = 0; r < HZ; r++) begin
        checks++;
        if (int'(idx[r]) != order[r] || int'(mag[r]) != iabs(v[order[r]])) begin
          failures++; $display("FAIL rank %0d: idx %0d vs %0d", r, idx[r], order[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
