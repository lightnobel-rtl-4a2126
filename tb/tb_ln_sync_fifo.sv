// tb_ln_sync_fifo: random pushes and pops compared with a queue model; checks
// ordering, full/empty flags and the count.
module tb_ln_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [31:0] din, dout;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [31:0] q [$];
  ln_sync_fifo #(.W(32), .DEPTH(4)) dut (.*);
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (full != (q.size() == 4) || empty != (q.size() == 0) || int'(count) != q.size()) begin
        failures++; $display("FAIL flags size=%0d", q.size());
      end
      if (!empty) begin checks++; if (dout !== q[0]) begin failures++; $display("FAIL data"); end end
      push = ($urandom_range(2,0) != 0) && !full;
      pop  = ($urandom_range(2,0) == 0) && !empty;
      din  = $urandom;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
