// tb_ln_lcn: random selections (permutations and broadcasts) over 128 lanes; output i
// must carry input sel[i] one cycle later.
module tb_ln_lcn;
  import ln_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [127:0][VW-1:0] din, dout;
  logic [127:0][6:0] sel;
  int checks = 0, failures = 0;
  ln_lcn dut (.*);
  initial begin
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      for (int i = 0; i < 128; i++) begin din[i] = VW'($urandom); sel[i] = (t % 2) ? 7'(127 - i) : 7'($urandom); end
      @(posedge clk); #1;
      for (int i = 0; i < 128; i++) begin
        checks++;
        if (dout[i] !== din[sel[i]]) begin failures++; $display("FAIL lane %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
