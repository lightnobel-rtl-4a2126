// tb_ln_token_scratchpad: fills one bank, swaps, then reads it back while the other
// bank is being overwritten; the data read must be the block written before the swap.
module tb_ln_token_scratchpad;
  import ln_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic swap, wr_bank, wr_en, rd_en;
  logic [4:0] wr_addr, rd_addr;
  line_t wr_data, rd_data;
  line_t blk [2][32];
  int checks = 0, failures = 0;
  ln_token_scratchpad #(.DEPTH(32)) dut (.*);
  initial begin
    swap = 0; wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 2; b++) for (int i = 0; i < 32; i++)
      for (int w = 0; w < LINE_W/32; w++) blk[b][i][w*32 +: 32] = $urandom;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = 5'(i); wr_data = blk[0][i];
    end
    @(negedge clk); wr_en = 0; swap = 1;
    @(negedge clk); swap = 0;
    checks++; if (wr_bank !== 1'b1) begin failures++; $display("FAIL bank"); end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(i); wr_data = blk[1][i];
      rd_en = 1; rd_addr = 5'(31 - i);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== blk[0][31-i]) begin failures++; $display("FAIL read %0d", 31-i); end
    end
    @(negedge clk); wr_en = 0; rd_en = 0; swap = 1;
    @(negedge clk); swap = 0;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = 5'(i);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== blk[1][i]) begin failures++; $display("FAIL read2 %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
