// tb_ln_scratchpad: writes random lines to random addresses of a 64-line scratchpad and
// reads them back, checking the one-cycle read latency and the stored data.
module tb_ln_scratchpad;
  import ln_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  line_t wr_data, rd_data;
  line_t model [64];
  bit    valid [64];
  int checks = 0, failures = 0;
  ln_scratchpad #(.DEPTH(64)) dut (.*);
  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < 64; i++) valid[i] = 0;
    for (int t = 0; t < 500; t++) begin
      int ra;
      @(negedge clk);
      wr_en = $urandom_range(1,0); wr_addr = 6'($urandom); 
      for (int w = 0; w < LINE_W/32; w++) wr_data[w*32 +: 32] = $urandom;
      rd_en = 1; rd_addr = 6'($urandom); ra = rd_addr;
      @(posedge clk); #1;
      if (valid[ra]) begin
        checks++;
        if (rd_data !== model[ra]) begin failures++; $display("FAIL addr %0d", ra); end
      end
      if (wr_en) begin model[wr_addr] = wr_data; valid[wr_addr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
