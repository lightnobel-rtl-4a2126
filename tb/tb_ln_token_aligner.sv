// tb_ln_token_aligner: packs random quantized tokens (4-bit k=4, 8-bit k=4, 4-bit k=0)
// back to back into 1024-bit memory words, streams them in with random gaps and random
// output back-pressure, and checks every emitted line against the packed token.
module tb_ln_token_aligner;
  import ln_pkg::*;
  import tb_ln_ref_pkg::*;
  localparam int MEM_W = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  qscheme_t scheme;
  logic flush, in_valid, in_ready, tok_valid, tok_ready;
  logic [MEM_W-1:0] in_data;
  line_t tok_line;
  int checks = 0, failures = 0;
  ln_token_aligner dut (.*);

  logic [MEM_W-1:0] words [64];
  line_t exp_l [40];

  task automatic run(int bits, int k, int ntok);
    int bp, nw, wi, ti;
    for (int i = 0; i < 64; i++) words[i] = '0;
    bp = 0;
    for (int t = 0; t < ntok; t++) begin
      qtok_t q; int n;
      q = quantize_token(rand_token(300, k, 3000), bits, k);
      exp_l[t] = pack(q);
      n = qbits_len(bits, k);
      for (int b = 0; b < n; b++) words[(bp+b)/MEM_W][(bp+b)%MEM_W] = exp_l[t][b];
      bp += n;
    end
    nw = (bp + MEM_W - 1) / MEM_W;
    @(negedge clk);
    scheme.prec = (bits == 4) ? PREC4 : PREC8; scheme.k = 4'(k);
    flush = 1; @(negedge clk); flush = 0;
    wi = 0; ti = 0;
    while (ti < ntok) begin
      in_valid  = (wi < nw) && ($urandom_range(2,0) != 0);
      in_data   = words[wi < 64 ? wi : 0];
      tok_ready = ($urandom_range(3,0) != 0);
      @(posedge clk);
      if (in_valid && in_ready) wi++;
      if (tok_valid && tok_ready) begin
        checks++;
        if (tok_line !== exp_l[ti]) begin failures++; $display("FAIL bits=%0d k=%0d token %0d", bits, k, ti); end
        ti++;
      end
      @(negedge clk);
    end
    in_valid = 0; tok_ready = 0;
  endtask

  initial begin
    flush = 0; in_valid = 0; tok_ready = 0; in_data = '0; scheme = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(4, 4, 30);
    run(8, 4, 20);
    run(4, 0, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
