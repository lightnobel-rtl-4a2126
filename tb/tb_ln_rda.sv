// tb_ln_rda: loads quantized (k = 0, 4, 8), unquantized and key tokens and checks that
// the operands the aligner places on the multipliers reproduce, when multiplied,
// shifted and summed, the inlier dot product (lanes 0..3), the outlier dot product
// (lane 4), the raw quarter dot product, and the per-head QK products.
module tb_ln_rda;
  import ln_pkg::*;
  import tb_ln_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load;
  line_t tok_line, b_line;
  qscheme_t scheme;
  rmode_e mode;
  logic [1:0] chan_base;
  logic signed [4:0][7:0][15:0][MULW-1:0] a, b;
  logic [4:0][7:0][15:0][4:0] sh;
  logic [VW-1:0] scale;
  logic five_lane;
  int checks = 0, failures = 0;
  ln_rda dut (.*);

  function automatic longint pesum(int l, int p);
    longint s; s = 0;
    for (int m = 0; m < 16; m++) s += (longint'($signed(a[l][p][m])) * longint'($signed(b[l][p][m]))) <<< sh[l][p][m];
    return s;
  endfunction
  function automatic longint lanesum(int l);
    longint s; s = 0;
    for (int p = 0; p < 8; p++) s += pesum(l, p);
    return s;
  endfunction

  initial begin
    load = 0; chan_base = 0; mode = RM_QUANT; scheme = '0; tok_line = '0; b_line = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      vec_t v, w; qtok_t q; longint ei, eo;
      int k; k = (t % 3) * 4;
      v = rand_token(300, k, 3000);
      for (int c = 0; c < HZ; c++) w[c] = v16_t'($urandom);
      q = quantize_token(v, 4, k);
      @(negedge clk);
      tok_line = pack(q); scheme.prec = PREC4; scheme.k = 4'(k); mode = RM_QUANT; load = 1;
      b_line = pack_raw(w);
      @(negedge clk); load = 0; #1;
      ei = 0; eo = 0;
      for (int c = 0; c < HZ; c++)
        if (q.is_out[c]) eo += longint'(q.code[c]) * longint'(w[c]);
        else ei += longint'(q.code[c]) * longint'(w[c]);
      checks += 4;
      if (lanesum(0) + lanesum(1) + lanesum(2) + lanesum(3) != ei) begin failures++; $display("FAIL inliers k=%0d", k); end
      if (lanesum(4) != eo) begin failures++; $display("FAIL outliers k=%0d", k); end
      if (scale != 16'(q.sigma)) begin failures++; $display("FAIL scale"); end
      if (five_lane != (k != 0)) begin failures++; $display("FAIL five_lane"); end
    end
    for (int t = 0; t < 8; t++) begin
      vec_t v, w; longint e;
      for (int c = 0; c < HZ; c++) begin v[c] = v16_t'($urandom); w[c] = v16_t'($urandom); end
      @(negedge clk);
      tok_line = pack_raw(v); scheme.prec = PREC16; scheme.k = 0; mode = RM_RAW;
      chan_base = 2'(t); load = 1; b_line = pack_raw(w);
      @(negedge clk); load = 0; #1;
      e = 0;
      for (int c = 32*(t%4); c < 32*(t%4)+32; c++) e += longint'(v[c]) * longint'(w[c]);
      checks += 2;
      if (lanesum(0) + lanesum(1) + lanesum(2) + lanesum(3) + lanesum(4) != e) begin failures++; $display("FAIL raw"); end
      if (scale != 16'd1) failures++;
    end
    for (int t = 0; t < 8; t++) begin
      vec_t v, kv; qtok_t q;
      v = rand_token(300, 0, 0);
      q = quantize_token(v, 4, 0);
      for (int c = 0; c < HZ; c++) kv[c] = v16_t'($signed($urandom_range(15,0)) - 8);
      @(negedge clk);
      tok_line = pack(q); scheme.prec = PREC4; scheme.k = 0; mode = RM_QK; load = 1; b_line = pack_raw(kv);
      @(negedge clk); load = 0; #1;
      for (int h = 0; h < 4; h++) begin
        longint e; e = 0;
        for (int c = 32*h; c < 32*h+32; c++) e += longint'(q.code[c]) * longint'(kv[c]);
        checks++;
        if (pesum(0, 2*h) + pesum(0, 2*h+1) != e) begin failures++; $display("FAIL qk head %0d", h); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
