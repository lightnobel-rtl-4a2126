// tb_ln_vvpu: fills 20 token slots through the column port (values in RMPU product
// units), then
//  * V_QUANT on several slots with 4-bit/k=4, 8-bit/k=4 and 4-bit/k=0: the packed
//    line must equal the reference quantizer + packer, 33 cycles after the command;
//  * V_ALU add / max / exp across all lanes followed by V_REDUCE: sum, mean and max
//    must match the reference over the 128 lanes.
module tb_ln_vvpu;
  import ln_pkg::*;
  import tb_ln_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic col_valid, cmd_valid, busy, q_valid;
  logic [6:0] col_lane;
  acc_t [19:0] col_vals;
  vcmd_t cmd;
  acc_t red_sum;
  logic [VW-1:0] red_mean, red_max;
  line_t q_line;
  int checks = 0, failures = 0;
  vec_t tok [20];
  ln_vvpu dut (.*);

  task automatic issue(vcmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic check_reduce(int slot, vec_t v, int tol = 0);
    vcmd_t c; longint s; int mx;
    c = '0; c.kind = V_REDUCE; c.ra = 5'(slot);
    issue(c);
    s = 0; mx = -40000;
    for (int j = 0; j < HZ; j++) begin s += v[j]; if (v[j] > mx) mx = v[j]; end
    checks += 3;
    if (iabs(int'($signed(red_sum)) - int'(s)) > tol * HZ) begin failures++; $display("FAIL sum slot %0d %0d %0d", slot, $signed(red_sum), s); end
    if (iabs(int'($signed(red_mean)) - int'(s >>> 7)) > tol + (tol != 0)) begin failures++; $display("FAIL mean slot %0d", slot); end
    if ($signed(red_max) !== 16'(mx)) begin failures++; $display("FAIL max slot %0d", slot); end
  endtask

  initial begin
    vcmd_t c; vec_t r; int mx3;
    col_valid = 0; cmd_valid = 0; col_lane = 0; col_vals = '0; cmd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 20; s++) tok[s] = rand_token(300, (s % 3) * 2, 3000);
    for (int j = 0; j < HZ; j++) begin
      @(negedge clk);
      col_valid = 1; col_lane = 7'(j);
      for (int s = 0; s < 20; s++) col_vals[s] = (ACCW'(tok[s][j]) <<< FRAC) + ACCW'($urandom_range(255,0));
    end
    @(negedge clk); col_valid = 0;
    for (int s = 0; s < 12; s++) begin
      int bits, k, cyc; qtok_t q;
      bits = (s % 4 == 1) ? 8 : 4; k = (s % 4 == 3) ? 0 : 4;
      c = '0; c.kind = V_QUANT; c.ra = 5'(s);
      c.scheme.prec = (bits == 4) ? PREC4 : PREC8; c.scheme.k = 4'(k);
      q = quantize_token(tok[s], bits, k);
      @(negedge clk); cmd = c; cmd_valid = 1;
      @(posedge clk); cyc = 0; #1; cmd_valid = 0;
      while (!q_valid) begin @(posedge clk); cyc++; #1; end
      checks += 2;
      if (cyc != 33) begin failures++; $display("FAIL quant latency %0d", cyc); end
      if (q_line !== pack(q)) begin failures++; $display("FAIL quant slot %0d bits %0d k %0d", s, bits, k); end
    end
    check_reduce(5, tok[5]);
    // add slot 0 + slot 1 -> 25
    c = '0; c.kind = V_ALU; c.op = ALU_ADD; c.ra = 0; c.rb = 1; c.rd = 25;
    issue(c);
    for (int j = 0; j < HZ; j++) r[j] = v16_t'(int'(tok[0][j]) + int'(tok[1][j]));
    check_reduce(25, r);
    // max with a broadcast constant -> 26
    c = '0; c.kind = V_ALU; c.op = ALU_MAX; c.ra = 2; c.bsel = 1; c.ext = 16'd100; c.rd = 26;
    issue(c);
    for (int j = 0; j < HZ; j++) r[j] = (tok[2][j] > 100) ? tok[2][j] : 16'sd100;
    check_reduce(26, r);
    // x - max then exp, as in softmax -> 27, 28 (table exp: small tolerance)
    mx3 = -32768;
    for (int j = 0; j < HZ; j++) if (tok[3][j] > mx3) mx3 = tok[3][j];
    c = '0; c.kind = V_ALU; c.op = ALU_SUB; c.ra = 3; c.bsel = 1; c.ext = 16'(mx3); c.rd = 27;
    issue(c);
    c = '0; c.kind = V_ALU; c.op = ALU_EXP; c.ra = 27; c.rd = 28;
    issue(c);
    for (int j = 0; j < HZ; j++) begin
      int x; x = int'(tok[3][j]) - mx3;
      r[j] = (x < -4095) ? 16'sd0 : v16_t'($rtoi($exp(real'(x) / 256.0) * 256.0 + 0.5));
    end
    check_reduce(28, r, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
