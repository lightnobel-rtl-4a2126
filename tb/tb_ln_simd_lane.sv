// tb_ln_simd_lane: column write, then every ALU operation on random operands from the
// scratchpad or the broadcast input, compared with a reference; the exponent is
// compared with exp() computed in real arithmetic (within 2 LSB).
module tb_ln_simd_lane;
  import ln_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, bsel, we;
  alu_e op;
  logic [4:0] ra, rb, rd, raddr;
  logic [VW-1:0] ext, rdata, res;
  logic [23:0] recip;
  logic [7:0] qmax;
  logic [19:0][VW-1:0] wdata;
  int checks = 0, failures = 0;
  logic signed [15:0] m [32];
  ln_simd_lane dut (.*);

  function automatic int sat(longint v);
    return v > 32767 ? 32767 : v < -32768 ? -32768 : int'(v);
  endfunction

  initial begin
    en = 0; bsel = 0; we = 0; op = ALU_PASS; ra = 0; rb = 0; rd = 0; raddr = 0; ext = 0;
    recip = 0; qmax = 0; wdata = '0;
    for (int i = 0; i < 32; i++) m[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 20; i++) begin wdata[i] = VW'($urandom); m[i] = wdata[i]; end
    we = 1; @(negedge clk); we = 0;
    for (int i = 0; i < 20; i++) begin
      raddr = 5'(i); #1; checks++;
      if (rdata !== m[i]) begin failures++; $display("FAIL colwrite %0d", i); end
    end
    for (int t = 0; t < 600; t++) begin
      longint a, b, e;
      @(negedge clk);
      op = alu_e'(t % 10); ra = 5'($urandom_range(19,0)); rb = 5'($urandom_range(19,0));
      rd = 5'($urandom_range(31,20)); bsel = $urandom_range(1,0); ext = VW'($urandom);
      recip = 24'($urandom_range(400000, 0)); qmax = $urandom_range(1,0) ? 8'd7 : 8'd127;
      if (op == ALU_EXP) begin
        // load a non-positive operand through the column write port
        m[ra] = -16'($urandom_range(5000, 0));
        for (int i = 0; i < 20; i++) wdata[i] = m[i];
        we = 1; @(negedge clk); we = 0;
      end
      a = longint'(m[ra]); b = bsel ? longint'($signed(ext)) : longint'(m[rb]);
      case (op)
        ALU_PASS: e = a;
        ALU_ADD:  e = sat(a + b);
        ALU_SUB:  e = sat(a - b);
        ALU_MUL:  e = sat((a * b) >>> FRAC);
        ALU_MAX:  e = a > b ? a : b;
        ALU_MIN:  e = a < b ? a : b;
        ALU_RELU: e = a < 0 ? 0 : a;
        ALU_ABS:  e = sat(a < 0 ? -a : a);
        ALU_QNT:  begin e = (a * longint'(recip) + 32768) >>> 16; if (e > longint'(qmax)) e = longint'(qmax); if (e < -longint'(qmax)) e = -longint'(qmax); end
        default:  e = 0;
      endcase
      en = 1;
      @(posedge clk); #1; en = 0;
      raddr = rd; #1;
      checks++;
      if (op == ALU_EXP) begin
        real r; int ri;
        r = $exp(real'(a) / 256.0) * 256.0; ri = $rtoi(r + 0.5);
        if (a < -4095) ri = 0;
        if (iabs(int'($signed(rdata)) - ri) > 2) begin failures++; $display("FAIL exp(%0d): %0d vs %0d", a, $signed(rdata), ri); end
      end else if ($signed(rdata) !== 16'(e)) begin failures++; $display("FAIL op %s: %0d vs %0d", op.name(), $signed(rdata), e); end
      m[rd] = rdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
