// tb_ln_pe: checks the PE against independently computed products: random chunk
// operands with random shifts, and full 16x16 products built from 4-bit chunks
// (MSB chunk sign extended, others zero extended) with shifts 4*(i+j).
module tb_ln_pe;
  import ln_pkg::*;
  logic signed [15:0][MULW-1:0] a, b;
  logic [15:0][4:0] sh;
  acc_t y;
  int checks = 0, failures = 0;
  ln_pe dut (.*);

  function automatic logic [4:0] ck(logic [15:0] v, int i);
    return (i == 3) ? {v[15], v[15:12]} : {1'b0, v[4*i +: 4]};
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      longint e; e = 0;
      for (int m = 0; m < 16; m++) begin
        a[m] = 5'($urandom); b[m] = 5'($urandom); sh[m] = 5'($urandom_range(24, 0));
        e += (longint'($signed(a[m])) * longint'($signed(b[m]))) * (longint'(1) << sh[m]);
      end
      #1; checks++;
      if (y !== ACCW'(e)) begin failures++; $display("FAIL rand %0d: %0d vs %0d", t, y, e); end
    end
    for (int t = 0; t < 200; t++) begin
      logic signed [15:0] x, w;
      x = 16'($urandom); w = 16'($urandom);
      if (t == 0) begin x = 16'sh8000; w = 16'sh8000; end
      for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
        a[4*i+j] = ck(x, i); b[4*i+j] = ck(w, j); sh[4*i+j] = 5'(4*(i+j));
      end
      #1; checks++;
      if (y !== ACCW'(longint'(x) * longint'(w))) begin failures++; $display("FAIL mul %0d*%0d=%0d", x, w, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
