// tb_ln_dal: random lane groups, scale factors and biases; four-lane mode must give
// five scaled sums, five-lane mode four scaled inlier sums plus the unscaled outlier
// lane of the same token.
module tb_ln_dal;
  import ln_pkg::*;
  logic mode5;
  acc_t [4:0][3:0] grp;
  logic [4:0][VW-1:0] scale;
  acc_t [4:0] bias, y;
  logic [4:0] out_valid;
  int checks = 0, failures = 0;
  ln_dal dut (.*);
  initial begin
    for (int t = 0; t < 200; t++) begin
      longint e [5];
      mode5 = t[0];
      for (int g = 0; g < 5; g++) begin
        for (int i = 0; i < 4; i++) grp[g][i] = ACCW'($signed($urandom()) >>> 4);
        scale[g] = 16'($urandom_range(2000, 1));
        bias[g]  = ACCW'($signed($urandom()) >>> 8);
      end
      for (int g = 0; g < 5; g++) begin
        longint s; s = 0;
        for (int i = 0; i < 4; i++) s += longint'(grp[g][i]);
        e[g] = s * longint'(scale[g]) + longint'(bias[g]);
      end
      if (mode5) begin
        for (int g = 0; g < 4; g++) e[g] += longint'(grp[4][g]);
        e[4] = 0;
      end
      #1;
      for (int g = 0; g < 5; g++) begin
        checks++;
        if (y[g] !== ACCW'(e[g])) begin failures++; $display("FAIL m5=%0d g=%0d", mode5, g); end
      end
      checks++;
      if (out_valid !== (mode5 ? 5'b01111 : 5'b11111)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
