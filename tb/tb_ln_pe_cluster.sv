// tb_ln_pe_cluster: random operands on all 20 lanes; checks the 80 two-PE sums and
// the DAL results in four-lane and five-lane mode against a direct computation
// (lane sums, lane placement, scaling, outlier add, bias).
module tb_ln_pe_cluster;
  import ln_pkg::*;
  logic signed [19:0][7:0][15:0][MULW-1:0] a, b;
  logic [19:0][7:0][15:0][4:0] sh;
  logic mode5;
  logic [4:0][VW-1:0] scale;
  acc_t [4:0] bias, dal_y;
  acc_t [79:0] pair_out;
  logic [4:0] dal_valid;
  int checks = 0, failures = 0;
  ln_pe_cluster dut (.*);
  initial begin
    for (int t = 0; t < 40; t++) begin
      longint pe [20][8]; longint ls [20]; longint e [5];
      mode5 = t[0];
      for (int g = 0; g < 5; g++) begin scale[g] = 16'($urandom_range(300,1)); bias[g] = ACCW'($urandom_range(1000,0)); end
      for (int l = 0; l < 20; l++) begin
        ls[l] = 0;
        for (int p = 0; p < 8; p++) begin
          pe[l][p] = 0;
          for (int m = 0; m < 16; m++) begin
            a[l][p][m] = 5'($urandom); b[l][p][m] = 5'($urandom); sh[l][p][m] = 5'($urandom_range(12,0));
            pe[l][p] += (longint'($signed(a[l][p][m])) * longint'($signed(b[l][p][m]))) <<< sh[l][p][m];
          end
          ls[l] += pe[l][p];
        end
      end
      for (int g = 0; g < 5; g++) begin
        longint s; s = 0;
        for (int i = 0; i < 4; i++) s += mode5 ? (g < 4 ? ls[5*g+i] : 0) : ls[4*g+i];
        e[g] = s * longint'(scale[g]) + longint'(bias[g]);
        if (mode5 && g < 4) e[g] += ls[5*g+4];
        if (mode5 && g == 4) e[g] = 0;
      end
      #1;
      for (int l = 0; l < 20; l++) for (int j = 0; j < 4; j++) begin
        checks++;
        if (pair_out[4*l+j] !== ACCW'(pe[l][2*j] + pe[l][2*j+1])) begin failures++; $display("FAIL pair l%0d j%0d", l, j); end
      end
      for (int g = 0; g < 5; g++) begin
        checks++;
        if (dal_y[g] !== ACCW'(e[g])) begin failures++; $display("FAIL dal m5=%0d g=%0d", mode5, g); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
