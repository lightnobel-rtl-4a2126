// tb_ln_pe_lane: random operands on all 8 PEs; checks the four two-PE sums plus bias
// and the whole-lane sum against a direct computation.
module tb_ln_pe_lane;
  import ln_pkg::*;
  logic signed [7:0][15:0][MULW-1:0] a, b;
  logic [7:0][15:0][4:0] sh;
  acc_t bias, lane_out;
  acc_t [3:0] pair_out;
  int checks = 0, failures = 0;
  ln_pe_lane dut (.*);
  initial begin
    for (int t = 0; t < 300; t++) begin
      longint pe [8]; longint tot; tot = 0;
      bias = ACCW'($signed($urandom()));
      for (int p = 0; p < 8; p++) begin
        pe[p] = 0;
        for (int m = 0; m < 16; m++) begin
          a[p][m] = 5'($urandom); b[p][m] = 5'($urandom); sh[p][m] = 5'($urandom_range(24,0));
          pe[p] += (longint'($signed(a[p][m])) * longint'($signed(b[p][m]))) <<< sh[p][m];
        end
        tot += pe[p];
      end
      #1;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (pair_out[j] !== ACCW'(pe[2*j] + pe[2*j+1] + longint'(bias))) begin failures++; $display("FAIL pair %0d", j); end
      end
      checks++;
      if (lane_out !== ACCW'(tot)) begin failures++; $display("FAIL lane"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
