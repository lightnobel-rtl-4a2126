// tb_ln_lane_arbiter: checks the lane-to-group placement in both modes.
module tb_ln_lane_arbiter;
  import ln_pkg::*;
  logic mode5;
  acc_t [19:0] lane_in;
  acc_t [4:0][3:0] grp;
  int checks = 0, failures = 0;
  ln_lane_arbiter dut (.*);
  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int l = 0; l < 20; l++) lane_in[l] = ACCW'({$urandom(), $urandom()});
      mode5 = t[0];
      #1;
      for (int g = 0; g < 5; g++) for (int i = 0; i < 4; i++) begin
        int src;
        src = !mode5 ? 4*g + i : (g < 4 ? 5*g + i : 5*i + 4);
        checks++;
        if (grp[g][i] !== lane_in[src]) begin failures++; $display("FAIL m5=%0d g=%0d i=%0d", mode5, g, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
