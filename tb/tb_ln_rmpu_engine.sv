// tb_ln_rmpu_engine: random operands on all 4 clusters; every result set (2-PE,
// 4-lane, 5-lane, 8-lane, 16-lane, 80-lane sums) and ReLU are checked against a direct
// computation, one cycle after the operands are presented.
module tb_ln_rmpu_engine;
  import ln_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, mode5, relu, out_valid;
  logic signed [3:0][19:0][7:0][15:0][MULW-1:0] a, b;
  logic [3:0][19:0][7:0][15:0][4:0] sh;
  logic [3:0][4:0][VW-1:0] scale;
  acc_t [3:0][4:0] bias;
  osel_e osel;
  acc_t [319:0] y;
  logic [8:0] y_count;
  int checks = 0, failures = 0;
  ln_rmpu_engine dut (.*);

  longint pe [4][20][8], ls [4][20], q4 [20], q5 [16], s8 [10], s16 [5], s80;

  function automatic longint rl(longint v); return (relu && v < 0) ? 0 : v; endfunction

  initial begin
    in_valid = 0; mode5 = 0; relu = 0; osel = OS_4L;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 36; t++) begin
      @(negedge clk);
      osel = osel_e'(t % 6); mode5 = (osel == OS_5L); relu = (t / 6) % 2;
      for (int c = 0; c < 4; c++) for (int g = 0; g < 5; g++) begin
        scale[c][g] = (osel == OS_4L || osel == OS_5L) ? 16'($urandom_range(50,1)) : 16'd1;
        bias[c][g] = '0;
      end
      for (int c = 0; c < 4; c++) for (int l = 0; l < 20; l++) begin
        ls[c][l] = 0;
        for (int p = 0; p < 8; p++) begin
          pe[c][l][p] = 0;
          for (int m = 0; m < 16; m++) begin
            a[c][l][p][m] = 5'($urandom); b[c][l][p][m] = 5'($urandom); sh[c][l][p][m] = 5'($urandom_range(8,0));
            pe[c][l][p] += (longint'($signed(a[c][l][p][m])) * longint'($signed(b[c][l][p][m]))) <<< sh[c][l][p][m];
          end
          ls[c][l] += pe[c][l][p];
        end
      end
      for (int c = 0; c < 4; c++) begin
        for (int g = 0; g < 5; g++) q4[5*c+g] = (ls[c][4*g]+ls[c][4*g+1]+ls[c][4*g+2]+ls[c][4*g+3]) * longint'(scale[c][g]);
        for (int g = 0; g < 4; g++) q5[4*c+g] = (ls[c][5*g]+ls[c][5*g+1]+ls[c][5*g+2]+ls[c][5*g+3]) * longint'(scale[c][g]) + ls[c][5*g+4];
      end
      for (int i = 0; i < 10; i++) s8[i] = q4[2*i] + q4[2*i+1];
      for (int i = 0; i < 5; i++) s16[i] = s8[2*i] + s8[2*i+1];
      s80 = s16[0] + s16[1] + s16[2] + s16[3] + s16[4];
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: no result after one cycle"); end
      case (osel)
        OS_2PE: for (int c = 0; c < 4; c++) for (int l = 0; l < 20; l++) for (int j = 0; j < 4; j++) begin
          checks++; if (y[c*80+4*l+j] !== ACCW'(rl(pe[c][l][2*j]+pe[c][l][2*j+1]))) failures++; end
        OS_4L:  for (int i = 0; i < 20; i++) begin checks++; if (y[i] !== ACCW'(rl(q4[i]))) failures++; end
        OS_5L:  for (int i = 0; i < 16; i++) begin checks++; if (y[i] !== ACCW'(rl(q5[i]))) failures++; end
        OS_8L:  for (int i = 0; i < 10; i++) begin checks++; if (y[i] !== ACCW'(rl(s8[i]))) failures++; end
        OS_16L: for (int i = 0; i < 5; i++)  begin checks++; if (y[i] !== ACCW'(rl(s16[i]))) failures++; end
        default: begin checks++; if (y[0] !== ACCW'(rl(s80))) failures++; end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
