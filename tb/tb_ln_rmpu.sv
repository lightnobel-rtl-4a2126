// tb_ln_rmpu: loads 20 token slots and broadcasts weight rows in four modes
// (4-bit with 4 outliers = five-lane, 4-bit without outliers = four-lane, raw 16-bit,
// QK head products). The output FIFO is popped slowly so that it fills and the RMPU
// refuses rows (stall). Each popped entry is compared with the reference dot products;
// the first result must leave the FIFO two cycles after its row is accepted.
module tb_ln_rmpu;
  import ln_pkg::*;
  import tb_ln_ref_pkg::*;
  localparam int EW = 8 + 8 + 80*ACCW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_valid, row_valid, row_ready, relu, out_valid, out_pop, stall;
  logic [4:0] load_slot;
  line_t load_line, row_line;
  qscheme_t scheme;
  rmode_e mode;
  logic [7:0] row_tag;
  acc_t row_bias;
  logic [EW-1:0] out_data;
  int checks = 0, failures = 0, stalls = 0;
  ln_rmpu dut (.*);

  vec_t tok [20], W [8];
  qtok_t q [20];
  logic acc_q;
  always @(posedge clk) if (stall) stalls++;
  always_ff @(posedge clk) acc_q <= row_valid && row_ready;

  task automatic run(rmode_e m, int k);
    int nrow, got, lat, fired;
    nrow = 8;
    for (int s = 0; s < 20; s++) begin
      tok[s] = (m == RM_RAW) ? rand_token(3000, 0, 0) : rand_token(300, k, 3000);
      q[s] = quantize_token(tok[s], 4, k);
      @(negedge clk);
      load_valid = 1; load_slot = 5'(s); mode = m;
      scheme.prec = (m == RM_RAW) ? PREC16 : PREC4; scheme.k = 4'(k);
      load_line = (m == RM_RAW) ? pack_raw(tok[s/4]) : pack(q[s]);
    end
    if (m == RM_RAW) for (int s = 0; s < 5; s++) tok[s] = tok[s];
    @(negedge clk); load_valid = 0;
    got = 0; fired = 0; lat = -1;
    fork
      begin
        for (int j = 0; j < nrow; j++) begin
          for (int c = 0; c < HZ; c++) W[j][c] = (m == RM_QK) ? v16_t'($signed($urandom_range(15,0)) - 8) : v16_t'($signed($urandom_range(1024,0)) - 512);
          row_line = pack_raw(W[j]); row_tag = 8'(j); row_valid = 1; row_bias = ACCW'(j * 100);
          @(posedge clk); #1;
          while (!acc_q) begin @(posedge clk); #1; end
          if (j == 0) fired = 1;
          @(negedge clk);
        end
        row_valid = 0;
      end
      begin
        int cyc; cyc = 0;
        while (got < nrow) begin
          @(negedge clk); cyc++;
          if (fired && lat < 0 && out_valid) lat = cyc;
          out_pop = out_valid && ($urandom_range(3,0) == 0);
          if (out_pop) begin
            int j; j = int'(out_data[EW-1 -: 8]);
            for (int s = 0; s < 20; s++) begin
              longint e; acc_t gv;
              if (m == RM_QK) begin
                for (int h = 0; h < 4; h++) begin
                  e = 0;
                  for (int c = 32*h; c < 32*h+32; c++) e += longint'(q[s].code[c]) * longint'(W[j][c]);
                  gv = out_data[(4*s+h)*ACCW +: ACCW];
                  checks++; if (gv !== ACCW'(e)) begin failures++; $display("FAIL qk s%0d h%0d", s, h); end
                end
              end else begin
                if (m == RM_RAW) e = (s < 5) ? rawdot(tok[s], W[j], 100*j) : 0;
                else if (k > 0 && s % 5 == 4) e = 0;
                else e = qdot(q[s], W[j], 100*j);
                gv = out_data[s*ACCW +: ACCW];
                checks++; if (gv !== ACCW'(e)) begin failures++; $display("FAIL m%0d k%0d row %0d slot %0d: %0d vs %0d", m, k, j, s, gv, e); end
              end
            end
            got++;
          end
        end
        @(negedge clk); out_pop = 0;
      end
    join
  endtask

  initial begin
    load_valid = 0; row_valid = 0; relu = 0; out_pop = 0; load_slot = 0; load_line = '0;
    row_line = '0; row_tag = 0; row_bias = 0; scheme = '0; mode = RM_QUANT;
    repeat (2) @(posedge clk); rst_n = 1;
    run(RM_QUANT, 4);
    run(RM_QUANT, 0);
    run(RM_RAW, 0);
    run(RM_QK, 0);
    checks++; if (stalls == 0) begin failures++; $display("FAIL: never stalled"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog timeout"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
