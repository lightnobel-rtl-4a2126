// tb_ln_top: end-to-end test of the accelerator at a reduced size (1 RMPU, 1 VVPU,
// small scratchpads). A behavioural memory holds weight rows and packed token blocks;
// three jobs run back to back:
//   1. 16 tokens, 4-bit inliers + 4 outliers (five-lane mode), results re-quantized to
//      4-bit + 4 outliers;
//   2. 20 tokens, 4-bit inliers without outliers (four-lane mode), ReLU, results
//      re-quantized to 8-bit + 4 outliers;
//   3. 5 unquantized tokens (raw mode, sixteen-lane sums), results to 4-bit, k = 0.
// Every written-back line is compared with the reference model (linear layer in
// product units, conversion to fixed point, token-wise quantization and packing).
// Mechanisms counted: five-lane mode, four-lane mode, raw mode, ReLU clipping, bank
// swap, outlier re-quantization, tokens straddling memory words.
module tb_ln_top;
  import ln_pkg::*;
  import tb_ln_ref_pkg::*;

  localparam int MEM_W = 1024;
  localparam int NROWS = 128;
  localparam int MWORDS = 1024;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  job_t job;
  logic mrd_valid, mrd_ready, mem_rvalid, mem_rready, mwr_valid, mwr_ready;
  logic [31:0] mrd_addr, mwr_addr;
  logic [15:0] mrd_len;
  logic [MEM_W-1:0] mem_rdata;
  line_t mwr_data;
  logic [31:0] cnt_swap, cnt_row_stall, cnt_rmpu_stall, cnt_gcn_conflict, cnt_quant;

  ln_top #(.N_RMPU(1), .VPR(1), .TOK_DEPTH(32), .W_DEPTH(128), .O_DEPTH(32)) dut (.*);

  int checks = 0, failures = 0;
  logic [MEM_W-1:0] mem [MWORDS];
  line_t outl [64];
  bit    outv [64];

  // behavioural memory: read command then a word stream with random gaps
  int rd_ptr, rd_left;
  assign mrd_ready = (rd_left == 0);
  assign mwr_ready = 1'b1;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_left <= 0; mem_rvalid <= 0; rd_ptr <= 0;
    end else begin
      if (mrd_valid && mrd_ready) begin
        rd_ptr <= mrd_addr; rd_left <= int'(mrd_len); mem_rvalid <= 0;
      end else begin
        if (mem_rvalid && mem_rready) begin
          rd_ptr <= rd_ptr + 1; rd_left <= rd_left - 1;
        end
        mem_rvalid <= 0;
        if (rd_left > 0 && !(mem_rvalid && mem_rready && rd_left == 1)) mem_rvalid <= ($urandom_range(3,0) != 0);
        if (mem_rvalid && !mem_rready) mem_rvalid <= 1;
      end
      if (mwr_valid) begin outl[mwr_addr[5:0]] <= mwr_data; outv[mwr_addr[5:0]] <= 1; end
    end
  end
  assign mem_rdata = mem[(mem_rvalid && mem_rready) ? rd_ptr : rd_ptr];

  vec_t  W [NROWS];
  int    bitpos;
  int    n_5lane = 0, n_4lane = 0, n_raw = 0, n_relu = 0, n_straddle = 0, n_outq = 0;

  task automatic put_bits(line_t l, int n, int base_word);
    for (int b = 0; b < n; b++) begin
      int p; p = bitpos + b;
      mem[base_word + p / MEM_W][p % MEM_W] = l[b];
    end
    if ((bitpos / MEM_W) != ((bitpos + n - 1) / MEM_W)) n_straddle++;
    bitpos += n;
  endtask

  task automatic run_job(rmode_e mode, int in_bits, int in_k, int ntok, int out_bits,
                         int out_k, bit relu, longint bias);
    vec_t  tok [32];
    qtok_t qin [32];
    vec_t  y;
    qtok_t qo;
    line_t exp_l;
    int    tw;
    // tokens at word 512
    for (int w = 512; w < MWORDS; w++) mem[w] = '0;
    bitpos = 0;
    for (int t = 0; t < ntok; t++) begin
      tok[t] = rand_token(300, in_k, 3000);
      if (mode == RM_RAW) put_bits(pack_raw(tok[t]), HZ*16, 512);
      else begin
        qin[t] = quantize_token(tok[t], in_bits, in_k);
        put_bits(pack(qin[t]), qbits_len(in_bits, in_k), 512);
      end
    end
    tw = (bitpos + MEM_W - 1) / MEM_W;
    for (int i = 0; i < 64; i++) outv[i] = 0;
    job = '0;
    job.w_addr = 0; job.n_rows = 9'(NROWS); job.t_addr = 512; job.t_words = 16'(tw);
    job.n_tok = 10'(ntok);
    job.in_scheme.prec = (in_bits == 4) ? PREC4 : (in_bits == 8) ? PREC8 : PREC16;
    job.in_scheme.k = 4'(in_k);
    job.mode = mode;
    job.out_scheme.prec = (out_bits == 4) ? PREC4 : PREC8;
    job.out_scheme.k = 4'(out_k);
    job.relu = relu; job.o_addr = 0; job.vsel = 0; job.bias = ACCW'(bias);
    @(posedge clk); start <= 1; @(posedge clk); start <= 0;
    wait (done); @(posedge clk);
    for (int t = 0; t < ntok; t++) begin
      for (int j = 0; j < HZ; j++) begin
        longint d;
        d = (mode == RM_RAW) ? rawdot(tok[t], W[j], bias) : qdot(qin[t], W[j], bias);
        if (relu && d < 0) begin d = 0; n_relu++; end
        y[j] = to_fix(d);
      end
      qo = quantize_token(y, out_bits, out_k);
      exp_l = pack(qo);
      checks++;
      if (!outv[t] || outl[t] !== exp_l) begin
        failures++;
        $display("FAIL job mode=%0d token %0d", mode, t);
        if (t == 0) $display("  got %h\n  exp %h", outl[t][255:0], exp_l[255:0]);
      end
      if (out_k > 0) n_outq++;
    end
    if (mode == RM_RAW) n_raw++;
    else if (in_k > 0) n_5lane++;
    else n_4lane++;
  endtask

  initial begin
    start = 0; job = '0;
    for (int w = 0; w < MWORDS; w++) mem[w] = '0;
    for (int j = 0; j < NROWS; j++) begin
      line_t l;
      for (int c = 0; c < HZ; c++) W[j][c] = v16_t'($signed($urandom_range(1024, 0)) - 512);
      l = pack_raw(W[j]);
      mem[2*j] = l[MEM_W-1:0];
      mem[2*j+1] = l[2*MEM_W-1:MEM_W];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    run_job(RM_QUANT, 4, 4, 16, 4, 4, 0, 1000);
    run_job(RM_QUANT, 4, 0, 20, 8, 4, 1, -2000);
    run_job(RM_RAW, 16, 0, 5, 4, 0, 0, 0);
    checks++; if (cnt_swap != 3) begin failures++; $display("FAIL swaps %0d", cnt_swap); end
    if (n_5lane == 0)  begin failures++; $display("FAIL: five-lane mode never ran"); end
    if (n_4lane == 0)  begin failures++; $display("FAIL: four-lane mode never ran"); end
    if (n_raw == 0)    begin failures++; $display("FAIL: raw mode never ran"); end
    if (n_relu == 0)   begin failures++; $display("FAIL: ReLU never clipped"); end
    if (n_outq == 0)   begin failures++; $display("FAIL: no outlier re-quantization"); end
    if (n_straddle == 0) begin failures++; $display("FAIL: no token straddled a word"); end
    $display("events: 5lane=%0d 4lane=%0d raw=%0d relu=%0d swaps=%0d outq=%0d straddle=%0d quant=%0d",
             n_5lane, n_4lane, n_raw, n_relu, cnt_swap, n_outq, n_straddle, cnt_quant);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
