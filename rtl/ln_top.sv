// ln_top: LightNobel accelerator top level.
//
// Blocks and connections: a token aligner fed from the memory read stream writes the
// double-buffered token scratchpad (token blocks) or the weight scratchpad (weight
// rows); N_RMPU RMPUs take tokens into their data aligners and receive weight rows as
// a broadcast; each RMPU's output FIFO feeds the global crossbar, which delivers result
// columns to N_RMPU*VPR VVPUs; VVPUs re-quantize finished tokens into the output
// scratchpad, from which the controller writes lines back to memory.
// Memory is outside: a read command (mrd_*: start address and length in MEM_W-bit
// words) followed by a valid/ready word stream (mem_rvalid/mem_rready/mem_rdata), and
// a line write port (mwr_*). A job (see ln_pkg::job_t) starts with `start` and ends with
// a `done` pulse. Defaults are the paper's configuration: 32 RMPUs, 4 VVPUs per RMPU,
// 128 SIMD lanes per VVPU, token scratchpad 2 x 128 KB, weight scratchpad 64 KB,
// output scratchpad 128 KB. MEM_W, FIFO depth and the lane scratchpad depth are this
// design's choices. Event counters report what happened during a job.
module ln_top
  import ln_pkg::*;
#(
  parameter int N_RMPU    = 32,
  parameter int VPR       = 4,
  parameter int NL        = 128,
  parameter int MEM_W     = 1024,
  parameter int TOK_DEPTH = 512,
  parameter int W_DEPTH   = 256,
  parameter int O_DEPTH   = 512,
  parameter int FIFO_DEPTH = 4,
  parameter int VDEPTH    = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  job_t               job,
  output logic               busy,
  output logic               done,
  output logic               mrd_valid,
  input  logic               mrd_ready,
  output logic [31:0]        mrd_addr,
  output logic [15:0]        mrd_len,
  input  logic               mem_rvalid,
  output logic               mem_rready,
  input  logic [MEM_W-1:0]   mem_rdata,
  output logic               mwr_valid,
  input  logic               mwr_ready,
  output logic [31:0]        mwr_addr,
  output line_t              mwr_data,
  output logic [31:0]        cnt_swap,
  output logic [31:0]        cnt_row_stall,
  output logic [31:0]        cnt_rmpu_stall,
  output logic [31:0]        cnt_gcn_conflict,
  output logic [31:0]        cnt_quant
);
  localparam int NV   = N_RMPU * VPR;
  localparam int VIW  = (NV > 1) ? $clog2(NV) : 1;
  localparam int RIW  = (N_RMPU > 1) ? $clog2(N_RMPU) : 1;
  localparam int TAW  = $clog2(TOK_DEPTH);
  localparam int WAW  = $clog2(W_DEPTH);
  localparam int OAW  = $clog2(O_DEPTH);
  localparam int NRES = 80;
  localparam int EW   = 8 + 8 + NRES*ACCW;
  localparam int NW   = 20;

  qscheme_t al_scheme;
  logic     al_flush, al_tok_valid, al_tok_ready;
  line_t    al_line;
  logic     w_we, w_re, t_swap, t_we, t_re, o_we, o_re;
  logic [WAW-1:0] w_waddr, w_raddr;
  logic [TAW-1:0] t_waddr, t_raddr;
  logic [OAW-1:0] o_waddr, o_raddr;
  logic     t_bank;
  line_t    w_rdata, t_rdata;
  logic     ld_valid, ld_zero, row_valid, row_ready_all, rmpu_idle_all;
  logic [RIW-1:0] ld_rmpu;
  logic [4:0] ld_slot;
  logic [7:0] row_tag;
  logic     v_cmd_valid, v_busy, v_q_valid;
  logic [VIW-1:0] v_idx;
  vcmd_t    v_cmd;
  logic     ev_swap, ev_row_stall;
  job_t     jq;

  logic [N_RMPU-1:0]          r_row_ready, r_out_valid, r_stall;
  logic [N_RMPU-1:0][EW-1:0]  r_out;
  logic [N_RMPU-1:0]          g_grant;
  logic [N_RMPU-1:0][VIW-1:0] g_dst;
  logic [NV-1:0]              g_dvalid;
  logic [NV-1:0][EW-1:0]      g_dout;
  logic                       g_conflict;
  logic [NV-1:0]              vb, vq;
  line_t [NV-1:0]             vline;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) jq <= '0;
    else if (start && !busy) jq <= job;
  end

  ln_controller #(.N_RMPU(N_RMPU), .VPR(VPR), .MEM_W(MEM_W), .TOK_DEPTH(TOK_DEPTH),
                  .W_DEPTH(W_DEPTH), .O_DEPTH(O_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .job, .busy, .done,
    .mrd_valid, .mrd_ready, .mrd_addr, .mrd_len,
    .al_scheme, .al_flush, .al_tok_valid, .al_tok_ready,
    .w_we, .w_waddr, .w_re, .w_raddr,
    .t_swap, .t_we, .t_waddr, .t_re, .t_raddr,
    .ld_valid, .ld_rmpu, .ld_slot, .ld_zero, .row_valid, .row_tag,
    .row_ready_all, .rmpu_idle_all,
    .v_cmd_valid, .v_idx, .v_cmd, .v_busy, .v_q_valid,
    .o_we, .o_waddr, .o_re, .o_raddr,
    .mwr_valid, .mwr_ready, .mwr_addr, .ev_swap, .ev_row_stall);

  ln_token_aligner #(.MEM_W(MEM_W)) u_align (
    .clk, .rst_n, .scheme(al_scheme), .flush(al_flush),
    .in_valid(mem_rvalid), .in_ready(mem_rready), .in_data(mem_rdata),
    .tok_valid(al_tok_valid), .tok_ready(al_tok_ready), .tok_line(al_line));

  ln_scratchpad #(.DEPTH(W_DEPTH)) u_wspad (
    .clk, .wr_en(w_we), .wr_addr(w_waddr), .wr_data(al_line),
    .rd_en(w_re), .rd_addr(w_raddr), .rd_data(w_rdata));

  ln_token_scratchpad #(.DEPTH(TOK_DEPTH)) u_tspad (
    .clk, .rst_n, .swap(t_swap), .wr_bank(t_bank), .wr_en(t_we), .wr_addr(t_waddr),
    .wr_data(al_line), .rd_en(t_re), .rd_addr(t_raddr), .rd_data(t_rdata));

  for (genvar r = 0; r < N_RMPU; r++) begin : g_rmpu
    ln_rmpu #(.FIFO_DEPTH(FIFO_DEPTH)) u_rmpu (
      .clk, .rst_n,
      .load_valid(ld_valid && int'(ld_rmpu) == r), .load_slot(ld_slot),
      .load_line(ld_zero ? '0 : t_rdata), .scheme(jq.in_scheme), .mode(jq.mode),
      .row_valid(row_valid && row_ready_all), .row_ready(r_row_ready[r]),
      .row_line(w_rdata), .row_tag(row_tag), .row_bias(jq.bias), .relu(jq.relu),
      .out_valid(r_out_valid[r]), .out_data(r_out[r]), .out_pop(g_grant[r]),
      .stall(r_stall[r]));
    assign g_dst[r] = VIW'(r * VPR + int'(jq.vsel));
  end

  assign row_ready_all = &r_row_ready;
  assign rmpu_idle_all = !(|r_out_valid);

  ln_gcn #(.NSRC(N_RMPU), .NDST(NV), .W(EW)) u_gcn (
    .clk, .rst_n, .req(r_out_valid), .dst(g_dst), .din(r_out), .grant(g_grant),
    .dvalid(g_dvalid), .dout(g_dout), .conflict(g_conflict));

  for (genvar v = 0; v < NV; v++) begin : g_vvpu
    acc_t [NW-1:0] cv;
    for (genvar t = 0; t < NW; t++) begin : g_cv
      assign cv[t] = g_dout[v][t*ACCW +: ACCW];
    end
    ln_vvpu #(.NL(NL), .DEPTH(VDEPTH), .NW(NW)) u_vvpu (
      .clk, .rst_n, .col_valid(g_dvalid[v]),
      .col_lane($clog2(NL)'(g_dout[v][EW-1 -: 8])), .col_vals(cv),
      .cmd_valid(v_cmd_valid && int'(v_idx) == v), .cmd(v_cmd), .busy(vb[v]),
      .red_sum(), .red_mean(), .red_max(), .q_valid(vq[v]), .q_line(vline[v]));
  end

  assign v_busy    = vb[v_idx];
  assign v_q_valid = vq[v_idx];

  ln_scratchpad #(.DEPTH(O_DEPTH)) u_ospad (
    .clk, .wr_en(o_we), .wr_addr(o_waddr), .wr_data(vline[v_idx]),
    .rd_en(o_re), .rd_addr(o_raddr), .rd_data(mwr_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_swap <= '0; cnt_row_stall <= '0; cnt_rmpu_stall <= '0;
      cnt_gcn_conflict <= '0; cnt_quant <= '0;
    end else begin
      if (ev_swap)      cnt_swap <= cnt_swap + 1;
      if (ev_row_stall) cnt_row_stall <= cnt_row_stall + 1;
      if (|r_stall)     cnt_rmpu_stall <= cnt_rmpu_stall + 1;
      if (g_conflict)   cnt_gcn_conflict <= cnt_gcn_conflict + 1;
      if (o_we)         cnt_quant <= cnt_quant + 1;
    end
  end
endmodule
