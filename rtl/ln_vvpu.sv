// ln_vvpu: Versatile Vector Processing Unit.
//
// NL SIMD lanes (default 128, one per channel of a token), a Local Crossbar Network, a
// Scalar Support Unit and a bitonic top-k sorter. Lane j's scratchpad word t holds
// channel j of the token in slot t; results of the RMPU arrive as columns (one output
// channel for NW token slots) on col_valid/col_lane/col_vals and are rescaled from the
// RMPU's product units to 16-bit fixed point (arithmetic shift by FRAC, saturating).
// Commands (cmd_valid while !busy):
//  V_ALU    every lane performs op on words ra, rb (or the broadcast ext) into rd: 1 cycle.
//  V_REDUCE the SSU sums / averages / takes the max of word ra over all lanes: 1 cycle,
//           results on red_sum, red_mean, red_max.
//  V_QUANT  runtime quantization of the token in slot ra to scheme: the bitonic sorter
//           ranks |x| (the k largest are outliers, the next one is the inlier range M);
//           the SSU derives scale and reciprocal; all lanes quantize their inlier (ALU_QNT
//           into scratch word DEPTH-1); the LCN moves the inlier codes to the front in
//           channel order and the outliers behind them; the SSU packs the line, which
//           appears on q_valid/q_line. Latency: 28 sort stages plus 5 cycles for NL=128.
// The unit's parts and the quantization sequence (top-k, scale, LCN reorder, SSU
// alignment) follow the paper; the command set, the slot-per-word storage and the
// state sequence are this design's. LayerNorm and softmax are sequences of these
// commands issued by the controller.
module ln_vvpu
  import ln_pkg::*;
#(
  parameter int NL    = 128,
  parameter int DEPTH = 32,
  parameter int NW    = 20,
  localparam int AW   = $clog2(DEPTH),
  localparam int LW   = $clog2(NL)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 col_valid,
  input  logic [LW-1:0]        col_lane,
  input  acc_t [NW-1:0]        col_vals,
  input  logic                 cmd_valid,
  input  vcmd_t                cmd,
  output logic                 busy,
  output acc_t                 red_sum,
  output logic [VW-1:0]        red_mean,
  output logic [VW-1:0]        red_max,
  output logic                 q_valid,
  output line_t                q_line
);
  typedef enum logic [2:0] {S_IDLE, S_SORT, S_PARAM, S_QNT, S_LCN, S_PACK} state_e;
  state_e st;

  vcmd_t                 cq;
  logic [NL-1:0]         lane_en;
  alu_e                  lop;
  logic [AW-1:0]         lra, lrb, lrd, lraddr;
  logic                  lbsel;
  logic [VW-1:0]         lext;
  logic [23:0]           recip_q;
  logic [7:0]            qmax_q;
  logic [VW-1:0]         sigma_q;
  logic [NL-1:0][VW-1:0] rd_vec, lres;
  logic [NW-1:0][VW-1:0] wcol;
  logic [NL-1:0]         lwe;
  logic                  srt_start, srt_busy, srt_done;
  logic [NL-1:0][VW-1:0] srt_mag;
  logic [NL-1:0][LW-1:0] srt_idx;
  logic [NL-1:0]         is_out;
  logic [NL-1:0][VW-1:0] raw_q, lcn_in, lcn_out;
  logic [NL-1:0][LW-1:0] lcn_sel;
  logic [KMAX-1:0][IDXW-1:0] oidx;
  acc_t                  s_sum;
  logic [VW-1:0]         s_mean, s_max, s_sigma;
  logic [7:0]            s_qmax;
  logic [23:0]           s_recip;
  logic [VW-1:0]         m_range;
  line_t                 s_line;

  function automatic logic [VW-1:0] to_fix(acc_t v);
    acc_t s;
    s = v >>> FRAC;
    if (s > acc_t'(32767))  return 16'h7fff;
    if (s < -acc_t'(32768)) return 16'h8000;
    return VW'(s);
  endfunction

  // column writes from the crossbar
  always_comb begin
    for (int t = 0; t < NW; t++) wcol[t] = to_fix(col_vals[t]);
    for (int j = 0; j < NL; j++) lwe[j] = col_valid && int'(col_lane) == j;
  end

  for (genvar j = 0; j < NL; j++) begin : g_lane
    ln_simd_lane #(.DEPTH(DEPTH), .NW(NW)) u_lane (
      .clk, .en(lane_en[j]), .op(lop), .ra(lra), .rb(lrb), .rd(lrd),
      .bsel(lbsel), .ext(lext), .recip(recip_q), .qmax(qmax_q),
      .we(lwe[j]), .wdata(wcol), .raddr(lraddr), .rdata(rd_vec[j]), .res(lres[j]));
  end

  ln_bitonic_topk #(.N(NL)) u_topk (
    .clk, .rst_n, .start(srt_start), .din(rd_vec), .busy(srt_busy), .done(srt_done),
    .mag(srt_mag), .idx(srt_idx));

  ln_lcn #(.N(NL)) u_lcn (.clk, .din(lcn_in), .sel(lcn_sel), .dout(lcn_out));

  ln_ssu #(.N(NL)) u_ssu (
    .vals((st == S_PACK) ? lcn_out : rd_vec), .sum(s_sum), .mean(s_mean), .vmax(s_max),
    .m_range(m_range), .scheme(cq.scheme), .qmax(s_qmax), .sigma(s_sigma), .recip(s_recip),
    .oidx(oidx), .packed_line(s_line));

  // outlier marks, inlier range and LCN selection from the sorted order
  always_comb begin
    int n;
    is_out = '0;
    oidx   = '0;
    for (int j = 0; j < KMAX; j++) if (j < int'(cq.scheme.k)) begin
      is_out[srt_idx[j]] = 1'b1;
      oidx[j] = IDXW'(srt_idx[j]);
    end
    m_range = srt_mag[int'(cq.scheme.k)];
    n = 0;
    lcn_sel = '0;
    for (int c = 0; c < NL; c++) if (!is_out[c]) begin
      lcn_sel[n] = LW'(c);
      n++;
    end
    for (int j = 0; j < KMAX; j++) if (j < int'(cq.scheme.k))
      lcn_sel[NL - int'(cq.scheme.k) + j] = srt_idx[j];
    for (int c = 0; c < NL; c++) lcn_in[c] = is_out[c] ? raw_q[c] : rd_vec[c];
  end

  // lane control
  always_comb begin
    lane_en   = '0;
    lop       = cq.op;
    lra       = cq.ra;
    lrb       = cq.rb;
    lrd       = cq.rd;
    lbsel     = cq.bsel;
    lext      = cq.ext;
    lraddr    = cq.ra;
    srt_start = 1'b0;
    if (st == S_IDLE && cmd_valid) begin
      lraddr = cmd.ra;
      if (cmd.kind == V_QUANT) srt_start = 1'b1;
    end
    if (st == S_IDLE && cmd_valid && cmd.kind == V_ALU) begin
      lane_en = '1; lop = cmd.op; lra = cmd.ra; lrb = cmd.rb; lrd = cmd.rd;
      lbsel = cmd.bsel; lext = cmd.ext;
    end
    if (st == S_QNT) begin
      lane_en = '1; lop = ALU_QNT; lra = cq.ra; lrd = AW'(DEPTH-1); lbsel = 1'b0;
    end
    if (st == S_LCN) lraddr = AW'(DEPTH-1);
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cq <= '0; recip_q <= '0; qmax_q <= '0; sigma_q <= '0; raw_q <= '0;
      red_sum <= '0; red_mean <= '0; red_max <= '0; q_valid <= 1'b0; q_line <= '0;
    end else begin
      q_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          cq <= cmd;
          if (cmd.kind == V_REDUCE) begin
            red_sum <= s_sum; red_mean <= s_mean; red_max <= s_max;
          end
          if (cmd.kind == V_QUANT) begin
            st    <= S_SORT;
            raw_q <= rd_vec;
          end
        end
        S_SORT:  if (srt_done) st <= S_PARAM;
        S_PARAM: begin
          recip_q <= s_recip; qmax_q <= s_qmax; sigma_q <= s_sigma;
          st <= S_QNT;
        end
        S_QNT:   st <= S_LCN;
        S_LCN:   st <= S_PACK;
        default: begin
          q_valid <= 1'b1;
          q_line  <= s_line;
          st      <= S_IDLE;
        end
      endcase
    end
  end
endmodule
