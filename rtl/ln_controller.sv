// ln_controller: sequencer of one accelerator job (token-wise linear layer plus
// runtime re-quantization of its results).
//
// Steps, in order:
//  LW  flush the aligner, stream the weight rows from memory through the token aligner (as unquantized
//      lines) into the weight scratchpad;
//  LT  flush the aligner, stream the packed token block through it into the write bank
//      of the token scratchpad, then swap banks;
//  FILL read the tokens back and load them into the RMPUs' slots (20 per RMPU in
//      four-lane mode, 16 in five-lane mode, 5 tokens x 4 channel quarters in raw mode);
//  ROWS broadcast weight row j (tag j) to all RMPUs, one row each time all of them
//      are ready; results flow through the RMPU FIFOs and the global crossbar into
//      column j of VVPU (r*VPR + vsel);
//  DRAIN wait until every RMPU FIFO is empty and the crossbar has delivered;
//  Q   have each VVPU quantize each of its token slots (V_QUANT) and store the packed
//      lines in the output scratchpad at the token's index;
//  WB  write the output lines back to memory, one line per request.
// The paper names the controller and the order of events (aligner to scratchpad, RMPU,
// VVPU, output scratchpad, memory); the state machine and every interface here are
// this design's. Loading the next block while computing the current one is not
// sequenced: a job loads, then computes.
module ln_controller
  import ln_pkg::*;
#(
  parameter int N_RMPU    = 32,
  parameter int VPR       = 4,
  parameter int MEM_W     = 1024,
  parameter int TOK_DEPTH = 512,
  parameter int W_DEPTH   = 256,
  parameter int O_DEPTH   = 512,
  localparam int NV  = N_RMPU * VPR,
  localparam int VIW = (NV > 1) ? $clog2(NV) : 1,
  localparam int RIW = (N_RMPU > 1) ? $clog2(N_RMPU) : 1,
  localparam int TAW = $clog2(TOK_DEPTH),
  localparam int WAW = $clog2(W_DEPTH),
  localparam int OAW = $clog2(O_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  job_t            job,
  output logic            busy,
  output logic            done,
  // memory read stream command
  output logic            mrd_valid,
  input  logic            mrd_ready,
  output logic [31:0]     mrd_addr,
  output logic [15:0]     mrd_len,
  // token aligner
  output qscheme_t        al_scheme,
  output logic            al_flush,
  input  logic            al_tok_valid,
  output logic            al_tok_ready,
  // weight scratchpad
  output logic            w_we,
  output logic [WAW-1:0]  w_waddr,
  output logic            w_re,
  output logic [WAW-1:0]  w_raddr,
  // token scratchpad
  output logic            t_swap,
  output logic            t_we,
  output logic [TAW-1:0]  t_waddr,
  output logic            t_re,
  output logic [TAW-1:0]  t_raddr,
  // RMPUs
  output logic            ld_valid,
  output logic [RIW-1:0]  ld_rmpu,
  output logic [4:0]      ld_slot,
  output logic            ld_zero,
  output logic            row_valid,
  output logic [7:0]      row_tag,
  input  logic            row_ready_all,
  input  logic            rmpu_idle_all,
  // VVPUs
  output logic            v_cmd_valid,
  output logic [VIW-1:0]  v_idx,
  output vcmd_t           v_cmd,
  input  logic            v_busy,
  input  logic            v_q_valid,
  // output scratchpad
  output logic            o_we,
  output logic [OAW-1:0]  o_waddr,
  output logic            o_re,
  output logic [OAW-1:0]  o_raddr,
  // memory write
  output logic            mwr_valid,
  input  logic            mwr_ready,
  output logic [31:0]     mwr_addr,
  // events
  output logic            ev_swap,
  output logic            ev_row_stall
);
  typedef enum logic [4:0] {
    C_IDLE, C_LW_CMD, C_LW_RUN, C_LT_FLUSH, C_LT_CMD, C_LT_RUN, C_SWAP,
    C_FILL, C_FILL_END, C_ROW_RD, C_ROW_PRES, C_DRAIN, C_Q_ISSUE, C_Q_WAIT,
    C_WB_RD, C_WB_WR, C_DONE
  } cst_e;
  cst_e st;

  job_t        jq;
  logic [15:0] cnt;
  logic [RIW-1:0] r_q;
  logic [4:0]  s_q;
  logic        ld_pend;
  logic [RIW-1:0] ld_r_q;
  logic [4:0]  ld_s_q;
  logic        ld_z_q;
  logic [2:0]  drain_q;
  int          tsel;
  logic        mode5;

  // token index held by slot s of RMPU r (-1: slot unused)
  function automatic int tok_of_slot(rmode_e m, logic m5, int r, int s);
    if (m == RM_RAW) return r*5 + s/4;
    if (m5) return (s % 5 == 4) ? -1 : r*16 + 4*(s/5) + (s % 5);
    return r*20 + s;
  endfunction

  // token index held by VVPU slot s of RMPU r (-1: none)
  function automatic int tok_of_vslot(rmode_e m, logic m5, int r, int s);
    if (m == RM_RAW) return (s < 5) ? r*5 + s : -1;
    return tok_of_slot(m, m5, r, s);
  endfunction

  assign mode5 = (jq.mode == RM_QUANT) && (jq.in_scheme.k != 0);

  always_comb begin
    mrd_valid = 1'b0; mrd_addr = '0; mrd_len = '0;
    al_scheme = jq.in_scheme; al_flush = 1'b0; al_tok_ready = 1'b0;
    w_we = 1'b0; w_waddr = WAW'(cnt); w_re = 1'b0; w_raddr = WAW'(cnt);
    t_swap = 1'b0; t_we = 1'b0; t_waddr = TAW'(cnt); t_re = 1'b0; t_raddr = '0;
    ld_valid = ld_pend; ld_rmpu = ld_r_q; ld_slot = ld_s_q; ld_zero = ld_z_q;
    row_valid = 1'b0; row_tag = 8'(cnt);
    v_cmd_valid = 1'b0; v_idx = VIW'(int'(r_q) * VPR + int'(jq.vsel));
    v_cmd = '0; v_cmd.kind = V_QUANT; v_cmd.ra = s_q; v_cmd.scheme = jq.out_scheme;
    o_we = 1'b0; o_waddr = '0; o_re = 1'b0; o_raddr = OAW'(cnt);
    mwr_valid = 1'b0; mwr_addr = jq.o_addr + 32'(cnt);
    tsel = tok_of_vslot(jq.mode, mode5, int'(r_q), int'(s_q));
    ev_swap = 1'b0; ev_row_stall = 1'b0;
    unique case (st)
      C_LW_CMD: begin
        mrd_valid = 1'b1; mrd_addr = jq.w_addr; al_flush = 1'b1;
        mrd_len = 16'(int'(jq.n_rows) * (LINE_W / MEM_W));
        al_scheme = '{prec: PREC16, k: 4'd0};
      end
      C_LW_RUN: begin
        al_scheme = '{prec: PREC16, k: 4'd0};
        al_tok_ready = 1'b1;
        w_we = al_tok_valid;
      end
      C_LT_FLUSH: al_flush = 1'b1;
      C_LT_CMD: begin mrd_valid = 1'b1; mrd_addr = jq.t_addr; mrd_len = jq.t_words; end
      C_LT_RUN: begin al_tok_ready = 1'b1; t_we = al_tok_valid; end
      C_SWAP:   begin t_swap = 1'b1; ev_swap = 1'b1; end
      C_FILL: begin
        tsel    = tok_of_slot(jq.mode, mode5, int'(r_q), int'(s_q));
        t_re    = 1'b1;
        t_raddr = TAW'((tsel < 0) ? 0 : tsel);
      end
      C_ROW_RD:   w_re = 1'b1;
      C_ROW_PRES: begin
        row_valid = 1'b1;
        ev_row_stall = !row_ready_all;
      end
      C_Q_ISSUE: v_cmd_valid = (tsel >= 0) && (tsel < int'(jq.n_tok)) && !v_busy;
      C_Q_WAIT: begin
        o_we = v_q_valid; o_waddr = OAW'(tsel);
      end
      C_WB_RD: o_re = 1'b1;
      C_WB_WR: mwr_valid = 1'b1;
      default: ;
    endcase
  end

  assign busy = (st != C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; jq <= '0; cnt <= '0; r_q <= '0; s_q <= '0; done <= 1'b0;
      ld_pend <= 1'b0; ld_r_q <= '0; ld_s_q <= '0; ld_z_q <= 1'b0; drain_q <= '0;
    end else begin
      done    <= 1'b0;
      ld_pend <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin jq <= job; cnt <= '0; st <= C_LW_CMD; end
        C_LW_CMD: if (mrd_ready) st <= C_LW_RUN;
        C_LW_RUN: if (al_tok_valid) begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) + 1 == int'(jq.n_rows)) begin cnt <= '0; st <= C_LT_FLUSH; end
        end
        C_LT_FLUSH: st <= C_LT_CMD;
        C_LT_CMD: if (mrd_ready) st <= C_LT_RUN;
        C_LT_RUN: if (al_tok_valid) begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) + 1 == int'(jq.n_tok)) begin cnt <= '0; st <= C_SWAP; end
        end
        C_SWAP: begin st <= C_FILL; r_q <= '0; s_q <= '0; end
        C_FILL: begin
          ld_pend <= 1'b1;
          ld_r_q  <= r_q;
          ld_s_q  <= s_q;
          ld_z_q  <= (tsel < 0) || (tsel >= int'(jq.n_tok));
          if (s_q == 5'd19) begin
            s_q <= '0;
            if (int'(r_q) == N_RMPU-1) st <= C_FILL_END;
            else r_q <= r_q + 1'b1;
          end else s_q <= s_q + 1'b1;
        end
        C_FILL_END: begin cnt <= '0; st <= C_ROW_RD; end
        C_ROW_RD: st <= C_ROW_PRES;
        C_ROW_PRES: if (row_ready_all) begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) + 1 == int'(jq.n_rows)) begin st <= C_DRAIN; drain_q <= '0; end
          else st <= C_ROW_RD;
        end
        C_DRAIN: begin
          drain_q <= rmpu_idle_all ? drain_q + 1'b1 : '0;
          if (drain_q == 3'd3) begin st <= C_Q_ISSUE; r_q <= '0; s_q <= '0; end
        end
        C_Q_ISSUE: begin
          if ((tsel >= 0) && (tsel < int'(jq.n_tok))) begin
            if (!v_busy) st <= C_Q_WAIT;
          end else begin
            if (s_q == 5'd19) begin
              s_q <= '0;
              if (int'(r_q) == N_RMPU-1) begin st <= C_WB_RD; cnt <= '0; end
              else r_q <= r_q + 1'b1;
            end else s_q <= s_q + 1'b1;
          end
        end
        C_Q_WAIT: if (v_q_valid) begin
          st <= C_Q_ISSUE;
          if (s_q == 5'd19) begin
            s_q <= '0;
            if (int'(r_q) == N_RMPU-1) begin st <= C_WB_RD; cnt <= '0; end
            else r_q <= r_q + 1'b1;
          end else s_q <= s_q + 1'b1;
        end
        C_WB_RD: st <= C_WB_WR;
        C_WB_WR: if (mwr_ready) begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) + 1 == int'(jq.n_tok)) st <= C_DONE;
          else st <= C_WB_RD;
        end
        C_DONE: begin done <= 1'b1; st <= C_IDLE; end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
