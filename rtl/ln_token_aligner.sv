// ln_token_aligner: realigns token blocks read from main memory into one token per
// scratchpad line.
//
// In memory, quantized tokens are packed back to back (inliers, outliers, scale,
// indices per token, see ln_pkg), so a memory word can end in the middle of a token.
// The aligner appends each accepted MEM_W-bit word above the bits it already holds and,
// whenever it holds a whole token of the current scheme (token_bits(scheme) bits),
// emits it, zero-padded, as one LINE_W-bit line and shifts it out. Unquantized lines
// (weights, PREC16 tokens) pass through the same way at 2048 bits each.
// Handshakes: valid/ready on both sides; at most one word in and one token out per
// cycle. The paper gives the function (decode and realign blocks token by token); the
// shift-buffer structure and MEM_W are this design's choices.
module ln_token_aligner
  import ln_pkg::*;
#(
  parameter int MEM_W = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  qscheme_t          scheme,
  input  logic              flush,      // drop any partial token (start of a new block)
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [MEM_W-1:0]  in_data,
  output logic              tok_valid,
  input  logic              tok_ready,
  output line_t             tok_line
);
  localparam int BUF_W = LINE_W + MEM_W;
  localparam int CW    = $clog2(BUF_W + 1);

  logic [BUF_W-1:0] buf_q;
  logic [CW-1:0]    cnt_q;
  int               tb;
  logic             take, give;
  logic [BUF_W-1:0] mask, rest;
  logic [CW-1:0]    cnt_rest;

  always_comb begin
    tb        = token_bits(scheme);
    tok_valid = int'(cnt_q) >= tb;
    give      = tok_valid && tok_ready;
    mask      = (BUF_W'(1) << tb) - 1'b1;
    tok_line  = LINE_W'(buf_q & mask);
    rest      = give ? (buf_q >> tb) : buf_q;
    cnt_rest  = give ? cnt_q - CW'(tb) : cnt_q;
    in_ready  = (int'(cnt_rest) + MEM_W) <= BUF_W;
    take      = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0;
      cnt_q <= '0;
    end else if (flush) begin
      buf_q <= '0;
      cnt_q <= '0;
    end else begin
      buf_q <= take ? (rest | (BUF_W'(in_data) << cnt_rest)) : rest;
      cnt_q <= take ? cnt_rest + CW'(MEM_W) : cnt_rest;
    end
  end
endmodule
