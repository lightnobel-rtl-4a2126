// ln_pkg: types, sizes and helper functions shared by the LightNobel accelerator.
//
// A token is one vector of HZ = 128 activation values (the hidden dimension of the
// pair representation). Unquantized values and weights are 16-bit signed fixed point.
// A quantized token follows the memory layout: inlier codes (INT4 or INT8) in channel
// order with the outlier channels skipped, then the INT16 outliers, then the 16-bit
// scaling factor, then the 7-bit outlier channel indices. All fields are packed from
// bit 0 upward. The scaling factor is kept in the same fixed-point units as the
// activations, so sigma*q reconstructs an inlier and outliers need no scaling.
// The 16-bit formats, the 4/8-bit inlier precisions and HZ follow the paper; the bit
// order inside a line, the fixed-point scale format and KMAX are this design's choices.
package ln_pkg;

  localparam int HZ        = 128;            // token length (values per token)
  localparam int VW        = 16;             // value / weight width
  localparam int IDXW      = $clog2(HZ);     // outlier index width
  localparam int KMAX      = 8;              // most outliers a quantized token may carry
  localparam int LINE_W    = HZ * VW;        // one token (or weight row) per line: 2048 bits
  localparam int ACCW      = 48;             // accumulator width after the multipliers
  localparam int CHUNK     = 4;              // minimum bit chunk of the RMPU
  localparam int MULW      = CHUNK + 1;      // sign-extended chunk width

  localparam int FRAC      = 8;              // fractional bits of 16-bit fixed point

  typedef logic signed [VW-1:0]   val_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic [LINE_W-1:0]      line_t;

  // Inlier precision of a quantized token (16 means: not quantized).
  typedef enum logic [1:0] {PREC4 = 2'd0, PREC8 = 2'd1, PREC16 = 2'd2} prec_e;

  // Quantization scheme of a token: inlier precision and number of outliers.
  typedef struct packed {
    prec_e      prec;
    logic [3:0] k;
  } qscheme_t;

  // Decoded token: value per channel plus scale and outlier marks.
  typedef struct packed {
    logic [HZ-1:0][VW-1:0] v;     // inlier code (sign extended) or raw outlier/raw value
    logic [HZ-1:0]         is_out;
    logic [VW-1:0]         scale;
  } dtoken_t;

  function automatic int prec_bits(prec_e p);
    case (p)
      PREC4:   return 4;
      PREC8:   return 8;
      default: return 16;
    endcase
  endfunction

  // Length in bits of a token stored with scheme s (an unquantized token has no
  // scale and no outliers).
  function automatic int token_bits(qscheme_t s);
    if (s.prec == PREC16) return LINE_W;
    return (HZ - int'(s.k)) * prec_bits(s.prec) + int'(s.k) * (VW + IDXW) + VW;
  endfunction

  // Decode a quantized token line into per-channel values (inverse of the layout).
  function automatic dtoken_t decode_token(line_t ln, qscheme_t s);
    dtoken_t d;
    int pb, k, ib, ob, sb, xb, n;
    logic [IDXW-1:0] oi;
    d = '0;
    if (s.prec == PREC16) begin
      for (int c = 0; c < HZ; c++) d.v[c] = ln[c*VW +: VW];
      d.scale = 16'd1;
      return d;
    end
    pb = prec_bits(s.prec);
    k  = int'(s.k);
    ob = (HZ - k) * pb;          // start of outliers
    sb = ob + k * VW;            // scale
    xb = sb + VW;                // indices
    d.scale = ln[sb +: VW];
    for (int j = 0; j < KMAX; j++) if (j < k) begin
      oi = ln[xb + j*IDXW +: IDXW];
      d.is_out[oi] = 1'b1;
      d.v[oi] = ln[ob + j*VW +: VW];
    end
    n = 0;
    for (int c = 0; c < HZ; c++) if (!d.is_out[c]) begin
      ib = n * pb;
      if (pb == 4) d.v[c] = {{12{ln[ib+3]}}, ln[ib +: 4]};
      else         d.v[c] = {{8{ln[ib+7]}},  ln[ib +: 8]};
      n++;
    end
    return d;
  endfunction

  // Which result set the RMPU Engine puts out (paper: 320x(2 PEs), 20x(4 PE lanes),
  // 16x(5 PE lanes), 10x(8 PE lanes), 5x(16 PE lanes), 1x(80 PE lanes)).
  typedef enum logic [2:0] {OS_2PE, OS_4L, OS_5L, OS_8L, OS_16L, OS_80L} osel_e;

  // RMPU data-aligner operating mode.
  //  RM_QUANT: quantized token (4-bit inliers, 0..KMAX outliers) x 16-bit weight row
  //  RM_RAW  : 32 channels of an unquantized token x 16-bit weight row
  //  RM_QK   : 4-bit token x 4-bit token, per-head (32 channel) products
  typedef enum logic [1:0] {RM_QUANT, RM_RAW, RM_QK} rmode_e;

  // SIMD lane ALU operations.
  typedef enum logic [3:0] {
    ALU_PASS, ALU_ADD, ALU_SUB, ALU_MUL, ALU_MAX, ALU_MIN, ALU_EXP, ALU_RELU, ALU_ABS, ALU_QNT
  } alu_e;

  // VVPU command.
  typedef enum logic [1:0] {V_ALU, V_REDUCE, V_QUANT} vop_e;
  typedef struct packed {
    vop_e       kind;
    alu_e       op;
    logic [4:0] ra;       // source slot (token) / operand A address
    logic [4:0] rb;       // operand B address
    logic [4:0] rd;       // destination address
    logic       bsel;     // operand B from the broadcast value instead of rb
    logic [VW-1:0] ext;   // broadcast value
    qscheme_t   scheme;   // V_QUANT: target scheme
  } vcmd_t;

  // One job of the accelerator: a token-wise linear layer over a block of tokens,
  // followed by runtime re-quantization of the results.
  typedef struct packed {
    logic [31:0] w_addr;     // first memory word of the weight rows (16-bit, 128 per row)
    logic [8:0]  n_rows;     // output channels (weight rows), at most HZ
    logic [31:0] t_addr;     // first memory word of the packed token block
    logic [15:0] t_words;    // memory words in the token block
    logic [9:0]  n_tok;      // tokens in the block
    qscheme_t    in_scheme;  // scheme of the input tokens
    rmode_e      mode;       // RM_QUANT or RM_RAW
    qscheme_t    out_scheme; // scheme the results are quantized to
    logic        relu;       // apply ReLU in the RMPU Engine
    logic [31:0] o_addr;     // first memory line of the results
    logic [1:0]  vsel;       // which of an RMPU's VVPUs collects this block
    logic signed [ACCW-1:0] bias; // bias added to every output
  } job_t;


endpackage
