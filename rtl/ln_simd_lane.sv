// ln_simd_lane: one SIMD lane of the VVPU (SIMD core + lane scratchpad).
//
// The lane holds DEPTH 16-bit words in its scratchpad; in the VVPU, word t of lane j is
// channel j of the token in slot t. When `en` is high the ALU reads operand A from
// scratchpad[ra] and operand B from scratchpad[rb] (bsel=0) or from the broadcast
// input `ext` (bsel=1), and writes the result to scratchpad[rd] at the clock edge.
// Operations (16-bit fixed point, FRAC fraction bits, saturating where they can
// overflow): pass, add, sub, mul, max, min, exp (two-level LUT, x<=0), relu, abs, and
// qnt: round(A * recip / 2^16) clamped to +-qmax, the runtime quantization step (recip
// is the reciprocal of the scale factor, supplied by the SSU). A second write port
// (we/wdata) takes one result column from the global crossbar: NW values, one per
// token slot, into words 0..NW-1; it has priority over the ALU write.
// `rdata` reads scratchpad[raddr] combinationally for the LCN and the SSU.
// The paper gives the lane's parts (ALU on two 16-bit operands, exp LUT, scratchpad);
// the operation set and ports are this design's. One cycle per operation.
module ln_simd_lane
  import ln_pkg::*;
#(
  parameter int DEPTH = 32,
  parameter int NW    = 20,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  alu_e              op,
  input  logic [AW-1:0]     ra,
  input  logic [AW-1:0]     rb,
  input  logic [AW-1:0]     rd,
  input  logic              bsel,
  input  logic [VW-1:0]     ext,
  input  logic [23:0]       recip,
  input  logic [7:0]        qmax,
  input  logic              we,
  input  logic [NW-1:0][VW-1:0] wdata,
  input  logic [AW-1:0]     raddr,
  output logic [VW-1:0]     rdata,
  output logic [VW-1:0]     res
);
  logic [VW-1:0] sp [DEPTH];
  val_t          opa, opb, ex;
  logic signed [47:0] wide;

  function automatic val_t sat(logic signed [47:0] v);
    if (v > 48'sd32767)  return 16'sh7fff;
    if (v < -48'sd32768) return 16'sh8000;
    return VW'(v);
  endfunction

  ln_exp_lut u_exp (.x(opa), .y(ex));

  always_comb begin
    opa  = sp[ra];
    opb  = bsel ? ext : sp[rb];
    wide = '0;
    unique case (op)
      ALU_ADD:  res = sat(48'(opa) + 48'(opb));
      ALU_SUB:  res = sat(48'(opa) - 48'(opb));
      ALU_MUL:  begin wide = (48'(opa) * 48'(opb)) >>> FRAC; res = sat(wide); end
      ALU_MAX:  res = (opa > opb) ? opa : opb;
      ALU_MIN:  res = (opa < opb) ? opa : opb;
      ALU_EXP:  res = ex;
      ALU_RELU: res = opa[VW-1] ? '0 : opa;
      ALU_ABS:  res = sat(opa[VW-1] ? -48'(opa) : 48'(opa));
      ALU_QNT:  begin
        wide = (48'(opa) * $signed({24'd0, recip}) + 48'sd32768) >>> 16;
        if (wide > $signed({40'd0, qmax}))       res = VW'(qmax);
        else if (wide < -$signed({40'd0, qmax})) res = VW'(-$signed({8'd0, qmax}));
        else                                     res = VW'(wide);
      end
      default:  res = opa;
    endcase
    rdata = sp[raddr];
  end

  // The scratchpad is a plain memory: no reset.
  always_ff @(posedge clk) begin
    if (en) sp[rd] <= res;
    if (we) for (int i = 0; i < NW; i++) sp[i] <= wdata[i];
  end
endmodule
