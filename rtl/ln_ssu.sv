// ln_ssu: Scalar Support Unit of a VVPU.
//
// Scalar work that would waste the SIMD lanes:
//  * reduction of one value per lane: sum, mean (sum / N, N a power of two) and max;
//  * quantization parameters from the inlier range M and the precision:
//    qmax = 2^(m-1)-1, scale sigma = max(1, round(M/qmax)) (16-bit, activation units)
//    and recip = round(2^16 * qmax / M), which the lanes multiply by to quantize;
//  * formatting a quantized token into the memory layout: the first N-k inputs are the
//    inlier codes in channel order (already compacted by the LCN), the last k are the
//    INT16 outliers; the SSU packs codes at m bits, then outliers, scale and indices.
// The paper assigns averaging and quantized-token formatting to the SSU; the
// reciprocal-based quantization and the exact formulas are this design's.
// Combinational.
module ln_ssu
  import ln_pkg::*;
#(
  parameter int N = 128
) (
  input  logic [N-1:0][VW-1:0]    vals,
  output acc_t                    sum,
  output logic [VW-1:0]           mean,
  output logic [VW-1:0]           vmax,
  input  logic [VW-1:0]           m_range,
  input  qscheme_t                scheme,
  output logic [7:0]              qmax,
  output logic [VW-1:0]           sigma,
  output logic [23:0]             recip,
  input  logic [KMAX-1:0][IDXW-1:0] oidx,
  output line_t                   packed_line
);
  int pb, k, ob;
  logic [31:0] num, sg;

  always_comb begin
    sum  = '0;
    vmax = vals[0];
    for (int i = 0; i < N; i++) begin
      sum = sum + acc_t'($signed(vals[i]));
      if ($signed(vals[i]) > $signed(vmax)) vmax = vals[i];
    end
    mean = VW'(sum >>> $clog2(N));

    ob   = 0;
    pb   = prec_bits(scheme.prec);
    k    = int'(scheme.k);
    qmax = 8'((1 << (pb - 1)) - 1);
    sg   = (32'(m_range) + 32'(qmax >> 1)) / 32'(qmax);
    sigma = (sg == 0) ? 16'd1 : VW'(sg);
    num   = 32'(qmax) << 16;
    recip = (m_range == '0) ? '0 : 24'((num + 32'(m_range >> 1)) / 32'(m_range));

    packed_line = '0;
    if (scheme.prec == PREC16) begin
      for (int i = 0; i < N; i++) packed_line[i*VW +: VW] = vals[i];
    end else begin
      ob = (N - k) * pb;
      for (int p = 0; p < N; p++) if (p < N - k) begin
        if (pb == 4) packed_line[p*4 +: 4] = vals[p][3:0];
        else         packed_line[p*8 +: 8] = vals[p][7:0];
      end
      for (int j = 0; j < KMAX; j++) if (j < k) begin
        packed_line[ob + j*VW +: VW] = vals[N-k+j];
        packed_line[ob + k*VW + VW + j*IDXW +: IDXW] = oidx[j];
      end
      packed_line[ob + k*VW +: VW] = sigma;
    end
  end
endmodule
