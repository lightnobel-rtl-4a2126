// ln_exp_lut: two-level exponent lookup table for softmax.
//
// Computes exp(x) for x <= 0 in 16-bit fixed point with FRAC fractional bits. The
// magnitude |x| (clamped to 12 bits, i.e. below 16.0) is split into a coarse part
// (upper 6 bits, steps of 1/4) and a fine part (lower 6 bits, steps of 1/256);
// exp(-|x|) = exp(-coarse) * exp(-fine), each factor from a 64-entry table of 15-bit
// fractions, and the product is rounded back to FRAC bits. Positive inputs give 1.0.
// The paper specifies a two-level exponent LUT in each SIMD core; the split and table
// sizes are this design's. Table entries: T1[h] = round(2^15 * exp(-h/4)),
// T2[l] = round(2^15 * exp(-l/256)), computed at elaboration. Combinational.
module ln_exp_lut
  import ln_pkg::*;
(
  input  logic signed [VW-1:0] x,
  output logic signed [VW-1:0] y
);
  typedef logic [15:0] tab_t [64];

  function automatic tab_t make_tab(real step);
    tab_t t;
    for (int e = 0; e < 64; e++) t[e] = 16'($rtoi($exp(-step * e) * 32768.0 + 0.5));
    return t;
  endfunction

  localparam tab_t T1 = make_tab(0.25);
  localparam tab_t T2 = make_tab(1.0 / 256.0);

  logic [VW-1:0]  mag;
  logic [11:0]    m12;
  logic [31:0]    prod;

  always_comb begin
    mag  = x[VW-1] ? VW'(-x) : '0;
    m12  = (mag > 16'd4095) ? 12'd4095 : mag[11:0];
    prod = 32'(T1[m12[11:6]]) * 32'(T2[m12[5:0]]);
    y    = VW'((prod + 32'(1 << (29 - FRAC))) >> (30 - FRAC));
  end
endmodule
