// ln_pe: RMPU processing element.
//
// Sixteen multipliers of two 5-bit signed operands, each followed by a left shifter,
// and a 16-to-1 adder tree. Operands are 4-bit chunks that the data aligner has already
// sign-extended to 5 bits (the chunk holding a value's MSB is sign extended, all
// other chunks are zero extended). With all 16 multipliers on the chunk pairs of two
// 16-bit values and shifts of 4*(i+j), the PE computes one 16x16 product; with other
// placements it computes several narrower products (for example four 4-bit x 16-bit
// products), all summed. The structure (16 multipliers, shifters, 16-to-1 tree) is the
// paper's; the shift-amount encoding is this design's. Purely combinational.
module ln_pe
  import ln_pkg::*;
#(
  parameter int NMUL = 16
) (
  input  logic signed [NMUL-1:0][MULW-1:0] a,     // chunk operand A per multiplier
  input  logic signed [NMUL-1:0][MULW-1:0] b,     // chunk operand B per multiplier
  input  logic        [NMUL-1:0][4:0]      sh,    // left shift per multiplier (0..24)
  output acc_t                             y      // sum of shifted products
);
  acc_t prod [NMUL];

  always_comb begin
    for (int i = 0; i < NMUL; i++) begin
      prod[i] = acc_t'($signed(a[i]) * $signed(b[i])) <<< sh[i];
    end
    y = '0;
    for (int i = 0; i < NMUL; i++) y = y + prod[i];
  end
endmodule
