// ln_dal: Dynamic Accumulation Logic of a PE cluster.
//
// Five 4-to-1 adder trees each sum one group of four lane results.
// 4-lane mode: every tree result is multiplied by its token's scale factor and a bias
// is added: five results, one per token.
// 5-lane mode: the fifth tree is disabled; its four inputs (the outlier lanes of tokens
// 0..3) bypass it and are added to the scaled inlier sums of trees 0..3, then the bias:
// four results. Inliers are thus scaled once after accumulation, outliers never.
// Structure from the paper's DAL diagram. Scale factors are 16-bit unsigned in the
// activation fixed-point units (this design's choice). Combinational; out_valid marks
// which results carry a token.
module ln_dal
  import ln_pkg::*;
(
  input  logic                   mode5,
  input  acc_t [4:0][3:0]        grp,
  input  logic [4:0][VW-1:0]     scale,
  input  acc_t [4:0]             bias,
  output acc_t [4:0]             y,
  output logic [4:0]             out_valid
);
  acc_t tree [5];
  acc_t scaled [5];

  always_comb begin
    for (int g = 0; g < 5; g++) begin
      tree[g]   = grp[g][0] + grp[g][1] + grp[g][2] + grp[g][3];
      scaled[g] = tree[g] * $signed({1'b0, scale[g]});
    end
    for (int g = 0; g < 4; g++)
      y[g] = scaled[g] + (mode5 ? grp[4][g] : '0) + bias[g];
    y[4]      = mode5 ? '0 : scaled[4] + bias[4];
    out_valid = mode5 ? 5'b01111 : 5'b11111;
  end
endmodule
