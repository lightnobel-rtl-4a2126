// ln_pe_lane: a PE lane of eight PEs.
//
// Adjacent PEs are summed pairwise into four two-PE results; each gets a bias added
// and leaves the lane as one of four outputs (used for attention scores with a head
// dimension of 32, where one pair of PEs holds one head). The four pair sums also feed
// a 4-to-1 adder tree whose result is the whole-lane sum (eight PEs, used for dot
// products of quantized or unquantized tokens). Both kinds of output are produced every
// cycle; the cluster above picks what it needs. Structure as in the paper's lane
// diagram; the bias is a single value shared by the four pair outputs (this design's
// choice). Combinational.
module ln_pe_lane
  import ln_pkg::*;
#(
  parameter int NPE  = 8,
  parameter int NMUL = 16
) (
  input  logic signed [NPE-1:0][NMUL-1:0][MULW-1:0] a,
  input  logic signed [NPE-1:0][NMUL-1:0][MULW-1:0] b,
  input  logic        [NPE-1:0][NMUL-1:0][4:0]      sh,
  input  acc_t                                      bias,
  output acc_t [NPE/2-1:0]                          pair_out,  // 4x(2 PEs) + bias
  output acc_t                                      lane_out   // 1x(8 PEs)
);
  acc_t pe_y [NPE];
  acc_t pair [NPE/2];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    ln_pe #(.NMUL(NMUL)) u_pe (.a(a[p]), .b(b[p]), .sh(sh[p]), .y(pe_y[p]));
  end

  always_comb begin
    lane_out = '0;
    for (int j = 0; j < NPE/2; j++) begin
      pair[j]     = pe_y[2*j] + pe_y[2*j+1];
      pair_out[j] = pair[j] + bias;
      lane_out    = lane_out + pair[j];
    end
  end
endmodule
