// ln_lcn: Local Crossbar Network of a VVPU.
//
// A full N x N crossbar over 16-bit lane values: output i carries input sel[i]
// (any permutation, broadcast or gather). The VVPU uses it to compact inlier codes in
// front of the outliers when it writes a quantized token, and to broadcast values to
// lanes. The paper gives its role (runtime data alignment among SIMD lanes); the
// select-per-output form is this design's. Registered output: one cycle latency.
module ln_lcn
  import ln_pkg::*;
#(
  parameter int N = 128,
  localparam int SW = $clog2(N)
) (
  input  logic                  clk,
  input  logic [N-1:0][VW-1:0]  din,
  input  logic [N-1:0][SW-1:0]  sel,
  output logic [N-1:0][VW-1:0]  dout
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) dout[i] <= din[sel[i]];
  end
endmodule
