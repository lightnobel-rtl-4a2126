// ln_lane_arbiter: reorders the 20 lane sums of a PE cluster into the five DAL input
// groups of four.
//
// 4-lane mode (tokens whose dot product fits four lanes, e.g. 4-bit inliers without
// outliers): token s occupies lanes 4s..4s+3 and group g is lanes 4g..4g+3.
// 5-lane mode (4-bit inliers plus outliers): token t occupies lanes 5t..5t+4, its
// inliers in the first four and its outliers in the fifth; group t (t<4) gets lanes
// 5t..5t+3 and group 4 collects the four outlier lanes 4, 9, 14, 19 so that the DAL can
// add each to its token after scaling. The paper says only that the arbiter rearranges
// lane outputs ahead of the DAL; the lane placement is this design's. Combinational.
module ln_lane_arbiter
  import ln_pkg::*;
#(
  parameter int NLANE = 20
) (
  input  logic                          mode5,
  input  acc_t [NLANE-1:0]              lane_in,
  output acc_t [NLANE/4-1:0][3:0]       grp
);
  always_comb begin
    for (int g = 0; g < NLANE/4; g++)
      for (int i = 0; i < 4; i++)
        if (!mode5)            grp[g][i] = lane_in[4*g + i];
        else if (g < NLANE/5)  grp[g][i] = lane_in[5*g + i];
        else                   grp[g][i] = lane_in[5*i + 4];
  end
endmodule
