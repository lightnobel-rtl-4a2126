// ln_pe_cluster: 20 PE lanes, the lane arbiter and the DAL.
//
// Outputs all 80 two-PE sums (attention scores of 32-wide heads) and the DAL results:
// five 4-lane token results or four 5-lane token results (see ln_dal). Sizes (20
// lanes, 8 PEs per lane) are the paper's. Combinational.
module ln_pe_cluster
  import ln_pkg::*;
#(
  parameter int NLANE = 20,
  parameter int NPE   = 8,
  parameter int NMUL  = 16
) (
  input  logic signed [NLANE-1:0][NPE-1:0][NMUL-1:0][MULW-1:0] a,
  input  logic signed [NLANE-1:0][NPE-1:0][NMUL-1:0][MULW-1:0] b,
  input  logic        [NLANE-1:0][NPE-1:0][NMUL-1:0][4:0]      sh,
  input  logic                                                 mode5,
  input  logic [4:0][VW-1:0]                                   scale,
  input  acc_t [4:0]                                           bias,
  output acc_t [NLANE*NPE/2-1:0]                               pair_out,
  output acc_t [4:0]                                           dal_y,
  output logic [4:0]                                           dal_valid
);
  acc_t [NLANE-1:0]        lane_sum;
  acc_t [NLANE/4-1:0][3:0] grp;

  for (genvar l = 0; l < NLANE; l++) begin : g_lane
    ln_pe_lane #(.NPE(NPE), .NMUL(NMUL)) u_lane (
      .a(a[l]), .b(b[l]), .sh(sh[l]), .bias('0),
      .pair_out(pair_out[l*NPE/2 +: NPE/2]), .lane_out(lane_sum[l]));
  end

  ln_lane_arbiter #(.NLANE(NLANE)) u_arb (.mode5(mode5), .lane_in(lane_sum), .grp(grp));

  ln_dal u_dal (.mode5(mode5), .grp(grp), .scale(scale), .bias(bias),
                .y(dal_y), .out_valid(dal_valid));
endmodule
