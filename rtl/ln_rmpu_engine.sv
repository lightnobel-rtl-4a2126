// ln_rmpu_engine: the RMPU Engine, four PE clusters and the cross-cluster adders.
//
// Result sets (the paper's list): 320 two-PE sums; 20 four-lane or 16 five-lane
// token results from the four DALs; 10 eight-lane sums (10 two-to-one adders over
// adjacent four-lane results); 5 sixteen-lane sums (5 two-to-one adders over adjacent
// eight-lane sums); 1 eighty-lane sum (5-to-1 adder tree). Eight, sixteen and eighty
// lane sums serve unquantized tokens, whose scale the controller sets to 1. A final
// "Mux & ReLU" stage selects one set (osel) and optionally applies ReLU. The result is
// registered: one cycle from operands to y. The ordering of results inside each set
// (cluster-major) is this design's choice.
module ln_rmpu_engine
  import ln_pkg::*;
#(
  parameter int NCL   = 4,
  parameter int NLANE = 20,
  parameter int NPE   = 8,
  parameter int NMUL  = 16,
  localparam int NOUT = NCL * NLANE * NPE / 2
) (
  input  logic                                                          clk,
  input  logic                                                          rst_n,
  input  logic                                                          in_valid,
  input  logic signed [NCL-1:0][NLANE-1:0][NPE-1:0][NMUL-1:0][MULW-1:0] a,
  input  logic signed [NCL-1:0][NLANE-1:0][NPE-1:0][NMUL-1:0][MULW-1:0] b,
  input  logic        [NCL-1:0][NLANE-1:0][NPE-1:0][NMUL-1:0][4:0]      sh,
  input  logic                                                          mode5,
  input  logic [NCL-1:0][4:0][VW-1:0]                                   scale,
  input  acc_t [NCL-1:0][4:0]                                           bias,
  input  osel_e                                                         osel,
  input  logic                                                          relu,
  output logic                                                          out_valid,
  output acc_t [NOUT-1:0]                                               y,
  output logic [$clog2(NOUT+1)-1:0]                                     y_count
);
  acc_t [NCL-1:0][NLANE*NPE/2-1:0] pairs;
  acc_t [NCL-1:0][4:0]             dal_y;
  logic [NCL-1:0][4:0]             dal_v;
  acc_t [NCL*5-1:0]                q4;        // 4-lane results, cluster major
  acc_t [NCL*4-1:0]                q5;        // 5-lane results
  acc_t [NCL*5/2-1:0]              s8;
  acc_t [NCL*5/4-1:0]              s16;
  acc_t                            s80;
  acc_t [NOUT-1:0]                 sel;
  int                              cnt;

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    ln_pe_cluster #(.NLANE(NLANE), .NPE(NPE), .NMUL(NMUL)) u_cl (
      .a(a[c]), .b(b[c]), .sh(sh[c]), .mode5(mode5), .scale(scale[c]), .bias(bias[c]),
      .pair_out(pairs[c]), .dal_y(dal_y[c]), .dal_valid(dal_v[c]));
  end

  always_comb begin
    for (int c = 0; c < NCL; c++) begin
      for (int g = 0; g < 5; g++) q4[5*c+g] = dal_y[c][g];
      for (int g = 0; g < 4; g++) q5[4*c+g] = dal_y[c][g];
    end
    for (int i = 0; i < NCL*5/2; i++) s8[i]  = q4[2*i] + q4[2*i+1];     // (10x) 2-to-1
    for (int i = 0; i < NCL*5/4; i++) s16[i] = s8[2*i] + s8[2*i+1];     // (5x) 2-to-1
    s80 = '0;
    for (int i = 0; i < NCL*5/4; i++) s80 = s80 + s16[i];               // 5-to-1 tree
    sel = '0;
    cnt = 0;
    unique case (osel)
      OS_2PE: begin for (int c = 0; c < NCL; c++) sel[c*NLANE*NPE/2 +: NLANE*NPE/2] = pairs[c]; cnt = NOUT; end
      OS_4L:  begin for (int i = 0; i < NCL*5; i++)   sel[i] = q4[i];  cnt = NCL*5;   end
      OS_5L:  begin for (int i = 0; i < NCL*4; i++)   sel[i] = q5[i];  cnt = NCL*4;   end
      OS_8L:  begin for (int i = 0; i < NCL*5/2; i++) sel[i] = s8[i];  cnt = NCL*5/2; end
      OS_16L: begin for (int i = 0; i < NCL*5/4; i++) sel[i] = s16[i]; cnt = NCL*5/4; end
      default: begin sel[0] = s80; cnt = 1; end
    endcase
    if (relu)
      for (int i = 0; i < NOUT; i++) if (sel[i][ACCW-1]) sel[i] = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      y_count   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y       <= sel;
        y_count <= ($clog2(NOUT+1))'(cnt);
      end
    end
  end
endmodule
