// ln_gcn: Global Crossbar Network.
//
// NSRC sources (RMPU output FIFOs) each offer one word with a destination index; each of
// NDST destinations (VVPUs) accepts at most one word per cycle. Where several sources
// want the same destination, a round-robin pointer per destination grants the
// source after the one granted last (least-recently-granted, as a swizzle switch
// arbitrates inside its crosspoints). A granted source sees `grant` and pops its word;
// the destination receives it on the next cycle (registered output). `conflict` is
// high in any cycle where some request lost arbitration. The paper gives the GCN's role
// and that it is a swizzle switch; arbitration policy and ports are this design's.
module ln_gcn #(
  parameter int NSRC = 32,
  parameter int NDST = 128,
  parameter int W    = 64,
  localparam int DW  = (NDST > 1) ? $clog2(NDST) : 1,
  localparam int SW  = (NSRC > 1) ? $clog2(NSRC) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NSRC-1:0]           req,
  input  logic [NSRC-1:0][DW-1:0]   dst,
  input  logic [NSRC-1:0][W-1:0]    din,
  output logic [NSRC-1:0]           grant,
  output logic [NDST-1:0]           dvalid,
  output logic [NDST-1:0][W-1:0]    dout,
  output logic                      conflict
);
  logic [NDST-1:0][SW-1:0] last_q;
  logic [NDST-1:0][SW-1:0] win;
  logic [NDST-1:0]         any;

  always_comb begin
    grant = '0;
    any   = '0;
    win   = '0;
    for (int d = 0; d < NDST; d++) begin
      for (int k = NSRC; k >= 1; k--) begin
        int s;
        s = (int'(last_q[d]) + k) % NSRC;
        if (req[s] && int'(dst[s]) == d) begin
          any[d] = 1'b1;
          win[d] = SW'(s);
        end
      end
      if (any[d]) grant[win[d]] = 1'b1;
    end
    conflict = (req & ~grant) != '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q <= '0;
      dvalid <= '0;
      dout   <= '0;
    end else begin
      for (int d = 0; d < NDST; d++) begin
        dvalid[d] <= any[d];
        if (any[d]) begin
          dout[d]   <= din[win[d]];
          last_q[d] <= win[d];
        end
      end
    end
  end
endmodule
