// ln_bitonic_topk: dynamic top-k selection by bitonic sorting with index tracking.
//
// On `start` it captures N signed 16-bit values and sorts their magnitudes in
// descending order with a bitonic network, one compare-exchange stage per cycle
// (log2(N)*(log2(N)+1)/2 stages: 28 cycles for N = 128), carrying each value's original
// index along. Equal magnitudes are ordered by lower index first. When `done` pulses,
// idx[0..k-1] are the positions of the k largest magnitudes for any k (the outliers of
// a token) and mag[k] is the largest remaining magnitude (the inlier range M);
// with k = 1, mag[0] is the maximum (as needed by softmax). The paper gives the method
// (parallel bitonic top-k in the VVPU with index tracking); the one-stage-per-cycle
// schedule is this design's.
module ln_bitonic_topk
  import ln_pkg::*;
#(
  parameter int N = 128,
  localparam int IW = $clog2(N)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [N-1:0][VW-1:0]   din,
  output logic                   busy,
  output logic                   done,
  output logic [N-1:0][VW-1:0]   mag,
  output logic [N-1:0][IW-1:0]   idx
);
  logic [IW:0]   kk;     // current bitonic block size
  logic [IW-1:0] jj;     // current compare distance
  logic [N-1:0][VW-1:0] nmag;
  logic [N-1:0][IW-1:0] nidx;

  function automatic logic ahead(logic [VW-1:0] ma, logic [IW-1:0] ia,
                                  logic [VW-1:0] mb, logic [IW-1:0] ib);
    return (ma > mb) || (ma == mb && ia < ib);
  endfunction

  always_comb begin
    nmag = mag;
    nidx = idx;
    for (int i = 0; i < N; i++) begin
      int l;
      logic up, sw;
      l  = i ^ int'(jj);
      up = 1'b0;
      sw = 1'b0;
      if (l > i) begin
        up = (i & int'(kk)) == 0;          // this block sorts descending
        sw = up ? ahead(mag[l], idx[l], mag[i], idx[i])
                : ahead(mag[i], idx[i], mag[l], idx[l]);
        if (sw) begin
          nmag[i] = mag[l]; nidx[i] = idx[l];
          nmag[l] = mag[i]; nidx[l] = idx[i];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; kk <= '0; jj <= '0; mag <= '0; idx <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        kk   <= (IW+1)'(2);
        jj   <= IW'(1);
        for (int i = 0; i < N; i++) begin
          mag[i] <= din[i][VW-1] ? VW'(-din[i]) : din[i];
          idx[i] <= IW'(i);
        end
      end else if (busy) begin
        mag <= nmag;
        idx <= nidx;
        if (jj == IW'(1)) begin
          if (int'(kk) == N) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            kk <= kk << 1;
            jj <= IW'(int'(kk) >> 0);       // new k/2 = old k
          end
        end else begin
          jj <= jj >> 1;
        end
      end
    end
  end
endmodule
