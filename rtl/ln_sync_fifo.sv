// ln_sync_fifo: synchronous FIFO (used as the RMPU Output FIFO).
//
// Queues RMPU Engine results until the global crossbar accepts them. Write when
// push && !full, read the head combinationally (dout) and pop it when pop && !empty.
// The paper names the RMPU Output FIFO and its purpose; depth and structure are this
// design's choices. Asserts that nobody pushes into a full or pops an empty FIFO.
// Lint notes that rst_n is used both as an asynchronous reset and synchronously: the
// synchronous use is only the assertions' disable condition, not logic.
module ln_sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full) begin
        wp <= (int'(wp) == DEPTH-1) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) begin
        rp <= (int'(rp) == DEPTH-1) ? '0 : rp + 1'b1;
      end
      count <= count + CW'(push && !full) - CW'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
