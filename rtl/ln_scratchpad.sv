// ln_scratchpad: single-port-read, single-port-write line memory (weight and output
// scratchpads).
//
// One LINE_W-bit line per address, synchronous write and registered read (data appears
// the cycle after rd_en). Default depth 256 lines x 2048 bits = 64 KB, the paper's
// weight scratchpad; the output scratchpad is the same module at 512 lines (128 KB).
// The paper gives the capacities; port structure and read latency are this design's.
// In silicon this is an SRAM macro; here it is an array.
module ln_scratchpad
  import ln_pkg::*;
#(
  parameter int DEPTH = 256,
  parameter int W     = LINE_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
