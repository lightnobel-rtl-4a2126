// ln_token_scratchpad: double-buffered token scratchpad.
//
// Two banks of DEPTH lines (default 512 x 2048 bits = 128 KB each, as in the paper).
// The token aligner fills the write bank while the RMPUs read the other one; `swap`
// exchanges the roles, so loading the next token block hides behind computing the
// current one. Registered read, one cycle latency. Bank arrangement follows the paper
// (128 KB x 2, double buffering); ports and swap control are this design's.
module ln_token_scratchpad
  import ln_pkg::*;
#(
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  output logic          wr_bank,      // bank currently written
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  line_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output line_t         rd_data
);
  line_t mem0 [DEPTH];
  line_t mem1 [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    wr_bank <= 1'b0;
    else if (swap) wr_bank <= ~wr_bank;
  end

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) mem0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) mem1[wr_addr] <= wr_data;
    if (rd_en) rd_data <= wr_bank ? mem0[rd_addr] : mem1[rd_addr];
  end
endmodule
