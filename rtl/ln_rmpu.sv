// ln_rmpu: Reconfigurable Matrix Processing Unit.
//
// Twenty data aligners (one per token slot, slot r in cluster r/5), the RMPU Engine and
// the RMPU Output FIFO. Operation:
//  1. Load: the controller writes token lines into slots (load_valid, load_slot) with
//     the scheme and mode they share. In RM_RAW mode slot r takes 32 channels
//     starting at 32*(r%4), so four slots together form one 128-wide token.
//  2. Compute: each accepted row (row_valid && row_ready) is broadcast to all slots;
//     one cycle later the engine result enters the output FIFO tagged with row_tag.
//     Four-lane mode is used for tokens without outliers (20 tokens per row),
//     five-lane mode when the tokens carry outliers (16 tokens: slots 5c..5c+3),
//     sixteen-lane sums for unquantized tokens (5 tokens), two-PE sums in RM_QK
//     (20 token pairs x 4 heads).
//  3. The FIFO head (out_valid, out_data) is popped by the global crossbar.
// row_ready is low while the FIFO could overflow: this is the RMPU's stall.
// Result entry: res[i] for slot i (RM_QUANT), token i (RM_RAW) or 4*slot+head (RM_QK),
// with inactive entries zero. Engine sizes are the paper's; FIFO depth, slot placement
// and the bias handling (one bias per row, added once per token) are this design's.
module ln_rmpu
  import ln_pkg::*;
#(
  parameter int FIFO_DEPTH = 4,
  localparam int NSLOT = 20,
  localparam int NRES  = 80,
  localparam int EW    = 8 + 8 + NRES*ACCW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // token load
  input  logic                     load_valid,
  input  logic [4:0]               load_slot,
  input  line_t                    load_line,
  input  qscheme_t                 scheme,
  input  rmode_e                   mode,
  // row broadcast
  input  logic                     row_valid,
  output logic                     row_ready,
  input  line_t                    row_line,
  input  logic [7:0]               row_tag,
  input  acc_t                     row_bias,
  input  logic                     relu,
  // results
  output logic                     out_valid,
  output logic [EW-1:0]            out_data,    // {tag, count, res[NRES-1:0]}
  input  logic                     out_pop,
  output logic                     stall        // row offered but refused this cycle
);
  localparam int NCL = 4, NLANE = 20, NPE = 8, NMUL = 16;

  logic signed [NSLOT-1:0][4:0][NPE-1:0][NMUL-1:0][MULW-1:0] ra, rb;
  logic        [NSLOT-1:0][4:0][NPE-1:0][NMUL-1:0][4:0]      rsh;
  logic [NSLOT-1:0][VW-1:0] rscale;
  logic [NSLOT-1:0]         rfive;

  logic signed [NCL-1:0][NLANE-1:0][NPE-1:0][NMUL-1:0][MULW-1:0] ea, eb;
  logic        [NCL-1:0][NLANE-1:0][NPE-1:0][NMUL-1:0][4:0]      esh;
  logic [NCL-1:0][4:0][VW-1:0] escale;
  acc_t [NCL-1:0][4:0]         ebias;
  logic                        mode5;
  osel_e                       osel;
  rmode_e                      mode_q;
  logic                        fire, e_valid;
  acc_t [NCL*NLANE*NPE/2-1:0]  ey;
  logic [$clog2(NCL*NLANE*NPE/2+1)-1:0] ecount;
  logic [7:0]                  tag_q;
  acc_t [NRES-1:0]             res;
  logic [7:0]                  res_count;
  logic                        ff_full, ff_empty;
  logic [$clog2(FIFO_DEPTH+1)-1:0] ff_count;

  for (genvar r = 0; r < NSLOT; r++) begin : g_rda
    ln_rda #(.NPE(NPE), .NMUL(NMUL)) u_rda (
      .clk, .rst_n,
      .load(load_valid && load_slot == 5'(r)), .tok_line(load_line), .scheme(scheme),
      .mode(mode), .chan_base(2'(r % 4)), .b_line(row_line),
      .a(ra[r]), .b(rb[r]), .sh(rsh[r]), .scale(rscale[r]), .five_lane(rfive[r]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mode_q <= RM_QUANT;
    else if (load_valid) mode_q <= mode;
  end

  assign mode5 = rfive[0];

  // Place the slots' lanes on the clusters' lanes.
  always_comb begin
    ea = '0; eb = '0; esh = '0;
    for (int c = 0; c < NCL; c++)
      for (int s = 0; s < 5; s++) begin
        escale[c][s] = rscale[5*c+s];
        ebias[c][s]  = (mode_q == RM_RAW && ((5*c+s) % 4) != 0) ? '0 : row_bias;
        if (!mode5) begin
          for (int l = 0; l < 4; l++) begin
            ea[c][4*s+l] = ra[5*c+s][l]; eb[c][4*s+l] = rb[5*c+s][l]; esh[c][4*s+l] = rsh[5*c+s][l];
          end
        end else if (s < 4) begin
          for (int l = 0; l < 5; l++) begin
            ea[c][5*s+l] = ra[5*c+s][l]; eb[c][5*s+l] = rb[5*c+s][l]; esh[c][5*s+l] = rsh[5*c+s][l];
          end
        end
      end
    unique case (mode_q)
      RM_QUANT: osel = mode5 ? OS_5L : OS_4L;
      RM_RAW:   osel = OS_16L;
      default:  osel = OS_2PE;
    endcase
  end

  assign row_ready = (int'(ff_count) + (e_valid ? 1 : 0)) < FIFO_DEPTH;
  assign fire      = row_valid && row_ready;
  assign stall     = row_valid && !row_ready;

  ln_rmpu_engine #(.NCL(NCL), .NLANE(NLANE), .NPE(NPE), .NMUL(NMUL)) u_engine (
    .clk, .rst_n, .in_valid(fire), .a(ea), .b(eb), .sh(esh), .mode5(mode5),
    .scale(escale), .bias(ebias), .osel(osel), .relu(relu),
    .out_valid(e_valid), .y(ey), .y_count(ecount));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag_q <= '0;
    else if (fire) tag_q <= row_tag;
  end

  // Gather the engine's result set into per-slot order.
  always_comb begin
    res = '0;
    res_count = 8'(ecount);
    unique case (osel)
      OS_5L: begin
        for (int c = 0; c < NCL; c++)
          for (int g = 0; g < 4; g++) res[5*c+g] = ey[4*c+g];
        res_count = 8'(NSLOT);
      end
      OS_2PE: begin
        for (int r = 0; r < NSLOT; r++)
          for (int h = 0; h < 4; h++) res[4*r+h] = ey[(r/5)*NLANE*NPE/2 + 16*(r%5) + h];
        res_count = 8'(NRES);
      end
      default: for (int i = 0; i < NSLOT; i++) res[i] = ey[i];
    endcase
  end

  ln_sync_fifo #(.W(EW), .DEPTH(FIFO_DEPTH)) u_ofifo (
    .clk, .rst_n, .push(e_valid), .din({tag_q, res_count, res}),
    .pop(out_pop), .dout(out_data), .full(ff_full), .empty(ff_empty), .count(ff_count));

  assign out_valid = !ff_empty;
endmodule
