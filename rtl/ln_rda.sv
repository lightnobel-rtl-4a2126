// ln_rda: RMPU Reconfigurable Data Aligner (one per token slot).
//
// On `load` the aligner takes one token line from the token scratchpad, decodes it
// (inlier codes, INT16 outliers, scale factor, outlier indices) and holds it. Every
// cycle it then places chunk pairs of the held token and of the broadcast row `b_line`
// (a 16-bit weight row, or in RM_QK mode a key token already widened to 16 bits) on the
// multipliers of five PE lanes (lanes 0..3 for inliers, lane 4 for outliers):
//   RM_QUANT  inlier n (n-th non-outlier channel c) uses multipliers 4n..4n+3 of lanes
//             0..3: 4-bit code x weight chunk j, shift 4j. Outlier o uses multipliers
//             16o..16o+15 of lane 4: chunk i x weight chunk j, shift 4(i+j).
//   RM_RAW    channels 32*chan_base .. +31 of an unquantized token, 16 multipliers
//             each (a full 16x16 product per PE) on lanes 0..3.
//   RM_QK     128 4-bit x 4-bit products, channel c on multiplier c of lane 0, so PE
//             pair h of lane 0 sums head h (head dimension 32).
// Every operand is a 4-bit chunk widened to 5 bits: the chunk holding the value's MSB
// is sign extended, the others zero extended, as the paper describes. The paper gives
// the RDA's function (4-bit split, sign extension, extraction of scale and indices);
// the slot placement above is this design's. Operands are combinational from the held
// token and b_line; `five_lane` tells the RMPU whether lane 4 is in use.
module ln_rda
  import ln_pkg::*;
#(
  parameter int NPE  = 8,
  parameter int NMUL = 16
) (
  input  logic                                            clk,
  input  logic                                            rst_n,
  input  logic                                            load,
  input  line_t                                           tok_line,
  input  qscheme_t                                        scheme,
  input  rmode_e                                          mode,
  input  logic [1:0]                                      chan_base,
  input  line_t                                           b_line,
  output logic signed [4:0][NPE-1:0][NMUL-1:0][MULW-1:0]  a,
  output logic signed [4:0][NPE-1:0][NMUL-1:0][MULW-1:0]  b,
  output logic        [4:0][NPE-1:0][NMUL-1:0][4:0]       sh,
  output logic [VW-1:0]                                   scale,
  output logic                                            five_lane
);
  localparam int LSLOTS = NPE * NMUL;            // multipliers per lane

  dtoken_t   tok_q;
  rmode_e    mode_q;
  logic [1:0] base_q;
  logic [3:0] k_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_q  <= '0;
      mode_q <= RM_QUANT;
      base_q <= '0;
      k_q    <= '0;
    end else if (load) begin
      tok_q  <= decode_token(tok_line, scheme);
      mode_q <= mode;
      base_q <= chan_base;
      k_q    <= (scheme.prec == PREC16) ? 4'd0 : scheme.k;
    end
  end

  function automatic logic [MULW-1:0] chunk(logic [VW-1:0] v, int i);
    logic [CHUNK-1:0] c;
    c = v[CHUNK*i +: CHUNK];
    return (i == VW/CHUNK - 1) ? {c[CHUNK-1], c} : {1'b0, c};
  endfunction

  always_comb begin
    int n, o, s, ln, pe, mu;
    logic [VW-1:0] w;
    a = '0; b = '0; sh = '0;
    n = 0; o = 0;
    unique case (mode_q)
      RM_QUANT: begin
        for (int c = 0; c < HZ; c++) begin
          w = b_line[c*VW +: VW];
          if (!tok_q.is_out[c]) begin
            for (int j = 0; j < 4; j++) begin
              s = 4*n + j; ln = s / LSLOTS; pe = (s % LSLOTS) / NMUL; mu = s % NMUL;
              a[ln][pe][mu]  = {tok_q.v[c][3], tok_q.v[c][3:0]};
              b[ln][pe][mu]  = chunk(w, j);
              sh[ln][pe][mu] = 5'(4*j);
            end
            n++;
          end else begin
            for (int i = 0; i < 4; i++)
              for (int j = 0; j < 4; j++) begin
                s = 16*o + 4*i + j; pe = s / NMUL; mu = s % NMUL;
                if (pe < NPE) begin
                  a[4][pe][mu]  = chunk(tok_q.v[c], i);
                  b[4][pe][mu]  = chunk(w, j);
                  sh[4][pe][mu] = 5'(4*(i+j));
                end
              end
            o++;
          end
        end
      end
      RM_RAW: begin
        for (int c = 0; c < 32; c++) begin
          w = b_line[(32*int'(base_q) + c)*VW +: VW];
          for (int i = 0; i < 4; i++)
            for (int j = 0; j < 4; j++) begin
              s = 16*c + 4*i + j; ln = s / LSLOTS; pe = (s % LSLOTS) / NMUL; mu = s % NMUL;
              a[ln][pe][mu]  = chunk(tok_q.v[32*int'(base_q) + c], i);
              b[ln][pe][mu]  = chunk(w, j);
              sh[ln][pe][mu] = 5'(4*(i+j));
            end
        end
      end
      default: begin
        for (int c = 0; c < HZ; c++) begin
          w = b_line[c*VW +: VW];
          pe = c / NMUL; mu = c % NMUL;
          if (pe < NPE) begin
            a[0][pe][mu] = {tok_q.v[c][3], tok_q.v[c][3:0]};
            b[0][pe][mu] = {w[3], w[3:0]};
          end
        end
      end
    endcase
    scale     = (mode_q == RM_QUANT) ? tok_q.scale : 16'd1;
    five_lane = (mode_q == RM_QUANT) && (k_q != 0);
  end
endmodule
