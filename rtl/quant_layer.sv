// quant_layer: the Quant submodule between (Quant)Conv layers.
//
// For every element v of a tile it applies one per-channel affine map,
// u = (scale_c * v) / 2^IN_FRAC + shift_c (Q16.16), then ReLU. The affine map
// is the host-folded composition of the paper's three linear steps: the
// dequantisation b + s_aw Z of a preceding QuantConv, the batch normalisation,
// and, when the layer quantises, the factor K*Qa/s_a of the LLT index
// round(K Qa clip(a/s_a)). With OUT_CODES=1 the result is rounded, clipped to
// [0, K*Qa] and looked up in the next layer's LLT input table (LUT_LEN 8-bit
// entries), giving the 8-bit activation code. With OUT_CODES=0 the layer only
// dequantises and outputs the ReLU'd Q16.16 value (used before the actor's
// final non-quantised FC). Folding the affine steps into one pair of per-channel
// constants is this design's choice; the paper gives the steps, not their
// arithmetic.
//
// IN_FRAC is 16 for Q16.16 inputs and 0 for integer QuantConv accumulators.
// PP x PO elements are processed per cycle, ceil(B/PP)*ceil(N/PO) cycles per
// tile; the table is read PP*PO times per cycle, i.e. replicated, as in the paper.
// Control and banks work as in conv_layer. Parameter set s at BASE + s*WORDS:
// N scales, then N shifts (four Q16.16 per word), then the table (sixteen codes
// per word) when OUT_CODES=1.
module quant_layer
  import pn_pkg::*;
#(
  parameter int unsigned N         = 64,
  parameter int unsigned B         = 2,
  parameter int unsigned PP        = 1,
  parameter int unsigned PO        = 1,
  parameter int unsigned IW        = 32,
  parameter int unsigned IN_FRAC   = 16,
  parameter bit          OUT_CODES = 1'b1,
  parameter int unsigned OW        = OUT_CODES ? BA : 32,
  parameter int unsigned NSET      = 1,
  parameter int unsigned BASE      = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pw_valid,
  input  logic [23:0]  pw_addr,
  input  logic [127:0] pw_data,
  input  logic         start,
  input  logic         rd_bank,
  input  logic         wr_bank,
  input  logic [$clog2(NSET+1)-1:0] pset,
  output logic         busy,
  output logic         done,
  input  logic signed [IW-1:0] x [2][B][N],
  output logic [OW-1:0]        y [2][B][N]
);
  localparam int unsigned AW    = words_of(N, 4);
  localparam int unsigned WORDS = OUT_CODES ? quant_words(N) : affine_words(N);
  localparam int unsigned NPB   = (B + PP - 1) / PP;
  localparam int unsigned NOB   = (N + PO - 1) / PO;
  localparam int unsigned NLUT  = OUT_CODES ? LUT_LEN : 1;

  fx_t           scale [NSET][N];
  fx_t           shift [NSET][N];
  logic [BA-1:0] lut   [NSET][NLUT];

  always_ff @(posedge clk) begin
    if (pw_valid && pw_addr >= 24'(BASE) && pw_addr < 24'(BASE + NSET * WORDS)) begin
      automatic int unsigned rel = int'(pw_addr) - BASE;
      automatic int unsigned s   = rel / WORDS;
      automatic int unsigned off = rel % WORDS;
      if (off < AW) begin
        for (int k = 0; k < 4; k++) if (off * 4 + k < N) scale[s][off * 4 + k] <= pw_data[32*k +: 32];
      end else if (off < 2 * AW) begin
        for (int k = 0; k < 4; k++) if ((off - AW) * 4 + k < N) shift[s][(off - AW) * 4 + k] <= pw_data[32*k +: 32];
      end else begin
        for (int k = 0; k < 16; k++)
          if ((off - 2 * AW) * 16 + k < NLUT) lut[s][(off - 2 * AW) * 16 + k] <= pw_data[8*k +: 8];
      end
    end
  end

  function automatic fx_t affine_relu(input logic signed [IW-1:0] v, input fx_t sc, input fx_t sh);
    logic signed [95:0] p;
    logic signed [95:0] u;
    p = 96'(v) * 96'(sc);
    if (IN_FRAC > 0) p = (p + (96'sd1 <<< (IN_FRAC - 1))) >>> IN_FRAC;
    u = p + 96'(sh);
    if (u < 0) return 32'sd0;
    if (u > 96'sh7FFF_FFFF) return 32'sh7FFF_FFFF;
    return fx_t'(u);
  endfunction

  logic [$clog2(NPB+1)-1:0] pb;
  logic [$clog2(NOB+1)-1:0] ob;
  logic                     rb, wb;
  logic [$clog2(NSET+1)-1:0] ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pb <= '0; ob <= '0;
      rb <= 1'b0; wb <= 1'b0; ps <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          pb <= '0; ob <= '0;
          rb <= rd_bank; wb <= wr_bank; ps <= pset;
        end
      end else begin
        for (int p = 0; p < PP; p++) begin
          for (int o = 0; o < PO; o++) begin
            automatic int unsigned pi = int'(pb) * PP + p;
            automatic int unsigned oi = int'(ob) * PO + o;
            if (pi < B && oi < N) begin
              automatic fx_t u = affine_relu(x[rb][pi][oi], scale[ps][oi], shift[ps][oi]);
              if (OUT_CODES) begin
                automatic int unsigned idx = (int'(u) + 32768) >>> FX_FRAC;
                if (idx > LUT_LEN - 1) idx = LUT_LEN - 1;
                y[wb][pi][oi] <= OW'(lut[ps][idx]);
              end else begin
                y[wb][pi][oi] <= OW'(u);
              end
            end
          end
        end
        if (int'(ob) == NOB - 1) begin
          ob <= '0;
          if (int'(pb) == NPB - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else pb <= pb + 1'b1;
        end else ob <= ob + 1'b1;
      end
    end
  end
endmodule
