// maxpool_layer: the MaxPool submodule that aggregates point features.
//
// For each of the `n_valid` points of a tile and each channel c it computes
// u = relu(scale_c * z + shift_c) (the host-folded dequantisation b + s_aw Z and
// batch normalisation, as in quant_layer) and updates the global feature,
// feat[c] <= max(feat[c], u). `init` sets every feature to the most negative
// Q16.16 value, the hardware stand-in for the paper's -infinity. The paper's
// max-update over tiles gives the same result as one max over all N points.
// PP points x PO channels per cycle: ceil(B/PP)*ceil(N/PO) cycles per tile.
// Points beyond n_valid (the padding of a last, partial tile) are ignored.
// Parameters: N scales then N shifts, four Q16.16 per word, from BASE.
module maxpool_layer
  import pn_pkg::*;
#(
  parameter int unsigned N    = 1024,
  parameter int unsigned B    = 2,
  parameter int unsigned PP   = 1,
  parameter int unsigned PO   = 8,
  parameter int unsigned ZW   = 23,
  parameter int unsigned BASE = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pw_valid,
  input  logic [23:0]  pw_addr,
  input  logic [127:0] pw_data,
  input  logic         init,
  input  logic         start,
  input  logic         rd_bank,
  input  logic [$clog2(B+1)-1:0] n_valid,
  output logic         busy,
  output logic         done,
  input  logic signed [ZW-1:0] x [2][B][N],
  output fx_t          feat [N]
);
  localparam int unsigned AW    = words_of(N, 4);
  localparam int unsigned WORDS = affine_words(N);
  localparam int unsigned NPB   = (B + PP - 1) / PP;
  localparam int unsigned NOB   = (N + PO - 1) / PO;

  fx_t scale [N];
  fx_t shift [N];

  always_ff @(posedge clk) begin
    if (pw_valid && pw_addr >= 24'(BASE) && pw_addr < 24'(BASE + WORDS)) begin
      automatic int unsigned off = int'(pw_addr) - BASE;
      if (off < AW) begin
        for (int k = 0; k < 4; k++) if (off * 4 + k < N) scale[off * 4 + k] <= pw_data[32*k +: 32];
      end else begin
        for (int k = 0; k < 4; k++) if ((off - AW) * 4 + k < N) shift[(off - AW) * 4 + k] <= pw_data[32*k +: 32];
      end
    end
  end

  logic [$clog2(NPB+1)-1:0] pb;
  logic [$clog2(NOB+1)-1:0] ob;
  logic                     rb;
  logic [$clog2(B+1)-1:0]   nv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pb <= '0; ob <= '0; rb <= 1'b0; nv <= '0;
      for (int c = 0; c < N; c++) feat[c] <= 32'sh8000_0000;
    end else begin
      done <= 1'b0;
      if (init) begin
        for (int c = 0; c < N; c++) feat[c] <= 32'sh8000_0000;
      end
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          pb <= '0; ob <= '0; rb <= rd_bank; nv <= n_valid;
        end
      end else begin
        for (int o = 0; o < PO; o++) begin
          automatic int unsigned oi = int'(ob) * PO + o;
          if (oi < N) begin
            automatic fx_t m = feat[oi];
            for (int p = 0; p < PP; p++) begin
              automatic int unsigned pi = int'(pb) * PP + p;
              if (pi < int'(nv)) begin
                automatic logic signed [63:0] u;
                u = 64'(x[rb][pi][oi]) * 64'(scale[oi]) + 64'(shift[oi]);
                if (u < 0) u = 0;
                if (u > 64'sh7FFF_FFFF) u = 64'sh7FFF_FFFF;
                if (fx_t'(u) > m) m = fx_t'(u);
              end
            end
            feat[oi] <= m;
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
