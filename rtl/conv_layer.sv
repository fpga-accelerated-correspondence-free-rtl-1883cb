// conv_layer: full-precision 1D convolution (kernel size 1) Y = X W^T + b.
//
// Used for the first PointNet layer Conv(3,64) and for the last, non-quantised
// FC layer of the actor. Inputs, weights, biases and outputs are Q16.16.
// The layer works on one tile of B points. Each cycle it performs PP x PO
// multiply-accumulates (PP points, PO output channels) over one input channel
// j, so a tile takes ceil(B/PP) * ceil(N/PO) * M cycles; this is the
// paper's latency model for an unrolled layer with an initiation interval of
// one. The loops over points and output channels are unrolled by PP and PO as
// in the paper; the loop order and the one-cycle accumulator are this design's
// choice.
//
// Output buffering: the layer holds two output banks (ping-pong) so that the
// next stage can read tile k-1 while this one writes tile k. `start` launches
// one tile: the layer reads input bank `rd_bank` and writes output bank
// `wr_bank`; `done` pulses for one cycle when the last result is written.
// NSET parameter sets can be stored (the actor keeps one set for translation and
// one for rotation); `pset` selects the set used by a tile.
//
// Parameters arrive over the parameter write bus (`pw_*`), one 128-bit word per
// cycle. Set s occupies WORDS words from BASE + s*WORDS: first the N*M
// weights, row-major (output channel major), four per word, then the N biases.
module conv_layer
  import pn_pkg::*;
#(
  parameter int unsigned M     = 3,
  parameter int unsigned N     = 64,
  parameter int unsigned B     = 2,
  parameter int unsigned PP    = 2,
  parameter int unsigned PO    = 4,
  parameter int unsigned NSET  = 1,
  parameter int unsigned BASE  = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  // parameter write bus
  input  logic         pw_valid,
  input  logic [23:0]  pw_addr,
  input  logic [127:0] pw_data,
  // control
  input  logic         start,
  input  logic         rd_bank,
  input  logic         wr_bank,
  input  logic [$clog2(NSET+1)-1:0] pset,
  output logic         busy,
  output logic         done,
  // data
  input  fx_t          x [2][B][M],
  output fx_t          y [2][B][N]
);
  localparam int unsigned WW    = words_of(N * M, 4);
  localparam int unsigned WORDS = conv_words(M, N);
  localparam int unsigned NPB   = (B + PP - 1) / PP;
  localparam int unsigned NOB   = (N + PO - 1) / PO;

  fx_t w    [NSET][N][M];
  fx_t bias [NSET][N];

  // ---- parameter load ----
  always_ff @(posedge clk) begin
    if (pw_valid && pw_addr >= 24'(BASE) && pw_addr < 24'(BASE + NSET * WORDS)) begin
      automatic int unsigned rel = int'(pw_addr) - BASE;
      automatic int unsigned s   = rel / WORDS;
      automatic int unsigned off = rel % WORDS;
      for (int k = 0; k < 4; k++) begin
        if (off < WW) begin
          automatic int unsigned idx = off * 4 + k;
          if (idx < N * M) w[s][idx / M][idx % M] <= pw_data[32*k +: 32];
        end else begin
          automatic int unsigned idx = (off - WW) * 4 + k;
          if (idx < N) bias[s][idx] <= pw_data[32*k +: 32];
        end
      end
    end
  end

  // ---- compute ----
  logic [$clog2(NPB+1)-1:0] pb;
  logic [$clog2(NOB+1)-1:0] ob;
  logic [$clog2(M+1)-1:0]   j;
  logic                     rb, wb;
  logic [$clog2(NSET+1)-1:0] ps;
  logic signed [63:0]       acc [PP][PO];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pb <= '0; ob <= '0; j <= '0;
      rb <= 1'b0; wb <= 1'b0; ps <= '0;
      for (int p = 0; p < PP; p++) for (int o = 0; o < PO; o++) acc[p][o] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          pb <= '0; ob <= '0; j <= '0;
          rb <= rd_bank; wb <= wr_bank; ps <= pset;
          for (int p = 0; p < PP; p++) for (int o = 0; o < PO; o++) acc[p][o] <= '0;
        end
      end else begin
        for (int p = 0; p < PP; p++) begin
          for (int o = 0; o < PO; o++) begin
            automatic int unsigned pi = int'(pb) * PP + p;
            automatic int unsigned oi = int'(ob) * PO + o;
            if (pi < B && oi < N) begin
              automatic logic signed [63:0] sum = acc[p][o] + 64'(x[rb][pi][j]) * 64'(w[ps][oi][j]);
              if (int'(j) == M - 1) begin
                automatic logic signed [63:0] r;
                r = ((sum + (64'(bias[ps][oi]) <<< FX_FRAC) + 64'sd32768) >>> FX_FRAC);
                if (r > 64'sh7FFF_FFFF)       y[wb][pi][oi] <= 32'sh7FFF_FFFF;
                else if (r < -64'sh8000_0000) y[wb][pi][oi] <= 32'sh8000_0000;
                else                          y[wb][pi][oi] <= fx_t'(r);
                acc[p][o] <= '0;
              end else begin
                acc[p][o] <= sum;
              end
            end
          end
        end
        if (int'(j) == M - 1) begin
          j <= '0;
          if (int'(ob) == NOB - 1) begin
            ob <= '0;
            if (int'(pb) == NPB - 1) begin
              busy <= 1'b0;
              done <= 1'b1;
            end else pb <= pb + 1'b1;
          end else ob <= ob + 1'b1;
        end else j <= j + 1'b1;
      end
    end
  end
endmodule
