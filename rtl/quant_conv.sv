// quant_conv: LLT-quantised 1D convolution / fully-connected layer (QuantConv,
// QuantFC).
//
// Computes the integer product Z = Qa(X) Qw(W)^T for one tile of B points: the
// inputs are 8-bit unsigned activation codes in [0, Qa], the weights 8-bit
// signed codes in [-Qw, Qw], and each output keeps b_a + b_w + ceil(log2 M)
// bits so no precision is lost. Bias and the combined scale s_aw are not
// applied here; the following Quant or MaxPool stage does the dequantisation,
// as the paper describes. Each cycle PP points x PO output channels accumulate
// one input channel, so a tile takes ceil(B/PP) * ceil(N/PO) * M cycles.
//
// Control, the two output banks and the parameter sets work as in conv_layer.
// Set s occupies ceil(N*M/16) words from BASE + s*WORDS, weights row-major
// (output channel major), sixteen 8-bit codes per 128-bit word, code i of a
// word in bits [8i+7:8i].
module quant_conv
  import pn_pkg::*;
#(
  parameter int unsigned M     = 128,
  parameter int unsigned N     = 1024,
  parameter int unsigned B     = 2,
  parameter int unsigned PP    = 2,
  parameter int unsigned PO    = 512,
  parameter int unsigned NSET  = 1,
  parameter int unsigned BASE  = 0,
  parameter int unsigned ZW    = BA + BW + $clog2(M)
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
  input  logic [BA-1:0]          x [2][B][M],
  output logic signed [ZW-1:0]   y [2][B][N]
);
  localparam int unsigned WORDS = qconv_words(M, N);
  localparam int unsigned NPB   = (B + PP - 1) / PP;
  localparam int unsigned NOB   = (N + PO - 1) / PO;

  logic signed [BW-1:0] w [NSET][N][M];

  always_ff @(posedge clk) begin
    if (pw_valid && pw_addr >= 24'(BASE) && pw_addr < 24'(BASE + NSET * WORDS)) begin
      automatic int unsigned rel = int'(pw_addr) - BASE;
      automatic int unsigned s   = rel / WORDS;
      automatic int unsigned off = rel % WORDS;
      for (int k = 0; k < 16; k++) begin
        automatic int unsigned idx = off * 16 + k;
        if (idx < N * M) w[s][idx / M][idx % M] <= pw_data[8*k +: 8];
      end
    end
  end

  logic [$clog2(NPB+1)-1:0] pb;
  logic [$clog2(NOB+1)-1:0] ob;
  logic [$clog2(M+1)-1:0]   j;
  logic                     rb, wb;
  logic [$clog2(NSET+1)-1:0] ps;
  logic signed [ZW-1:0]     acc [PP][PO];

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
              automatic logic signed [ZW-1:0] prod;
              automatic logic signed [ZW-1:0] sum;
              prod = ZW'($signed({1'b0, x[rb][pi][j]}) * w[ps][oi][j]);
              sum  = acc[p][o] + prod;
              if (int'(j) == M - 1) begin
                y[wb][pi][oi] <= sum;
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
