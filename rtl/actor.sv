// actor: the Actor module of ReAgentCore.
//
// Maps the state s = (phi(G P_S), phi(P_T)) (2*FD Q16.16 values, source
// feature first as in the paper's text) to three action labels, one per axis.
// The network is Quant(2FD) - QuantFC(2FD,H1) - Quant(H1) - QuantFC(H1,H2) -
// Quant(H2) - FC(H2, 3*(2*N_ACT+1)): the two hidden FC layers are LLT-quantised,
// the last one is not, so the Quant before it only dequantises (and applies
// ReLU). Each layer stores two parameter sets, one for the translation actor
// and one for the rotation actor; `pset` (0 = translation, 1 = rotation)
// selects which network a run evaluates, so the same datapath serves both.
// The scores of axis a are outputs 11a .. 11a+10 of the last layer; `labels[a]`
// is the index of the largest (the first one on ties).
//
// The layers run one after the other on a single state vector (tile size 1),
// each unrolled over its output channels by the paper's factors. Latency from
// `start` to `done`: 2FD + (2FD*H1/PO1) + H1 + (H1*H2/PO2) + H2 +
// H2*ceil(33/PO3) cycles plus a few handshake cycles. The paper shows no ReLU
// between the last FC layer and the argmax in its block diagram although its
// text says every FC layer is followed by ReLU; this design follows the
// diagram, which changes nothing except ties among negative scores.
//
// Parameters: six consecutive layer blocks from BASE, in network order, each
// holding the translation set then the rotation set (layout per set as in
// quant_layer, quant_conv and conv_layer).
module actor
  import pn_pkg::*;
#(
  parameter int unsigned FD    = FEAT_DIM,
  parameter int unsigned H1    = 512,
  parameter int unsigned H2    = 256,
  parameter int unsigned PO1   = 128,
  parameter int unsigned PO2   = 32,
  parameter int unsigned PO3   = 2,
  parameter int unsigned BASE  = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pw_valid,
  input  logic [23:0]  pw_addr,
  input  logic [127:0] pw_data,
  input  logic         start,
  input  logic         pset,
  input  fx_t          feat_s [FD],
  input  fx_t          feat_t [FD],
  output logic         busy,
  output logic         done,
  output logic [3:0]   labels [3]
);
  localparam int unsigned SD   = 2 * FD;
  localparam int unsigned NOUT = 3 * N_LABEL;
  localparam int unsigned Z1W  = BA + BW + $clog2(SD);
  localparam int unsigned Z2W  = BA + BW + $clog2(H1);
  localparam int unsigned B_L0 = BASE;
  localparam int unsigned B_L1 = B_L0 + 2 * quant_words(SD);
  localparam int unsigned B_L2 = B_L1 + 2 * qconv_words(SD, H1);
  localparam int unsigned B_L3 = B_L2 + 2 * quant_words(H1);
  localparam int unsigned B_L4 = B_L3 + 2 * qconv_words(H1, H2);
  localparam int unsigned B_L5 = B_L4 + 2 * affine_words(H2);
  localparam int unsigned WORDS_TOTAL = B_L5 + 2 * conv_words(H2, NOUT) - BASE;

  fx_t                   s0 [2][1][SD];
  logic [BA-1:0]         q0 [2][1][SD];
  logic signed [Z1W-1:0] z1 [2][1][H1];
  logic [BA-1:0]         q1 [2][1][H1];
  logic signed [Z2W-1:0] z2 [2][1][H2];
  logic [31:0]           f2 [2][1][H2];
  fx_t                   f2s [2][1][H2];
  fx_t                   sc [2][1][NOUT];

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < FD; i++) begin
        s0[b][0][i]      = feat_s[i];
        s0[b][0][FD + i] = feat_t[i];
      end
      for (int i = 0; i < H2; i++) f2s[b][0][i] = fx_t'(f2[b][0][i]);
    end
  end

  logic [5:0] go, dn, bz;
  logic       ps;
  logic       arg_step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      ps <= 1'b0;
      arg_step <= 1'b0;
    end else begin
      arg_step <= dn[5];
      if (start && !busy) begin
        busy <= 1'b1;
        ps <= pset;
      end else if (arg_step) busy <= 1'b0;
    end
  end
  assign go[0] = start && !busy;
  assign go[5:1] = dn[4:0];

  quant_layer #(.N(SD), .B(1), .PP(1), .PO(1), .IW(32), .IN_FRAC(16), .OUT_CODES(1'b1),
                .NSET(2), .BASE(B_L0)) u_l0 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(go[0]), .rd_bank(1'b0), .wr_bank(1'b0),
    .pset(2'(go[0] ? pset : ps)), .busy(bz[0]), .done(dn[0]), .x(s0), .y(q0));
  quant_conv #(.M(SD), .N(H1), .B(1), .PP(1), .PO(PO1), .NSET(2), .BASE(B_L1)) u_l1 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(go[1]), .rd_bank(1'b0), .wr_bank(1'b0),
    .pset(2'(ps)), .busy(bz[1]), .done(dn[1]), .x(q0), .y(z1));
  quant_layer #(.N(H1), .B(1), .PP(1), .PO(1), .IW(Z1W), .IN_FRAC(0), .OUT_CODES(1'b1),
                .NSET(2), .BASE(B_L2)) u_l2 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(go[2]), .rd_bank(1'b0), .wr_bank(1'b0),
    .pset(2'(ps)), .busy(bz[2]), .done(dn[2]), .x(z1), .y(q1));
  quant_conv #(.M(H1), .N(H2), .B(1), .PP(1), .PO(PO2), .NSET(2), .BASE(B_L3)) u_l3 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(go[3]), .rd_bank(1'b0), .wr_bank(1'b0),
    .pset(2'(ps)), .busy(bz[3]), .done(dn[3]), .x(q1), .y(z2));
  quant_layer #(.N(H2), .B(1), .PP(1), .PO(1), .IW(Z2W), .IN_FRAC(0), .OUT_CODES(1'b0),
                .NSET(2), .BASE(B_L4)) u_l4 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(go[4]), .rd_bank(1'b0), .wr_bank(1'b0),
    .pset(2'(ps)), .busy(bz[4]), .done(dn[4]), .x(z2), .y(f2));
  conv_layer #(.M(H2), .N(NOUT), .B(1), .PP(1), .PO(PO3), .NSET(2), .BASE(B_L5)) u_l5 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(go[5]), .rd_bank(1'b0), .wr_bank(1'b0),
    .pset(2'(ps)), .busy(bz[5]), .done(dn[5]), .x(f2s), .y(sc));

  // argmax per axis, registered in the cycle after the last layer finishes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      for (int a = 0; a < 3; a++) labels[a] <= '0;
    end else begin
      done <= arg_step;
      if (arg_step) begin
        for (int a = 0; a < 3; a++) begin
          automatic int unsigned best = 0;
          for (int l = 1; l < N_LABEL; l++)
            if (sc[0][0][a * N_LABEL + l] > sc[0][0][a * N_LABEL + best]) best = l;
          labels[a] <= 4'(best);
        end
      end
    end
  end
endmodule
