// pointnet: tiled, pipelined PointNet feature extractor (Sec. 4.1 of the design).
//
// Computes the global feature phi(G . P) of an N-point cloud P, N given at run
// time. The cloud is processed in ceil(N/B) tiles of B points through eight
// stages: Read (point_reader), Transform (rigid_transform), Conv(3,C1),
// Quant(C1), QuantConv(C1,C2), Quant(C2), QuantConv(C2,C3) and MaxPool(C3).
// Only the max-pooled feature spans all points, so on-chip storage is O(B),
// independent of N. T-Net is absent, as in the paper.
//
// Dataflow: every stage owns a two-bank output buffer, tile k uses bank k mod 2.
// Stage s starts tile k when stage s-1 has finished tile k and stage s+1 has
// finished tile k-2 (so bank k mod 2 is free). Stages therefore overlap on
// consecutive tiles and, once the pipeline is full, one tile leaves every
// max_s C_s cycles, which gives the paper's latency model
// (ceil(N/B)-1) * max_s C_s + sum_s C_s plus handshake cycles. The two-bank
// scheme and the start rule are this design's implementation of the paper's
// dataflow optimisation.
//
// Interface: pulse `start` with n_points >= 1, cloud_addr (16-byte aligned),
// pose g and centre mu held stable; `done` pulses when feat[] holds the
// result. Parameters are loaded beforehand over the pw_* bus; the layers'
// blocks follow one another from BASE in the order listed above.
module pointnet
  import pn_pkg::*;
#(
  parameter int unsigned C1D   = C1,
  parameter int unsigned C2D   = C2,
  parameter int unsigned C3D   = FEAT_DIM,
  parameter int unsigned B     = 2,
  parameter int unsigned TR_PP = 1,
  parameter int unsigned CV_PP = 2,
  parameter int unsigned CV_PO = 4,
  parameter int unsigned Q1_PP = 1,
  parameter int unsigned Q1_PO = 1,
  parameter int unsigned QC1_PP = 2,
  parameter int unsigned QC1_PO = 64,
  parameter int unsigned Q2_PP = 1,
  parameter int unsigned Q2_PO = 1,
  parameter int unsigned QC2_PP = 2,
  parameter int unsigned QC2_PO = 512,
  parameter int unsigned MP_PP = 1,
  parameter int unsigned MP_PO = 8,
  parameter int unsigned BASE  = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pw_valid,
  input  logic [23:0]  pw_addr,
  input  logic [127:0] pw_data,
  input  logic         start,
  input  logic [15:0]  n_points,
  input  logic [31:0]  cloud_addr,
  input  pose_t        g,
  input  fvec3_t       mu,
  output logic         busy,
  output logic         done,
  output logic         rd_req_valid,
  input  logic         rd_req_ready,
  output logic [31:0]  rd_req_addr,
  output logic [15:0]  rd_req_beats,
  input  logic         rd_valid,
  input  logic [127:0] rd_data,
  input  logic         rd_last,
  output fx_t          feat [C3D]
);
  localparam int unsigned NS   = 8;
  localparam int unsigned Z2W  = BA + BW + $clog2(C1D);
  localparam int unsigned Z3W  = BA + BW + $clog2(C2D);
  localparam int unsigned B_CV = BASE;
  localparam int unsigned B_Q1 = B_CV + conv_words(3, C1D);
  localparam int unsigned B_C1 = B_Q1 + quant_words(C1D);
  localparam int unsigned B_Q2 = B_C1 + qconv_words(C1D, C2D);
  localparam int unsigned B_C2 = B_Q2 + quant_words(C2D);
  localparam int unsigned B_MP = B_C2 + qconv_words(C2D, C3D);

  // inter-stage buffers
  fvec3_t               pts [2][B];
  fx_t                  x0  [2][B][3];
  fx_t                  y1  [2][B][C1D];
  logic [BA-1:0]        q1  [2][B][C1D];
  logic signed [Z2W-1:0] z2 [2][B][C2D];
  logic [BA-1:0]        q2  [2][B][C2D];
  logic signed [Z3W-1:0] z3 [2][B][C3D];

  logic [15:0] ntiles, n_pts_r;
  logic [15:0] st_cnt [NS];
  logic [15:0] dn_cnt [NS];
  logic [NS-1:0] s_go, s_busy, s_done;
  logic          init_mp;
  logic [31:0]   base_addr;

  // points in tile k
  function automatic logic [$clog2(B+1)-1:0] tile_len(input logic [15:0] k, input logic [15:0] n);
    int unsigned rem;
    rem = int'(n) - int'(k) * B;
    return (rem >= B) ? ($clog2(B+1))'(B) : ($clog2(B+1))'(rem);
  endfunction

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      automatic logic ok = busy && !s_busy[s] && (st_cnt[s] < ntiles);
      if (s > 0)      ok = ok && (dn_cnt[s-1] > st_cnt[s]);
      if (s < NS - 1) ok = ok && (32'(st_cnt[s]) < 32'(dn_cnt[s+1]) + 2);
      s_go[s] = ok;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      ntiles <= '0;
      n_pts_r <= '0;
      base_addr <= '0;
      init_mp <= 1'b0;
      for (int s = 0; s < NS; s++) begin
        st_cnt[s] <= '0;
        dn_cnt[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      init_mp <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          ntiles <= 16'((int'(n_points) + B - 1) / B);
          n_pts_r <= n_points;
          base_addr <= cloud_addr;
          init_mp <= 1'b1;
          for (int s = 0; s < NS; s++) begin
            st_cnt[s] <= '0;
            dn_cnt[s] <= '0;
          end
        end
      end else begin
        for (int s = 0; s < NS; s++) begin
          if (s_go[s])   st_cnt[s] <= st_cnt[s] + 1'b1;
          if (s_done[s]) dn_cnt[s] <= dn_cnt[s] + 1'b1;
        end
        if (s_done[NS-1] && dn_cnt[NS-1] + 1'b1 == ntiles) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  point_reader #(.B(B)) u_read (
    .clk, .rst_n, .start(s_go[0]),
    .addr(base_addr + {st_cnt[0], 4'b0} * 32'(B)),
    .n_pts(tile_len(st_cnt[0], n_pts_r)), .wr_bank(st_cnt[0][0]),
    .busy(s_busy[0]), .done(s_done[0]),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_beats, .rd_valid, .rd_data, .rd_last,
    .pts(pts));

  rigid_transform #(.B(B), .PP(TR_PP)) u_xform (
    .clk, .rst_n, .start(s_go[1]), .rd_bank(st_cnt[1][0]), .wr_bank(st_cnt[1][0]),
    .g, .mu, .busy(s_busy[1]), .done(s_done[1]), .pts(pts), .y(x0));

  conv_layer #(.M(3), .N(C1D), .B(B), .PP(CV_PP), .PO(CV_PO), .NSET(1), .BASE(B_CV)) u_conv (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(s_go[2]),
    .rd_bank(st_cnt[2][0]), .wr_bank(st_cnt[2][0]), .pset(1'b0),
    .busy(s_busy[2]), .done(s_done[2]), .x(x0), .y(y1));

  quant_layer #(.N(C1D), .B(B), .PP(Q1_PP), .PO(Q1_PO), .IW(32), .IN_FRAC(16),
                .OUT_CODES(1'b1), .NSET(1), .BASE(B_Q1)) u_quant1 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(s_go[3]),
    .rd_bank(st_cnt[3][0]), .wr_bank(st_cnt[3][0]), .pset(1'b0),
    .busy(s_busy[3]), .done(s_done[3]), .x(y1), .y(q1));

  quant_conv #(.M(C1D), .N(C2D), .B(B), .PP(QC1_PP), .PO(QC1_PO), .NSET(1), .BASE(B_C1)) u_qconv1 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(s_go[4]),
    .rd_bank(st_cnt[4][0]), .wr_bank(st_cnt[4][0]), .pset(1'b0),
    .busy(s_busy[4]), .done(s_done[4]), .x(q1), .y(z2));

  quant_layer #(.N(C2D), .B(B), .PP(Q2_PP), .PO(Q2_PO), .IW(Z2W), .IN_FRAC(0),
                .OUT_CODES(1'b1), .NSET(1), .BASE(B_Q2)) u_quant2 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(s_go[5]),
    .rd_bank(st_cnt[5][0]), .wr_bank(st_cnt[5][0]), .pset(1'b0),
    .busy(s_busy[5]), .done(s_done[5]), .x(z2), .y(q2));

  quant_conv #(.M(C2D), .N(C3D), .B(B), .PP(QC2_PP), .PO(QC2_PO), .NSET(1), .BASE(B_C2)) u_qconv2 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start(s_go[6]),
    .rd_bank(st_cnt[6][0]), .wr_bank(st_cnt[6][0]), .pset(1'b0),
    .busy(s_busy[6]), .done(s_done[6]), .x(q2), .y(z3));

  maxpool_layer #(.N(C3D), .B(B), .PP(MP_PP), .PO(MP_PO), .ZW(Z3W), .BASE(B_MP)) u_maxpool (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .init(init_mp), .start(s_go[7]),
    .rd_bank(st_cnt[7][0]), .n_valid(tile_len(st_cnt[7], n_pts_r)),
    .busy(s_busy[7]), .done(s_done[7]), .x(z3), .feat(feat));

endmodule
