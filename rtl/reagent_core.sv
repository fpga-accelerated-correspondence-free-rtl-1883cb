// reagent_core: ReAgentCore, the ReAgent registration accelerator.
//
// Runs Alg. 2 on chip. After an optional parameter load (PointNet, both actor
// networks and the step table) it reads the initial pose G0, extracts the
// template feature phi(P_T) once, and then, for I_MAX iterations: extracts
// phi(G_{i-1} P_S) with the disentangled transform R(p - mu) + mu + t, runs the
// Actor twice on (phi_S, phi_T) (translation parameters, then rotation
// parameters), lets Update turn the two label vectors into G_i, and writes G_i
// (three 128-bit words) to OUT_ADDR + 48 i. ReAgent has no convergence test;
// it always runs I_MAX iterations, as in the paper.
//
// Register map: as pointlk_core for words 0-7 (control, N, I_MAX, parameter,
// source, template, G0 and output addresses); 11, 12, 13 hold the source
// centroid mu (FP32 x, y, z), which the host computes; 15 reads the iterations
// run. The paper does not say where mu comes from; supplying it as a register
// is this design's choice. Parameter image: PointNet block from word 0, the
// actor block after it, the Update table last.
module reagent_core
  import pn_pkg::*;
#(
  parameter int unsigned C1D    = C1,
  parameter int unsigned C2D    = C2,
  parameter int unsigned C3D    = FEAT_DIM,
  parameter int unsigned B      = 14,
  parameter int unsigned TR_PP  = 2,
  parameter int unsigned CV_PP  = 7,
  parameter int unsigned CV_PO  = 1,
  parameter int unsigned Q1_PP  = 1,
  parameter int unsigned Q1_PO  = 1,
  parameter int unsigned QC1_PP = 14,
  parameter int unsigned QC1_PO = 8,
  parameter int unsigned Q2_PP  = 1,
  parameter int unsigned Q2_PO  = 1,
  parameter int unsigned QC2_PP = 14,
  parameter int unsigned QC2_PO = 64,
  parameter int unsigned MP_PP  = 1,
  parameter int unsigned MP_PO  = 8,
  parameter int unsigned H1     = 512,
  parameter int unsigned H2     = 256,
  parameter int unsigned A_PO1  = 128,
  parameter int unsigned A_PO2  = 32,
  parameter int unsigned A_PO3  = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  // s_axi_control
  input  logic [7:0]   s_axi_awaddr,
  input  logic         s_axi_awvalid,
  output logic         s_axi_awready,
  input  logic [31:0]  s_axi_wdata,
  input  logic [3:0]   s_axi_wstrb,
  input  logic         s_axi_wvalid,
  output logic         s_axi_wready,
  output logic [1:0]   s_axi_bresp,
  output logic         s_axi_bvalid,
  input  logic         s_axi_bready,
  input  logic [7:0]   s_axi_araddr,
  input  logic         s_axi_arvalid,
  output logic         s_axi_arready,
  output logic [31:0]  s_axi_rdata,
  output logic [1:0]   s_axi_rresp,
  output logic         s_axi_rvalid,
  input  logic         s_axi_rready,
  // gmem
  output logic [31:0]  m_axi_araddr,
  output logic [7:0]   m_axi_arlen,
  output logic [2:0]   m_axi_arsize,
  output logic [1:0]   m_axi_arburst,
  output logic         m_axi_arvalid,
  input  logic         m_axi_arready,
  input  logic [127:0] m_axi_rdata,
  input  logic [1:0]   m_axi_rresp,
  input  logic         m_axi_rlast,
  input  logic         m_axi_rvalid,
  output logic         m_axi_rready,
  output logic [31:0]  m_axi_awaddr,
  output logic [7:0]   m_axi_awlen,
  output logic [2:0]   m_axi_awsize,
  output logic [1:0]   m_axi_awburst,
  output logic         m_axi_awvalid,
  input  logic         m_axi_awready,
  output logic [127:0] m_axi_wdata,
  output logic [15:0]  m_axi_wstrb,
  output logic         m_axi_wlast,
  output logic         m_axi_wvalid,
  input  logic         m_axi_wready,
  input  logic [1:0]   m_axi_bresp,
  input  logic         m_axi_bvalid,
  output logic         m_axi_bready,
  output logic         irq
);
  localparam int unsigned K      = C3D;
  localparam int unsigned PN_W   = pointnet_words(C1D, C2D, C3D);
  localparam int unsigned ACT_W  = 2 * (quant_words(2 * K) + qconv_words(2 * K, H1) + quant_words(H1)
                                   + qconv_words(H1, H2) + affine_words(H2) + conv_words(H2, 3 * N_LABEL));
  localparam int unsigned TBL_W  = words_of(3 * N_LABEL, 4);
  localparam int unsigned PWORDS = PN_W + ACT_W + TBL_W;
  localparam int unsigned CHUNK  = 4096;

  typedef enum logic [4:0] {
    S_IDLE, S_PREP, S_LOADP_REQ, S_LOADP_DATA, S_G0_REQ, S_G0_DATA,
    S_FT, S_FT_WAIT, S_FS, S_FS_WAIT, S_ACT_T, S_ACT_T_WAIT, S_ACT_R, S_ACT_R_WAIT,
    S_UPD, S_UPD_WAIT, S_WR, S_WR_WAIT, S_CHK, S_DONE
  } state_e;
  state_e st;

  // ---------------- control registers ----------------
  logic [31:0] regs [16];
  logic        ctl_start, core_done;
  logic [31:0] iters;
  axil_regs #(.NREG(16), .STAT_REG(15)) u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid,
    .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready, .s_axi_araddr, .s_axi_arvalid,
    .s_axi_arready, .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .regs, .start(ctl_start), .core_done, .core_idle(st == S_IDLE), .stat(iters));
  assign irq = core_done;

  // ---------------- memory port ----------------
  logic         rd_req_valid, rd_req_ready, rd_valid, rd_last;
  logic [31:0]  rd_req_addr;
  logic [15:0]  rd_req_beats;
  logic [127:0] rd_data;
  logic         wr_req_valid, wr_req_ready, wr_done;
  logic [31:0]  wr_req_addr;
  logic [127:0] wr_req_data;
  // controller and PointNet requests
  logic         c_rd_valid, pn_rd_valid;
  logic [31:0]  c_rd_addr, pn_rd_addr;
  logic [15:0]  c_rd_beats, pn_rd_beats;
  logic         pn_owns;

  assign pn_owns      = (st == S_FT_WAIT) || (st == S_FS_WAIT);
  assign rd_req_valid = pn_owns ? pn_rd_valid : c_rd_valid;
  assign rd_req_addr  = pn_owns ? pn_rd_addr  : c_rd_addr;
  assign rd_req_beats = pn_owns ? pn_rd_beats : c_rd_beats;

  gmem_master u_gmem (
    .clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_beats, .rd_valid, .rd_data, .rd_last,
    .wr_req_valid, .wr_req_ready, .wr_req_addr, .wr_req_data, .wr_done,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid, .m_axi_wready,
    .m_axi_bresp, .m_axi_bvalid, .m_axi_bready);

  // ---------------- PointNet ----------------
  logic        pw_valid;
  logic [23:0] pw_addr;
  logic        pn_start, pn_busy, pn_done;
  logic [31:0] pn_cloud;
  pose_t       pn_g;
  fvec3_t      pn_mu;
  fx_t         pn_feat [K];

  pointnet #(.C1D(C1D), .C2D(C2D), .C3D(C3D), .B(B), .TR_PP(TR_PP), .CV_PP(CV_PP), .CV_PO(CV_PO),
             .Q1_PP(Q1_PP), .Q1_PO(Q1_PO), .QC1_PP(QC1_PP), .QC1_PO(QC1_PO), .Q2_PP(Q2_PP),
             .Q2_PO(Q2_PO), .QC2_PP(QC2_PP), .QC2_PO(QC2_PO), .MP_PP(MP_PP), .MP_PO(MP_PO),
             .BASE(0)) u_pointnet (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data(rd_data),
    .start(pn_start), .n_points(regs[1][15:0]), .cloud_addr(pn_cloud), .g(pn_g),
    .mu(pn_mu), .busy(pn_busy), .done(pn_done),
    .rd_req_valid(pn_rd_valid), .rd_req_ready, .rd_req_addr(pn_rd_addr),
    .rd_req_beats(pn_rd_beats), .rd_valid, .rd_data, .rd_last, .feat(pn_feat));

  // ---------------- Actor / Update ----------------
  fx_t        feat_t [K];
  logic       act_start, act_pset, act_busy, act_done;
  logic [3:0] labels [3];
  logic [3:0] a_t [3];
  actor #(.FD(K), .H1(H1), .H2(H2), .PO1(A_PO1), .PO2(A_PO2), .PO3(A_PO3), .BASE(PN_W)) u_actor (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data(rd_data), .start(act_start), .pset(act_pset),
    .feat_s(pn_feat), .feat_t(feat_t), .busy(act_busy), .done(act_done), .labels);

  logic  upd_start, upd_done;
  pose_t upd_g;
  pose_t g_cur;
  reagent_update #(.BASE(PN_W + ACT_W)) u_update (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data(rd_data), .start(upd_start),
    .a_t(a_t), .a_r(labels), .g_in(g_cur), .done(upd_done), .g_out(upd_g));

  // ---------------- controller ----------------
  logic [23:0] pw_left;
  logic [15:0] chunk_left;
  logic [1:0]  row;
  logic [31:0] it;

  assign pn_start     = (st == S_FT) || (st == S_FS);
  assign act_start    = (st == S_ACT_T) || (st == S_ACT_R);
  assign act_pset     = (st == S_ACT_R);
  assign upd_start    = (st == S_UPD);
  assign pw_valid     = (st == S_LOADP_DATA) && rd_valid;
  assign core_done    = (st == S_DONE);
  assign wr_req_valid = (st == S_WR);
  assign wr_req_addr  = regs[7] + it * 32'd48 + {26'd0, row, 4'd0};
  assign wr_req_data  = {g_cur[row][3], g_cur[row][2], g_cur[row][1], g_cur[row][0]};

  always_comb begin
    pn_cloud = regs[5];
    pn_g     = pose_identity();
    pn_mu    = '{FP_ZERO, FP_ZERO, FP_ZERO};
    if (st == S_FS || st == S_FS_WAIT) begin
      pn_cloud = regs[4];
      pn_g     = g_cur;
      pn_mu    = '{regs[11], regs[12], regs[13]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      c_rd_valid <= 1'b0; c_rd_addr <= '0; c_rd_beats <= '0;
      pw_addr <= '0; pw_left <= '0; chunk_left <= '0;
      row <= '0; it <= '0; iters <= '0;
      g_cur <= pose_identity();
      for (int a = 0; a < 3; a++) a_t[a] <= '0;
    end else begin
      if (c_rd_valid && rd_req_ready && !pn_owns) c_rd_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (ctl_start) st <= S_PREP;
        S_PREP: begin
          pw_addr <= '0;
          pw_left <= 24'(PWORDS);
          iters <= '0;
          it <= '0;
          st <= regs[0][3] ? S_LOADP_REQ : S_G0_REQ;
        end
        S_LOADP_REQ: if (!c_rd_valid && rd_req_ready) begin
          automatic logic [23:0] n = (pw_left > 24'(CHUNK)) ? 24'(CHUNK) : pw_left;
          c_rd_valid <= 1'b1;
          c_rd_addr  <= regs[3] + {4'd0, pw_addr, 4'd0};
          c_rd_beats <= 16'(n);
          chunk_left <= 16'(n);
          st <= S_LOADP_DATA;
        end
        S_LOADP_DATA: if (rd_valid) begin
          pw_addr <= pw_addr + 1'b1;
          pw_left <= pw_left - 1'b1;
          chunk_left <= chunk_left - 1'b1;
          if (chunk_left == 16'd1) st <= (pw_left == 24'd1) ? S_G0_REQ : S_LOADP_REQ;
        end
        S_G0_REQ: if (!c_rd_valid && rd_req_ready) begin
          c_rd_valid <= 1'b1;
          c_rd_addr  <= regs[6];
          c_rd_beats <= 16'd3;
          row <= '0;
          st <= S_G0_DATA;
        end
        S_G0_DATA: if (rd_valid) begin
          for (int c = 0; c < 4; c++) g_cur[row][c] <= rd_data[32*c +: 32];
          row <= row + 1'b1;
          if (rd_last) begin
            row <= '0;
            st <= S_FT;
          end
        end
        S_FT: st <= S_FT_WAIT;
        S_FT_WAIT: if (pn_done) begin
          feat_t <= pn_feat;
          st <= S_FS;
        end
        S_FS: st <= S_FS_WAIT;
        S_FS_WAIT: if (pn_done) st <= S_ACT_T;
        S_ACT_T: st <= S_ACT_T_WAIT;
        S_ACT_T_WAIT: if (act_done) begin
          a_t <= labels;
          st <= S_ACT_R;
        end
        S_ACT_R: st <= S_ACT_R_WAIT;
        S_ACT_R_WAIT: if (act_done) st <= S_UPD;
        S_UPD: st <= S_UPD_WAIT;
        S_UPD_WAIT: if (upd_done) begin
          g_cur <= upd_g;
          row <= '0;
          st <= S_WR;
        end
        S_WR: if (wr_req_ready) st <= S_WR_WAIT;
        S_WR_WAIT: if (wr_done) begin
          if (row == 2'd2) begin
            row <= '0;
            st <= S_CHK;
          end else begin
            row <= row + 1'b1;
            st <= S_WR;
          end
        end
        S_CHK: begin
          iters <= it + 1;
          if (it + 1 >= regs[2]) st <= S_DONE;
          else begin
            it <= it + 1;
            st <= S_FS;
          end
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
