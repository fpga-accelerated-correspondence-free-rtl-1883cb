// pointlk_core: PointLKCore, the PointNetLK registration accelerator.
//
// Runs Alg. 1 (inverse-compositional Lucas-Kanade on PointNet features) on
// chip. After an optional parameter load it
//   1. reads the initial pose G0 (three 128-bit words) from G0_ADDR,
//   2. extracts the template feature phi(P_T),
//   3. builds the K x 6 Jacobian column by column from perturbed template
//      features (Perturb + PointNet). JAC_MODE selects the central difference
//      (12 extractions, J_j = (phi(dG_j^- P_T) - phi(dG_j^+ P_T)) / 2t), the
//      backward difference (J_j = (phi(dG_j^- P_T) - phi(P_T)) / t) or the
//      forward difference (J_j = (phi(P_T) - phi(dG_j^+ P_T)) / t),
//   4. computes J^+ (PInv),
//   5. iterates: phi(G_{i-1} P_S), dxi = J^+ (phi_S - phi_T), G_i =
//      exp(dxi) G_{i-1} (Exp), writes G_i to OUT_ADDR + 48 i, and stops when
//      |dxi|^2 < eps^2 or after I_MAX iterations.
// The forward-difference formula and comparing the squared norm are this
// design's choices; the paper names the three modes and the |dxi| < eps test.
//
// Register map (32-bit words of s_axi_control): 0 control (bit0 start, bit1
// done, bit2 idle, bit3 load parameters), 1 N points, 2 I_MAX, 3 parameter
// image address, 4 source cloud address, 5 template cloud address, 6 G0
// address, 7 output address, 8 JAC_MODE (0 central, 1 forward, 2 backward),
// 9 step t (FP32), 10 eps (FP32), 15 iterations run (read only).
// Features are Q16.16; the Jacobian, J^+, twists and poses are FP32.
module pointlk_core
  import pn_pkg::*;
#(
  parameter int unsigned C1D    = C1,
  parameter int unsigned C2D    = C2,
  parameter int unsigned C3D    = FEAT_DIM,
  parameter int unsigned B      = 2,
  parameter int unsigned TR_PP  = 1,
  parameter int unsigned CV_PP  = 2,
  parameter int unsigned CV_PO  = 4,
  parameter int unsigned Q1_PP  = 1,
  parameter int unsigned Q1_PO  = 1,
  parameter int unsigned QC1_PP = 2,
  parameter int unsigned QC1_PO = 64,
  parameter int unsigned Q2_PP  = 1,
  parameter int unsigned Q2_PO  = 1,
  parameter int unsigned QC2_PP = 2,
  parameter int unsigned QC2_PO = 512,
  parameter int unsigned MP_PP  = 1,
  parameter int unsigned MP_PO  = 8
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
  localparam int unsigned K     = C3D;
  localparam int unsigned PWORDS = pointnet_words(C1D, C2D, C3D);
  localparam int unsigned CHUNK = 4096;

  typedef enum logic [4:0] {
    S_IDLE, S_PREP, S_LOADP_REQ, S_LOADP_DATA, S_G0_REQ, S_G0_DATA,
    S_FT, S_FT_WAIT, S_JAC_START, S_JAC_WAIT, S_JCOL, S_PINV, S_PINV_WAIT,
    S_FS, S_FS_WAIT, S_SOLVE, S_EXP, S_EXP_WAIT, S_UPD, S_WR, S_WR_WAIT, S_CHK, S_DONE
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

  assign pn_owns      = (st == S_FT_WAIT) || (st == S_JAC_WAIT) || (st == S_FS_WAIT);
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
  fx_t         pn_feat [K];

  pointnet #(.C1D(C1D), .C2D(C2D), .C3D(C3D), .B(B), .TR_PP(TR_PP), .CV_PP(CV_PP), .CV_PO(CV_PO),
             .Q1_PP(Q1_PP), .Q1_PO(Q1_PO), .QC1_PP(QC1_PP), .QC1_PO(QC1_PO), .Q2_PP(Q2_PP),
             .Q2_PO(Q2_PO), .QC2_PP(QC2_PP), .QC2_PO(QC2_PO), .MP_PP(MP_PP), .MP_PO(MP_PO),
             .BASE(0)) u_pointnet (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data(rd_data),
    .start(pn_start), .n_points(regs[1][15:0]), .cloud_addr(pn_cloud), .g(pn_g),
    .mu('{FP_ZERO, FP_ZERO, FP_ZERO}), .busy(pn_busy), .done(pn_done),
    .rd_req_valid(pn_rd_valid), .rd_req_ready, .rd_req_addr(pn_rd_addr),
    .rd_req_beats(pn_rd_beats), .rd_valid, .rd_data, .rd_last, .feat(pn_feat));

  // ---------------- Perturb / PInv / Exp ----------------
  logic [2:0] jj;
  logic       jneg;
  pose_t      dg;
  perturb u_perturb (.j(jj), .neg(jneg), .t(regs[9]), .dg);

  fp_t  jac [6][K];
  fp_t  jp  [6][K];
  logic pinv_start, pinv_busy, pinv_done;
  pinv #(.K(K)) u_pinv (.clk, .rst_n, .start(pinv_start), .busy(pinv_busy), .done(pinv_done),
                        .jac(jac), .jpinv(jp));

  logic [5:0][31:0] dxi;
  logic  exp_start, exp_done;
  pose_t exp_g;
  se3_exp u_exp (.clk, .rst_n, .start(exp_start), .xi(dxi), .done(exp_done), .g(exp_g));

  // ---------------- controller ----------------
  fx_t       feat_t [K];
  fx_t       feat_p [K];
  pose_t     g_cur;
  fp_t       inv_t, inv_2t, eps2;
  jac_mode_e mode;
  logic [23:0] pw_left;
  logic [15:0] chunk_left;
  logic [1:0]  row;
  logic [$clog2(K+1)-1:0] k;
  logic [31:0] it;

  assign pn_start   = (st == S_FT) || (st == S_JAC_START) || (st == S_FS);
  assign pinv_start = (st == S_PINV);
  assign exp_start  = (st == S_EXP);
  assign pw_valid   = (st == S_LOADP_DATA) && rd_valid;
  assign core_done  = (st == S_DONE);
  assign wr_req_valid = (st == S_WR);
  assign wr_req_addr  = regs[7] + it * 32'd48 + {26'd0, row, 4'd0};
  assign wr_req_data  = {32'd0, g_cur[row][2], g_cur[row][1], g_cur[row][0]} | {g_cur[row][3], 96'd0};

  always_comb begin
    pn_cloud = regs[5];
    pn_g     = pose_identity();
    if (st == S_JAC_START || st == S_JAC_WAIT) pn_g = dg;
    if (st == S_FS || st == S_FS_WAIT) begin
      pn_cloud = regs[4];
      pn_g     = g_cur;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      c_rd_valid <= 1'b0; c_rd_addr <= '0; c_rd_beats <= '0;
      pw_addr <= '0; pw_left <= '0; chunk_left <= '0;
      row <= '0; k <= '0; it <= '0; iters <= '0;
      jj <= '0; jneg <= 1'b0;
      g_cur <= pose_identity();
      inv_t <= FP_ZERO; inv_2t <= FP_ZERO; eps2 <= FP_ZERO;
      mode <= JAC_CENTRAL;
      dxi <= '0;
    end else begin
      if (c_rd_valid && rd_req_ready && !pn_owns) c_rd_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (ctl_start) st <= S_PREP;
        S_PREP: begin
          inv_t  <= fp_div(FP_ONE, regs[9]);
          inv_2t <= fp_div(FP_ONE, fp_add(regs[9], regs[9]));
          eps2   <= fp_mul(regs[10], regs[10]);
          mode   <= jac_mode_e'(regs[8][1:0]);
          pw_addr <= '0;
          pw_left <= 24'(PWORDS);
          iters <= '0;
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
          jj <= '0;
          jneg <= (mode == JAC_BACKWARD);
          st <= S_JAC_START;
        end
        S_JAC_START: st <= S_JAC_WAIT;
        S_JAC_WAIT: if (pn_done) begin
          if (mode == JAC_CENTRAL && !jneg) begin
            feat_p <= pn_feat;           // phi(dG_j^+ P_T); now extract dG_j^-
            jneg <= 1'b1;
            st <= S_JAC_START;
          end else begin
            k <= '0;
            st <= S_JCOL;
          end
        end
        S_JCOL: begin
          automatic logic signed [63:0] d;
          automatic fp_t sc;
          unique case (mode)
            JAC_CENTRAL: begin d = 64'(pn_feat[k]) - 64'(feat_p[k]); sc = inv_2t; end
            JAC_FORWARD: begin d = 64'(feat_t[k]) - 64'(pn_feat[k]); sc = inv_t;  end
            default:     begin d = 64'(pn_feat[k]) - 64'(feat_t[k]); sc = inv_t;  end
          endcase
          jac[jj][k] <= fp_mul(int_to_fp(d, FX_FRAC), sc);
          if (int'(k) == K - 1) begin
            k <= '0;
            if (jj == 3'd5) st <= S_PINV;
            else begin
              jj <= jj + 1'b1;
              jneg <= (mode == JAC_BACKWARD);
              st <= S_JAC_START;
            end
          end else k <= k + 1'b1;
        end
        S_PINV: st <= S_PINV_WAIT;
        S_PINV_WAIT: if (pinv_done) begin
          it <= '0;
          st <= S_FS;
        end
        S_FS: st <= S_FS_WAIT;
        S_FS_WAIT: if (pn_done) begin
          k <= '0;
          dxi <= '0;
          st <= S_SOLVE;
        end
        S_SOLVE: begin
          automatic fp_t r = int_to_fp(64'(pn_feat[k]) - 64'(feat_t[k]), FX_FRAC);
          for (int a = 0; a < 6; a++) dxi[a] <= fp_add(dxi[a], fp_mul(jp[a][k], r));
          if (int'(k) == K - 1) st <= S_EXP;
          else k <= k + 1'b1;
        end
        S_EXP: st <= S_EXP_WAIT;
        S_EXP_WAIT: if (exp_done) st <= S_UPD;
        S_UPD: begin
          g_cur <= pose_mul(exp_g, g_cur);
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
          automatic fp_t n2 = FP_ZERO;
          for (int a = 0; a < 6; a++) n2 = fp_add(n2, fp_mul(dxi[a], dxi[a]));
          iters <= it + 1;
          if (fp_abs_lt(n2, eps2) || it + 1 >= regs[2]) st <= S_DONE;
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
