// tb_pointnet: self-checking test of the tiled PointNet feature extractor.
//
// Builds a random parameter image for a reduced network (Conv(3,C1),
// Quant, QuantConv(C1,C2), Quant, QuantConv(C2,C3), MaxPool), loads it over
// the parameter bus, places a point cloud in the memory model and runs the
// pipeline, twice: with the identity pose and with a pose made of an axis
// permutation and a translation (exact in FP32, so the Transform stage adds no
// rounding and the result can be checked bit for bit). The reference here
// recomputes every layer per point with integer arithmetic and takes the
// channel-wise maximum. Point counts that are not a multiple of the tile size
// exercise the partial last tile. The run time is checked against the
// pipelined latency model (ntiles - 1) * max_s C_s + sum_s C_s: it must lie
// below the time of running the tiles one after another, which shows that
// the stages overlap.
module tb_pointnet;
  import pn_pkg::*;
  localparam int unsigned C1D = 8, C2D = 8, C3D = 16, B = 2;
  localparam int unsigned CV_PO = 4, QC1_PO = 4, QC2_PO = 8, MP_PO = 8;
  localparam int unsigned NW = pointnet_words(C1D, C2D, C3D);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic pw_valid = 1'b0;
  logic [23:0] pw_addr = '0;
  logic [127:0] pw_data = '0;
  logic [15:0] n_points = '0;
  logic [31:0] cloud_addr = '0;
  pose_t g;
  fvec3_t mu;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_last;
  logic [31:0] rd_req_addr;
  logic [15:0] rd_req_beats;
  logic [127:0] rd_data;
  logic wr_req_valid = 1'b0, wr_req_ready, wr_done;
  logic [31:0] wr_req_addr = '0;
  logic [127:0] wr_req_data = '0;
  fx_t feat [C3D];
  logic [31:0] m_axi_araddr, m_axi_awaddr;
  logic [7:0] m_axi_arlen, m_axi_awlen;
  logic [2:0] m_axi_arsize, m_axi_awsize;
  logic [1:0] m_axi_arburst, m_axi_awburst, m_axi_rresp, m_axi_bresp;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready;
  logic m_axi_bvalid, m_axi_bready;
  logic [127:0] m_axi_rdata, m_axi_wdata;
  logic [15:0] m_axi_wstrb;
  int checks = 0, failures = 0, overlap_seen = 0, partial_seen = 0;

  // network parameters
  fx_t cw [C1D][3], cb [C1D], s1 [C1D], h1 [C1D], s2 [C2D], h2 [C2D], s3 [C3D], h3 [C3D];
  logic signed [7:0] w1 [C2D][C1D], w2 [C3D][C2D];
  logic [7:0] lut [LUT_LEN];
  logic [127:0] img [NW];

  pointnet #(.C1D(C1D), .C2D(C2D), .C3D(C3D), .B(B), .CV_PO(CV_PO), .QC1_PO(QC1_PO),
             .QC2_PO(QC2_PO), .MP_PO(MP_PO)) dut (.*);
  gmem_master #(.MAX_BURST(16)) u_gm (.*);
  axi_mem_model #(.DEPTH(4096), .STALL(1'b1)) mem (
    .clk, .rst_n, .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arsize(m_axi_arsize),
    .arburst(m_axi_arburst), .arvalid(m_axi_arvalid), .arready(m_axi_arready), .rdata(m_axi_rdata),
    .rresp(m_axi_rresp), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid), .rready(m_axi_rready),
    .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awsize(m_axi_awsize), .awburst(m_axi_awburst),
    .awvalid(m_axi_awvalid), .awready(m_axi_awready), .wdata(m_axi_wdata), .wstrb(m_axi_wstrb),
    .wlast(m_axi_wlast), .wvalid(m_axi_wvalid), .wready(m_axi_wready), .bresp(m_axi_bresp),
    .bvalid(m_axi_bvalid), .bready(m_axi_bready));

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat32(input longint v);
    if (v > 64'sh7FFF_FFFF) return 64'sh7FFF_FFFF;
    if (v < -64'sh8000_0000) return -64'sh8000_0000;
    return v;
  endfunction
  function automatic int code_of(input longint v, input fx_t sc, input fx_t sh, input int frac);
    longint p, idx;
    p = v * longint'(sc);
    if (frac > 0) p = (p + 32768) >>> 16;
    p = p + longint'(sh);
    if (p < 0) p = 0;
    if (p > 64'sh7FFF_FFFF) p = 64'sh7FFF_FFFF;
    idx = (p + 32768) >>> 16;
    if (idx > LUT_LEN - 1) idx = LUT_LEN - 1;
    return int'(lut[idx]);
  endfunction

  // pack the parameter image in the layer order and layout of the extractor
  task automatic build_image();
    int a;
    a = 0;
    for (int i = 0; i < int'(NW); i++) img[i] = '0;
    for (int i = 0; i < int'(C1D * 3); i++) img[a + i / 4][32*(i % 4) +: 32] = cw[i / 3][i % 3];
    a += words_of(C1D * 3, 4);
    for (int i = 0; i < int'(C1D); i++) img[a + i / 4][32*(i % 4) +: 32] = cb[i];
    a += words_of(C1D, 4);
    for (int i = 0; i < int'(C1D); i++) img[a + i / 4][32*(i % 4) +: 32] = s1[i];
    a += words_of(C1D, 4);
    for (int i = 0; i < int'(C1D); i++) img[a + i / 4][32*(i % 4) +: 32] = h1[i];
    a += words_of(C1D, 4);
    for (int i = 0; i < int'(LUT_LEN); i++) img[a + i / 16][8*(i % 16) +: 8] = lut[i];
    a += words_of(LUT_LEN, 16);
    for (int i = 0; i < int'(C2D * C1D); i++) img[a + i / 16][8*(i % 16) +: 8] = w1[i / C1D][i % C1D];
    a += words_of(C2D * C1D, 16);
    for (int i = 0; i < int'(C2D); i++) img[a + i / 4][32*(i % 4) +: 32] = s2[i];
    a += words_of(C2D, 4);
    for (int i = 0; i < int'(C2D); i++) img[a + i / 4][32*(i % 4) +: 32] = h2[i];
    a += words_of(C2D, 4);
    for (int i = 0; i < int'(LUT_LEN); i++) img[a + i / 16][8*(i % 16) +: 8] = lut[i];
    a += words_of(LUT_LEN, 16);
    for (int i = 0; i < int'(C3D * C2D); i++) img[a + i / 16][8*(i % 16) +: 8] = w2[i / C2D][i % C2D];
    a += words_of(C3D * C2D, 16);
    for (int i = 0; i < int'(C3D); i++) img[a + i / 4][32*(i % 4) +: 32] = s3[i];
    a += words_of(C3D, 4);
    for (int i = 0; i < int'(C3D); i++) img[a + i / 4][32*(i % 4) +: 32] = h3[i];
    a += words_of(C3D, 4);
    if (a != int'(NW)) $display("image size %0d vs %0d", a, NW);
  endtask

  initial begin
    longint expf [C3D];
    for (int i = 0; i < int'(LUT_LEN); i++) lut[i] = 8'((i + 4) / 9);
    for (int c = 0; c < int'(C1D); c++) begin
      for (int j = 0; j < 3; j++) cw[c][j] = $signed(32'($urandom % 131072)) - 32'sd65536;
      cb[c] = $signed(32'($urandom % 65536)) - 32'sd32768;
      s1[c] = 32'sd37000000 + $signed(32'($urandom % 2000000));
      h1[c] = $signed(32'($urandom % 4000000)) - 32'sd1000000;
      for (int k = 0; k < int'(C2D); k++) w1[k][c] = 8'($urandom);
    end
    for (int c = 0; c < int'(C2D); c++) begin
      s2[c] = 32'sd800 + $signed(32'($urandom % 1200));
      h2[c] = $signed(32'($urandom % 60000000)) - 32'sd10000000;
      for (int k = 0; k < int'(C3D); k++) w2[k][c] = 8'($urandom);
    end
    for (int c = 0; c < int'(C3D); c++) begin
      s3[c] = 32'sd1 + $signed(32'($urandom % 300));
      h3[c] = $signed(32'($urandom % 2000000)) - 32'sd1000000;
    end
    build_image();
    for (int i = 0; i < 4096; i++) mem.mem[i] = '0;
    // points: coordinates k/256 in [-2, 2), exact in both FP32 and Q16.16
    for (int p = 0; p < 64; p++) for (int i = 0; i < 3; i++)
      mem.mem[1024 + p][32*i +: 32] = int_to_fp(64'(int'($urandom % 1024) - 512), 8);
    g = pose_identity();
    for (int i = 0; i < 3; i++) mu[i] = FP_ZERO;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < int'(NW); i++) begin
      @(negedge clk);
      pw_valid = 1'b1; pw_addr = 24'(i); pw_data = img[i];
    end
    @(negedge clk);
    pw_valid = 1'b0;
    for (int run = 0; run < 3; run++) begin
      int np, cyc, nt, serial;
      np = (run == 0) ? 7 : ((run == 1) ? 1 : 20);
      if (run == 2) begin
        // rows permuted: x' = z + 0.5, y' = x - 0.25, z' = -y
        for (int i = 0; i < 3; i++) for (int j = 0; j < 4; j++) g[i][j] = FP_ZERO;
        g[0][2] = FP_ONE; g[1][0] = FP_ONE; g[2][1] = 32'hBF80_0000;
        g[0][3] = 32'h3F00_0000; g[1][3] = 32'hBE80_0000;
      end
      for (int c = 0; c < int'(C3D); c++) expf[c] = -64'sd2147483648;
      for (int p = 0; p < np; p++) begin
        longint x0 [3], y1, z;
        int q1 [C1D], q2 [C2D];
        for (int i = 0; i < 3; i++) x0[i] = longint'(fp_to_fx(mem.mem[1024 + p][32*i +: 32]));
        if (run == 2) begin
          longint t0, t1, t2;
          t0 = x0[2] + 32768; t1 = x0[0] - 16384; t2 = -x0[1];
          x0[0] = t0; x0[1] = t1; x0[2] = t2;
        end
        for (int c = 0; c < int'(C1D); c++) begin
          y1 = longint'(cb[c]) <<< 16;
          for (int j = 0; j < 3; j++) y1 += x0[j] * longint'(cw[c][j]);
          y1 = sat32((y1 + 32768) >>> 16);
          q1[c] = code_of(y1, s1[c], h1[c], 16);
        end
        for (int c = 0; c < int'(C2D); c++) begin
          z = 0;
          for (int j = 0; j < int'(C1D); j++) z += longint'(q1[j]) * longint'(w1[c][j]);
          q2[c] = code_of(z, s2[c], h2[c], 0);
        end
        for (int c = 0; c < int'(C3D); c++) begin
          z = 0;
          for (int j = 0; j < int'(C2D); j++) z += longint'(q2[j]) * longint'(w2[c][j]);
          z = z * longint'(s3[c]) + longint'(h3[c]);
          if (z < 0) z = 0;
          if (z > 64'sh7FFF_FFFF) z = 64'sh7FFF_FFFF;
          if (z > expf[c]) expf[c] = z;
        end
      end
      @(negedge clk);
      start = 1'b1; n_points = 16'(np); cloud_addr = 32'(1024 * 16);
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int c = 0; c < int'(C3D); c++) begin
        checks++;
        if (longint'(feat[c]) != expf[c]) begin
          failures++;
          if (failures < 10) $display("run %0d feature %0d: %h vs %h", run, c, feat[c], expf[c]);
        end
      end
      if (run == 2) $display("features %h %h %h %h", feat[0], feat[1], feat[2], feat[3]);
      // latency: compute stages per tile (Read takes B beats plus memory latency)
      nt = (np + int'(B) - 1) / int'(B);
      serial = nt * (int'(B) + 1 + int'(B) + int'(B) * ((C1D + CV_PO - 1) / CV_PO) * 3 + int'(B) * C1D
               + int'(B) * ((C2D + QC1_PO - 1) / QC1_PO) * C1D + int'(B) * C2D
               + int'(B) * ((C3D + QC2_PO - 1) / QC2_PO) * C2D + int'(B) * ((C3D + MP_PO - 1) / MP_PO));
      $display("run %0d: %0d points, %0d cycles (tiles one after another: at least %0d)", run, np, cyc, serial);
      if (np % int'(B) != 0) partial_seen++;
      if (nt > 2 && cyc < serial) overlap_seen++;
    end
    checks++;
    if (overlap_seen == 0) begin failures++; $display("stages never overlapped"); end
    checks++;
    if (partial_seen == 0) begin failures++; $display("no partial tile"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
