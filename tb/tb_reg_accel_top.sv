// tb_reg_accel_top: end-to-end test of the whole design.
//
// Both cores (reduced widths) share the memory model through the top's
// arbiter and are controlled through the shared AXI-Lite port. The test runs
// PointLKCore three times (central, forward and backward Jacobians; one run
// that converges by eps and two that stop at I_MAX) while ReAgentCore runs
// concurrently, and checks iteration counts, poses and interrupts. It counts
// each mechanism of the design and fails on any that never happened:
// parameter load on each core, the two ways LK stops, each Jacobian mode,
// partial last tiles, overlap of pipeline stages, memory wait states, both
// cores requesting the memory port in the same cycle (arbitration), bursts cut
// at a 4 KB boundary, and register accesses to both cores.
module tb_reg_accel_top;
  import pn_pkg::*;
  localparam int unsigned C1D = 16, C2D = 16, C3D = 32, H1 = 8, H2 = 8;
  localparam int unsigned LK_W = pointnet_words(C1D, C2D, C3D);
  localparam int unsigned RA_W = pointnet_words(C1D, C2D, C3D) + 2 * (quant_words(2 * C3D) + qconv_words(2 * C3D, H1)
                               + quant_words(H1) + qconv_words(H1, H2) + affine_words(H2) + conv_words(H2, 3 * N_LABEL))
                               + words_of(3 * N_LABEL, 4);
  localparam int LK_P = 3, RA_P = LK_P + int'(LK_W) + 5;
  localparam int SRC = RA_P + int'(RA_W) + 8, TMPL = SRC + 64, G0 = TMPL + 64, OUT_LK = G0 + 8, OUT_RA = OUT_LK + 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic irq_lk, irq_ra;
  logic [8:0] s_axi_control_awaddr = '0;
  logic  s_axi_control_awvalid = '0;
  logic  s_axi_control_awready;
  logic [31:0] s_axi_control_wdata = '0;
  logic [3:0] s_axi_control_wstrb = '0;
  logic  s_axi_control_wvalid = '0;
  logic  s_axi_control_wready;
  logic [1:0] s_axi_control_bresp;
  logic  s_axi_control_bvalid;
  logic  s_axi_control_bready = '0;
  logic [8:0] s_axi_control_araddr = '0;
  logic  s_axi_control_arvalid = '0;
  logic  s_axi_control_arready;
  logic [31:0] s_axi_control_rdata;
  logic [1:0] s_axi_control_rresp;
  logic  s_axi_control_rvalid;
  logic  s_axi_control_rready = '0;
  logic [31:0] m_axi_gmem_araddr;
  logic [7:0] m_axi_gmem_arlen;
  logic [2:0] m_axi_gmem_arsize;
  logic [1:0] m_axi_gmem_arburst;
  logic  m_axi_gmem_arvalid;
  logic  m_axi_gmem_arready;
  logic [127:0] m_axi_gmem_rdata;
  logic [1:0] m_axi_gmem_rresp;
  logic  m_axi_gmem_rlast;
  logic  m_axi_gmem_rvalid;
  logic  m_axi_gmem_rready;
  logic [31:0] m_axi_gmem_awaddr;
  logic [7:0] m_axi_gmem_awlen;
  logic [2:0] m_axi_gmem_awsize;
  logic [1:0] m_axi_gmem_awburst;
  logic  m_axi_gmem_awvalid;
  logic  m_axi_gmem_awready;
  logic [127:0] m_axi_gmem_wdata;
  logic [15:0] m_axi_gmem_wstrb;
  logic  m_axi_gmem_wlast;
  logic  m_axi_gmem_wvalid;
  logic  m_axi_gmem_wready;
  logic [1:0] m_axi_gmem_bresp;
  logic  m_axi_gmem_bvalid;
  logic  m_axi_gmem_bready;
  int checks = 0, failures = 0;
  // binary32 <-> real conversions, written out so the checks do not rely on shortreal
  function automatic real f2r(input logic [31:0] b);
    real m;
    if (b[30:23] == 8'd0) return 0.0;
    m = (1.0 + real'(b[22:0]) / 8388608.0) * $pow(2.0, real'(int'(b[30:23]) - 127));
    return b[31] ? -m : m;
  endfunction
  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [24:0] m;
    int e;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'd0 || e <= 0) return 32'd0;
    m = {2'b01, d[51:29]} + 25'(d[28]);
    if (m[24]) begin m = m >> 1; e++; end
    return {d[63], 8'(e), m[22:0]};
  endfunction


  reg_accel_top #(.C1D(C1D), .C2D(C2D), .C3D(C3D), .H1(H1), .H2(H2)) dut (.ap_clk(clk), .ap_rst_n(rst_n), .s_axi_control_awaddr(s_axi_control_awaddr), .s_axi_control_awvalid(s_axi_control_awvalid), .s_axi_control_awready(s_axi_control_awready), .s_axi_control_wdata(s_axi_control_wdata), .s_axi_control_wstrb(s_axi_control_wstrb), .s_axi_control_wvalid(s_axi_control_wvalid), .s_axi_control_wready(s_axi_control_wready), .s_axi_control_bresp(s_axi_control_bresp), .s_axi_control_bvalid(s_axi_control_bvalid), .s_axi_control_bready(s_axi_control_bready), .s_axi_control_araddr(s_axi_control_araddr), .s_axi_control_arvalid(s_axi_control_arvalid), .s_axi_control_arready(s_axi_control_arready), .s_axi_control_rdata(s_axi_control_rdata), .s_axi_control_rresp(s_axi_control_rresp), .s_axi_control_rvalid(s_axi_control_rvalid), .s_axi_control_rready(s_axi_control_rready), .m_axi_gmem_araddr(m_axi_gmem_araddr), .m_axi_gmem_arlen(m_axi_gmem_arlen), .m_axi_gmem_arsize(m_axi_gmem_arsize), .m_axi_gmem_arburst(m_axi_gmem_arburst), .m_axi_gmem_arvalid(m_axi_gmem_arvalid), .m_axi_gmem_arready(m_axi_gmem_arready), .m_axi_gmem_rdata(m_axi_gmem_rdata), .m_axi_gmem_rresp(m_axi_gmem_rresp), .m_axi_gmem_rlast(m_axi_gmem_rlast), .m_axi_gmem_rvalid(m_axi_gmem_rvalid), .m_axi_gmem_rready(m_axi_gmem_rready), .m_axi_gmem_awaddr(m_axi_gmem_awaddr), .m_axi_gmem_awlen(m_axi_gmem_awlen), .m_axi_gmem_awsize(m_axi_gmem_awsize), .m_axi_gmem_awburst(m_axi_gmem_awburst), .m_axi_gmem_awvalid(m_axi_gmem_awvalid), .m_axi_gmem_awready(m_axi_gmem_awready), .m_axi_gmem_wdata(m_axi_gmem_wdata), .m_axi_gmem_wstrb(m_axi_gmem_wstrb), .m_axi_gmem_wlast(m_axi_gmem_wlast), .m_axi_gmem_wvalid(m_axi_gmem_wvalid), .m_axi_gmem_wready(m_axi_gmem_wready), .m_axi_gmem_bresp(m_axi_gmem_bresp), .m_axi_gmem_bvalid(m_axi_gmem_bvalid), .m_axi_gmem_bready(m_axi_gmem_bready), .irq_lk, .irq_ra);
  axi_mem_model #(.DEPTH(32768), .STALL(1'b1)) mem (.clk, .rst_n, .araddr(m_axi_gmem_araddr), .arlen(m_axi_gmem_arlen), .arsize(m_axi_gmem_arsize), .arburst(m_axi_gmem_arburst), .arvalid(m_axi_gmem_arvalid), .arready(m_axi_gmem_arready), .rdata(m_axi_gmem_rdata), .rresp(m_axi_gmem_rresp), .rlast(m_axi_gmem_rlast), .rvalid(m_axi_gmem_rvalid), .rready(m_axi_gmem_rready), .awaddr(m_axi_gmem_awaddr), .awlen(m_axi_gmem_awlen), .awsize(m_axi_gmem_awsize), .awburst(m_axi_gmem_awburst), .awvalid(m_axi_gmem_awvalid), .awready(m_axi_gmem_awready), .wdata(m_axi_gmem_wdata), .wstrb(m_axi_gmem_wstrb), .wlast(m_axi_gmem_wlast), .wvalid(m_axi_gmem_wvalid), .wready(m_axi_gmem_wready), .bresp(m_axi_gmem_bresp), .bvalid(m_axi_gmem_bvalid), .bready(m_axi_gmem_bready));

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int irqs_lk = 0, irqs_ra = 0, contention = 0, cut_4k = 0, overlap = 0, lk_ctl = 0, ra_ctl = 0;
  always @(negedge clk) begin
    if (irq_lk) irqs_lk++;
    if (irq_ra) irqs_ra++;
    if (dut.lk_m_arvalid && dut.ra_m_arvalid) contention++;
    if (m_axi_gmem_arvalid && m_axi_gmem_arready && m_axi_gmem_arlen != 8'd15
        && (((m_axi_gmem_araddr >> 4) + 32'(m_axi_gmem_arlen) + 1) % 256) == 0) cut_4k++;
    if ($countones(dut.u_lk.u_pointnet.s_busy) > 1 || $countones(dut.u_ra.u_pointnet.s_busy) > 1) overlap++;
    if (dut.lk_s_awvalid && dut.lk_s_awready) lk_ctl++;
    if (dut.ra_s_awvalid && dut.ra_s_awready) ra_ctl++;
  end

  always #5 clk = ~clk;

  task automatic reg_write(input int core, input int r, input logic [31:0] d);
    @(negedge clk);
    s_axi_control_awaddr = 9'(core * 256 + r * 4); s_axi_control_awvalid = 1'b1; s_axi_control_wdata = d; s_axi_control_wstrb = 4'hF;
    s_axi_control_wvalid = 1'b1; s_axi_control_bready = 1'b1;
    #1;
    while (!(s_axi_control_awready && s_axi_control_wready)) @(negedge clk);
    @(negedge clk);
    s_axi_control_awvalid = 1'b0; s_axi_control_wvalid = 1'b0;
    while (!s_axi_control_bvalid) @(negedge clk);
    @(negedge clk);
    s_axi_control_bready = 1'b0;
  endtask

  task automatic reg_read(input int core, input int r, output logic [31:0] d);
    @(negedge clk);
    s_axi_control_araddr = 9'(core * 256 + r * 4); s_axi_control_arvalid = 1'b1; s_axi_control_rready = 1'b1;
    #1;
    while (!s_axi_control_arready) @(negedge clk);
    @(negedge clk);
    s_axi_control_arvalid = 1'b0;
    while (!s_axi_control_rvalid) @(negedge clk);
    d = s_axi_control_rdata;
    @(negedge clk);
    s_axi_control_rready = 1'b0;
  endtask

  // ---- parameter image generation (layer order and layouts of the extractor) ----
  logic [7:0] lutv [LUT_LEN];
  task automatic put32(input int base, input int i, input logic [31:0] v);
    mem.mem[base + i / 4][32*(i % 4) +: 32] = v;
  endtask
  task automatic put8(input int base, input int i, input logic [7:0] v);
    mem.mem[base + i / 16][8*(i % 16) +: 8] = v;
  endtask
  // Quant(n) after a Q16.16 layer (frac 16) or after integer sums (frac 0)
  task automatic gen_quant(input int a, input int n, input int frac);
    for (int c = 0; c < n; c++) begin
      put32(a, c, frac ? 32'(37000000 + $urandom % 2000000) : 32'(400 + $urandom % 600));
      put32(a + words_of(n, 4), c, frac ? 32'(int'($urandom % 4000000) - 1000000) : 32'(int'($urandom % 60000000) - 10000000));
    end
    for (int i = 0; i < int'(LUT_LEN); i++) put8(a + 2 * words_of(n, 4), i, lutv[i]);
  endtask
  task automatic gen_qconv(input int a, input int m, input int n);
    for (int i = 0; i < m * n; i++) put8(a, i, 8'($urandom));
  endtask
  task automatic gen_affine(input int a, input int n, input int sc_max, input int sh_rng);
    for (int c = 0; c < n; c++) begin
      put32(a, c, 32'(1 + $urandom % sc_max));
      put32(a + words_of(n, 4), c, 32'(int'($urandom % (2 * sh_rng)) - sh_rng));
    end
  endtask
  task automatic gen_conv(input int a, input int m, input int n);
    for (int i = 0; i < m * n; i++) put32(a, i, 32'(int'($urandom % 131072) - 65536));
    for (int o = 0; o < n; o++) put32(a + words_of(m * n, 4), o, 32'(int'($urandom % 65536) - 32768));
  endtask
  task automatic gen_pointnet(input int a, input int c1, input int c2, input int c3);
    for (int i = 0; i < int'(LUT_LEN); i++) lutv[i] = 8'((i + 4) / 9);
    gen_conv(a, 3, c1);        a += conv_words(3, c1);
    gen_quant(a, c1, 16);      a += quant_words(c1);
    gen_qconv(a, c1, c2);      a += qconv_words(c1, c2);
    gen_quant(a, c2, 0);       a += quant_words(c2);
    gen_qconv(a, c2, c3);      a += qconv_words(c2, c3);
    gen_affine(a, c3, 300, 1000000);
  endtask
  // actor: every layer holds the translation set, then the rotation set
  task automatic gen_actor(input int a, input int k, input int h1, input int h2);
    for (int s = 0; s < 2; s++) begin gen_quant(a, 2 * k, 16); a += quant_words(2 * k); end
    for (int s = 0; s < 2; s++) begin gen_qconv(a, 2 * k, h1); a += qconv_words(2 * k, h1); end
    for (int s = 0; s < 2; s++) begin gen_quant(a, h1, 0); a += quant_words(h1); end
    for (int s = 0; s < 2; s++) begin gen_qconv(a, h1, h2); a += qconv_words(h1, h2); end
    for (int s = 0; s < 2; s++) begin gen_affine(a, h2, 3, 10000); a += affine_words(h2); end
    for (int s = 0; s < 2; s++) begin gen_conv(a, h2, 3 * N_LABEL); a += conv_words(h2, 3 * N_LABEL); end
  endtask
  // step table T(a) = sign(a - 5) 3^|a-5| / 900 with its sine and cosine
  real stp [N_LABEL];
  task automatic gen_table(input int a);
    for (int l = 0; l < int'(N_LABEL); l++) begin
      int d;
      d = l - int'(N_ACT);
      stp[l] = (d == 0) ? 0.0 : ((d > 0) ? 1.0 : -1.0) * $pow(3.0, real'(d < 0 ? -d : d)) / 900.0;
      put32(a, 3 * l, r2f(stp[l])); put32(a, 3 * l + 1, r2f($sin(stp[l]))); put32(a, 3 * l + 2, r2f($cos(stp[l])));
    end
  endtask
  // point cloud: coordinates k/256 in [-1, 1)
  task automatic gen_cloud(input int a, input int n);
    for (int p = 0; p < n; p++) begin
      mem.mem[a + p] = '0;
      for (int i = 0; i < 3; i++) mem.mem[a + p][32*i +: 32] = r2f(real'(int'($urandom % 512) - 256) / 256.0);
    end
  endtask
  task automatic put_pose_identity(input int a);
    for (int r = 0; r < 3; r++) begin
      mem.mem[a + r] = '0;
      mem.mem[a + r][32*r +: 32] = 32'h3F80_0000;
    end
  endtask
  // |R R^T - I| below tol for the pose stored at word a
  function automatic bit pose_ok(input int a, input real tol);
    real r [3][3];
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) r[i][j] = f2r(mem.mem[a + i][32*j +: 32]);
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
      real s;
      s = r[i][0] * r[j][0] + r[i][1] * r[j][1] + r[i][2] * r[j][2] - ((i == j) ? 1.0 : 0.0);
      if (s > tol || s < -tol) return 1'b0;
    end
    return 1'b1;
  endfunction
  function automatic bit pose_is_identity(input int a);
    for (int i = 0; i < 3; i++) for (int j = 0; j < 4; j++)
      if (mem.mem[a + i][32*j +: 32] != ((i == j) ? 32'h3F80_0000 : 32'h0)) return 1'b0;
    return 1'b1;
  endfunction
  // translation step of pose b over pose a on axis i is one of the table steps
  function automatic bit step_ok(input int a, input int b, input int i);
    real d;
    d = f2r(mem.mem[b + i][96 +: 32]) - f2r(mem.mem[a + i][96 +: 32]);
    for (int l = 0; l < int'(N_LABEL); l++) if (d - stp[l] < 1e-5 && stp[l] - d < 1e-5) return 1'b1;
    return 1'b0;
  endfunction

  task automatic wait_irq(input int which, input int limit);
    int n;
    n = 0;
    while (!(which == 0 ? irq_lk : irq_ra) && n < limit) begin @(negedge clk); n++; end
    if (n >= limit) begin failures++; $display("core %0d did not finish", which); end
  endtask

  task automatic start_lk(input int n, input int imax, input int mode, input logic [31:0] eps, input int src, input bit load);
    reg_write(0, 1, 32'(n)); reg_write(0, 2, 32'(imax)); reg_write(0, 3, 32'(LK_P * 16));
    reg_write(0, 4, 32'(src * 16)); reg_write(0, 5, 32'(TMPL * 16)); reg_write(0, 6, 32'(G0 * 16));
    reg_write(0, 7, 32'(OUT_LK * 16)); reg_write(0, 8, 32'(mode)); reg_write(0, 9, 32'h3D4C_CCCD);
    reg_write(0, 10, eps);
    reg_write(0, 0, load ? 32'h9 : 32'h1);
  endtask
  task automatic start_ra(input int n, input int imax, input bit load);
    reg_write(1, 1, 32'(n)); reg_write(1, 2, 32'(imax)); reg_write(1, 3, 32'(RA_P * 16));
    reg_write(1, 4, 32'(SRC * 16)); reg_write(1, 5, 32'(TMPL * 16)); reg_write(1, 6, 32'(G0 * 16));
    reg_write(1, 7, 32'(OUT_RA * 16));
    reg_write(1, 11, 32'h3D80_0000); reg_write(1, 12, 32'hBD80_0000); reg_write(1, 13, 32'h0);
    reg_write(1, 0, load ? 32'h9 : 32'h1);
  endtask
  function automatic int iters_of(input int core);
    return int'(core == 0 ? dut.u_lk.iters : dut.u_ra.iters);
  endfunction

  int converged = 0, hit_imax = 0, modes = 0, partial = 0, loads = 0;
  initial begin
    logic [31:0] d;
    int it;
    for (int i = 0; i < 32768; i++) mem.mem[i] = '0;
    gen_pointnet(LK_P, C1D, C2D, C3D);
    gen_pointnet(RA_P, C1D, C2D, C3D);
    gen_actor(RA_P + pointnet_words(C1D, C2D, C3D), C3D, H1, H2);
    gen_table(RA_P + RA_W - words_of(3 * N_LABEL, 4));
    gen_cloud(SRC, 64); gen_cloud(TMPL, 64);
    put_pose_identity(G0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // run 1: both cores load parameters; LK with identical clouds converges at once
    start_lk(7, 5, 0, 32'h33D6_BF95, TMPL, 1'b1);
    start_ra(17, 3, 1'b1);
    loads += 2; modes++; partial++;
    fork
      wait_irq(0, 3000000);
      wait_irq(1, 3000000);
    join
    it = iters_of(0);
    checks++;
    if (it != 1) begin failures++; $display("LK identical clouds: %0d iterations", it); end else converged++;
    checks++;
    if (!pose_is_identity(OUT_LK)) begin failures++; $display("LK identical clouds: pose moved"); end
    it = iters_of(1);
    checks++;
    if (it != 3) begin failures++; $display("ReAgent: %0d iterations", it); end
    for (int k = 0; k < 3; k++) for (int i = 0; i < 3; i++) begin
      checks++;
      if (!step_ok(k == 0 ? G0 : OUT_RA + 3 * (k - 1), OUT_RA + 3 * k, i)) begin failures++; $display("ReAgent step %0d wrong", k); end
    end
    // run 2: forward differences, eps 0, while ReAgent runs again
    start_lk(16, 3, 1, 32'h0, SRC, 1'b0);
    start_ra(9, 2, 1'b0);
    modes++;
    fork
      wait_irq(0, 3000000);
      wait_irq(1, 3000000);
    join
    it = iters_of(0);
    checks++;
    if (it != 3) begin failures++; $display("LK eps 0: %0d iterations", it); end else hit_imax++;
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (!pose_ok(OUT_LK + 3 * k, 1e-3)) begin failures++; $display("LK pose %0d not a rotation", k); end
    end
    // run 3: backward differences
    start_lk(9, 2, 2, 32'h0, SRC, 1'b0);
    modes++; partial++;
    wait_irq(0, 3000000);
    it = iters_of(0);
    checks++;
    if (it != 2) begin failures++; $display("LK backward: %0d iterations", it); end else hit_imax++;
    reg_read(0, 0, d);
    checks++;
    if (d[2:1] != 2'b11) begin failures++; $display("LK control %h", d); end
    reg_read(1, 15, d);
    checks++;
    if (d != 32'd2) begin failures++; $display("ReAgent iteration register %0d", d); end
    checks++;
    if (irqs_lk != 3 || irqs_ra != 2) begin failures++; $display("interrupts %0d / %0d", irqs_lk, irqs_ra); end
    // every mechanism must have happened
    $display("mechanisms: loads %0d converged %0d imax %0d modes %0d partial %0d overlap %0d stalls %0d contention %0d cut4k %0d ctl %0d/%0d",
             loads, converged, hit_imax, modes, partial, overlap, mem.stalls, contention, cut_4k, lk_ctl, ra_ctl);
    checks++; if (loads < 2)        begin failures++; $display("no parameter load"); end
    checks++; if (converged == 0)   begin failures++; $display("LK never stopped by eps"); end
    checks++; if (hit_imax == 0)    begin failures++; $display("LK never stopped at I_MAX"); end
    checks++; if (modes < 3)        begin failures++; $display("not every Jacobian mode ran"); end
    checks++; if (partial == 0)     begin failures++; $display("no partial tile"); end
    checks++; if (overlap == 0)     begin failures++; $display("pipeline stages never overlapped"); end
    checks++; if (mem.stalls == 0)  begin failures++; $display("memory never stalled"); end
    checks++; if (contention == 0)  begin failures++; $display("the cores never competed for memory"); end
    checks++; if (cut_4k == 0)      begin failures++; $display("no burst was cut at 4 KB"); end
    checks++; if (lk_ctl == 0 || ra_ctl == 0) begin failures++; $display("a core's registers were never written"); end
    checks++; if (mem.cross_4k != 0) begin failures++; $display("a burst crossed 4 KB"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
