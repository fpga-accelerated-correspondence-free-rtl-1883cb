// tb_reagent_core: self-checking test of ReAgentCore on its own.
//
// A reduced core (PointNet widths C1D, C2D, C3D, actor widths H1, H2) runs
// against the memory model with random parameters and clouds. Checked: the
// core runs exactly I_MAX iterations and writes I_MAX poses; every pose is a
// rotation; every per-axis translation change is one of the table's steps
// (the disentangled update t_i = t(a_t) + t_{i-1}); a second run that skips
// the parameter load starts from a different G0; the interrupt fires once per
// run and the iteration count register agrees.
module tb_reagent_core;
  import pn_pkg::*;
  localparam int unsigned C1D = 16, C2D = 16, C3D = 32, H1 = 8, H2 = 8;
  localparam int unsigned PWORDS = pointnet_words(C1D, C2D, C3D) + 2 * (quant_words(2 * C3D) + qconv_words(2 * C3D, H1) + quant_words(H1) + qconv_words(H1, H2) + affine_words(H2) + conv_words(H2, 3 * N_LABEL)) + words_of(3 * N_LABEL, 4);
  localparam int PARAM = 0, SRC = 20000, TMPL = 21000, G0 = 22000, OUTP = 23000;
  logic clk = 1'b0, rst_n = 1'b0;
  logic irq_ra, irq_lk = 1'b0;
  logic [7:0] s_axi_awaddr = '0;
  logic  s_axi_awvalid = '0;
  logic  s_axi_awready;
  logic [31:0] s_axi_wdata = '0;
  logic [3:0] s_axi_wstrb = '0;
  logic  s_axi_wvalid = '0;
  logic  s_axi_wready;
  logic [1:0] s_axi_bresp;
  logic  s_axi_bvalid;
  logic  s_axi_bready = '0;
  logic [7:0] s_axi_araddr = '0;
  logic  s_axi_arvalid = '0;
  logic  s_axi_arready;
  logic [31:0] s_axi_rdata;
  logic [1:0] s_axi_rresp;
  logic  s_axi_rvalid;
  logic  s_axi_rready = '0;
  logic [31:0] m_axi_araddr;
  logic [7:0] m_axi_arlen;
  logic [2:0] m_axi_arsize;
  logic [1:0] m_axi_arburst;
  logic  m_axi_arvalid;
  logic  m_axi_arready;
  logic [127:0] m_axi_rdata;
  logic [1:0] m_axi_rresp;
  logic  m_axi_rlast;
  logic  m_axi_rvalid;
  logic  m_axi_rready;
  logic [31:0] m_axi_awaddr;
  logic [7:0] m_axi_awlen;
  logic [2:0] m_axi_awsize;
  logic [1:0] m_axi_awburst;
  logic  m_axi_awvalid;
  logic  m_axi_awready;
  logic [127:0] m_axi_wdata;
  logic [15:0] m_axi_wstrb;
  logic  m_axi_wlast;
  logic  m_axi_wvalid;
  logic  m_axi_wready;
  logic [1:0] m_axi_bresp;
  logic  m_axi_bvalid;
  logic  m_axi_bready;
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


  reagent_core #(.C1D(C1D), .C2D(C2D), .C3D(C3D), .H1(H1), .H2(H2), .A_PO1(4), .A_PO2(4)) dut (.clk, .rst_n, .s_axi_awaddr(s_axi_awaddr), .s_axi_awvalid(s_axi_awvalid), .s_axi_awready(s_axi_awready), .s_axi_wdata(s_axi_wdata), .s_axi_wstrb(s_axi_wstrb), .s_axi_wvalid(s_axi_wvalid), .s_axi_wready(s_axi_wready), .s_axi_bresp(s_axi_bresp), .s_axi_bvalid(s_axi_bvalid), .s_axi_bready(s_axi_bready), .s_axi_araddr(s_axi_araddr), .s_axi_arvalid(s_axi_arvalid), .s_axi_arready(s_axi_arready), .s_axi_rdata(s_axi_rdata), .s_axi_rresp(s_axi_rresp), .s_axi_rvalid(s_axi_rvalid), .s_axi_rready(s_axi_rready), .m_axi_araddr(m_axi_araddr), .m_axi_arlen(m_axi_arlen), .m_axi_arsize(m_axi_arsize), .m_axi_arburst(m_axi_arburst), .m_axi_arvalid(m_axi_arvalid), .m_axi_arready(m_axi_arready), .m_axi_rdata(m_axi_rdata), .m_axi_rresp(m_axi_rresp), .m_axi_rlast(m_axi_rlast), .m_axi_rvalid(m_axi_rvalid), .m_axi_rready(m_axi_rready), .m_axi_awaddr(m_axi_awaddr), .m_axi_awlen(m_axi_awlen), .m_axi_awsize(m_axi_awsize), .m_axi_awburst(m_axi_awburst), .m_axi_awvalid(m_axi_awvalid), .m_axi_awready(m_axi_awready), .m_axi_wdata(m_axi_wdata), .m_axi_wstrb(m_axi_wstrb), .m_axi_wlast(m_axi_wlast), .m_axi_wvalid(m_axi_wvalid), .m_axi_wready(m_axi_wready), .m_axi_bresp(m_axi_bresp), .m_axi_bvalid(m_axi_bvalid), .m_axi_bready(m_axi_bready), .irq(irq_ra));
  axi_mem_model #(.DEPTH(32768), .STALL(1'b1)) mem (.clk, .rst_n, .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arsize(m_axi_arsize), .arburst(m_axi_arburst), .arvalid(m_axi_arvalid), .arready(m_axi_arready), .rdata(m_axi_rdata), .rresp(m_axi_rresp), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid), .rready(m_axi_rready), .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awsize(m_axi_awsize), .awburst(m_axi_awburst), .awvalid(m_axi_awvalid), .awready(m_axi_awready), .wdata(m_axi_wdata), .wstrb(m_axi_wstrb), .wlast(m_axi_wlast), .wvalid(m_axi_wvalid), .wready(m_axi_wready), .bresp(m_axi_bresp), .bvalid(m_axi_bvalid), .bready(m_axi_bready));

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int irqs = 0;
  always @(negedge clk) if (irq_ra) irqs++;

  always #5 clk = ~clk;

  task automatic reg_write(input int core, input int r, input logic [31:0] d);
    @(negedge clk);
    s_axi_awaddr = 8'(core * 256 + r * 4); s_axi_awvalid = 1'b1; s_axi_wdata = d; s_axi_wstrb = 4'hF;
    s_axi_wvalid = 1'b1; s_axi_bready = 1'b1;
    #1;
    while (!(s_axi_awready && s_axi_wready)) @(negedge clk);
    @(negedge clk);
    s_axi_awvalid = 1'b0; s_axi_wvalid = 1'b0;
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);
    s_axi_bready = 1'b0;
  endtask

  task automatic reg_read(input int core, input int r, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = 8'(core * 256 + r * 4); s_axi_arvalid = 1'b1; s_axi_rready = 1'b1;
    #1;
    while (!s_axi_arready) @(negedge clk);
    @(negedge clk);
    s_axi_arvalid = 1'b0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 1'b0;
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


  task automatic run_ra(input int n, input int imax, input int g0, input bit load, output int iters);
    logic [31:0] d;
    reg_write(1, 1, 32'(n)); reg_write(1, 2, 32'(imax)); reg_write(1, 3, 32'(PARAM * 16));
    reg_write(1, 4, 32'(SRC * 16)); reg_write(1, 5, 32'(TMPL * 16)); reg_write(1, 6, 32'(g0 * 16));
    reg_write(1, 7, 32'(OUTP * 16));
    reg_write(1, 11, 32'h3D80_0000); reg_write(1, 12, 32'hBD80_0000); reg_write(1, 13, 32'h0);
    reg_write(1, 0, load ? 32'h9 : 32'h1);
    wait_irq(1, 2500000);
    reg_read(1, 15, d);
    iters = int'(d);
  endtask

  initial begin
    int it;
    for (int i = 0; i < 32768; i++) mem.mem[i] = '0;
    gen_pointnet(PARAM, C1D, C2D, C3D);
    gen_actor(PARAM + pointnet_words(C1D, C2D, C3D), C3D, H1, H2);
    gen_table(PARAM + PWORDS - words_of(3 * N_LABEL, 4));
    gen_cloud(SRC, 64); gen_cloud(TMPL, 64);
    put_pose_identity(G0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_ra(17, 4, G0, 1'b1, it);
    checks++;
    if (it != 4) begin failures++; $display("%0d iterations for I_MAX 4", it); end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (!pose_ok(OUTP + 3 * k, 1e-4)) begin failures++; $display("pose %0d is not a rotation", k); end
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (!step_ok(k == 0 ? G0 : OUTP + 3 * (k - 1), OUTP + 3 * k, i)) begin
          failures++; $display("pose %0d axis %0d: translation change is no table step", k, i);
        end
      end
    end
    // second run from a translated G0, without reloading the parameters
    for (int r = 0; r < 3; r++) mem.mem[G0 + 3 + r] = mem.mem[G0 + r];
    mem.mem[G0 + 3][96 +: 32] = 32'h3F00_0000;
    run_ra(9, 2, G0 + 3, 1'b0, it);
    checks++;
    if (it != 2) begin failures++; $display("%0d iterations for I_MAX 2", it); end
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (!step_ok(G0 + 3, OUTP, i)) begin failures++; $display("run 2 axis %0d: first step wrong", i); end
    end
    checks++;
    if (irqs != 2) begin failures++; $display("%0d interrupts for 2 runs", irqs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
