// reg_accel_top: PointLKCore and ReAgentCore behind one control port and one
// memory port.
//
// The paper builds either core as an IP block on a Zynq SoC: a 128-bit AXI4
// manager port (gmem) to the PS HP0 port for point clouds, parameters and
// poses, and a 32-bit AXI-Lite subordinate port (s_axi_control) on the PS
// HPM0 port for control registers, at 200 MHz. This top holds both cores so
// that one netlist carries the whole design: s_axi_control is 9 bits wide,
// byte offsets 0x000-0x0FF reach PointLKCore and 0x100-0x1FF ReAgentCore
// (register maps in pointlk_core and reagent_core), and the two cores' gmem
// ports share the one AXI4 manager port through a fixed-priority arbiter
// (PointLKCore first) that holds a read grant until the last beat of a burst
// and a write grant until its response. Sharing one top and the arbiter are
// this design's choices; the host normally runs one core at a time.
// irq_lk / irq_ra pulse when a core finishes.
module reg_accel_top
  import pn_pkg::*;
#(
  parameter int unsigned C1D = C1,
  parameter int unsigned C2D = C2,
  parameter int unsigned C3D = FEAT_DIM,
  parameter int unsigned H1  = 512,
  parameter int unsigned H2  = 256
) (
  input  logic         ap_clk,
  input  logic         ap_rst_n,
  input  logic [8:0]    s_axi_control_awaddr,
  input  logic          s_axi_control_awvalid,
  output logic          s_axi_control_awready,
  input  logic [31:0]   s_axi_control_wdata,
  input  logic [3:0]    s_axi_control_wstrb,
  input  logic          s_axi_control_wvalid,
  output logic          s_axi_control_wready,
  output logic [1:0]    s_axi_control_bresp,
  output logic          s_axi_control_bvalid,
  input  logic          s_axi_control_bready,
  input  logic [8:0]    s_axi_control_araddr,
  input  logic          s_axi_control_arvalid,
  output logic          s_axi_control_arready,
  output logic [31:0]   s_axi_control_rdata,
  output logic [1:0]    s_axi_control_rresp,
  output logic          s_axi_control_rvalid,
  input  logic          s_axi_control_rready,
  output logic [31:0]   m_axi_gmem_araddr,
  output logic [7:0]    m_axi_gmem_arlen,
  output logic [2:0]    m_axi_gmem_arsize,
  output logic [1:0]    m_axi_gmem_arburst,
  output logic          m_axi_gmem_arvalid,
  input  logic          m_axi_gmem_arready,
  input  logic [127:0]  m_axi_gmem_rdata,
  input  logic [1:0]    m_axi_gmem_rresp,
  input  logic          m_axi_gmem_rlast,
  input  logic          m_axi_gmem_rvalid,
  output logic          m_axi_gmem_rready,
  output logic [31:0]   m_axi_gmem_awaddr,
  output logic [7:0]    m_axi_gmem_awlen,
  output logic [2:0]    m_axi_gmem_awsize,
  output logic [1:0]    m_axi_gmem_awburst,
  output logic          m_axi_gmem_awvalid,
  input  logic          m_axi_gmem_awready,
  output logic [127:0]  m_axi_gmem_wdata,
  output logic [15:0]   m_axi_gmem_wstrb,
  output logic          m_axi_gmem_wlast,
  output logic          m_axi_gmem_wvalid,
  input  logic          m_axi_gmem_wready,
  input  logic [1:0]    m_axi_gmem_bresp,
  input  logic          m_axi_gmem_bvalid,
  output logic          m_axi_gmem_bready,
  output logic          irq_lk,
  output logic          irq_ra
);
  logic [7:0]    lk_s_awaddr;
  logic          lk_s_awvalid;
  logic          lk_s_awready;
  logic [31:0]   lk_s_wdata;
  logic [3:0]    lk_s_wstrb;
  logic          lk_s_wvalid;
  logic          lk_s_wready;
  logic [1:0]    lk_s_bresp;
  logic          lk_s_bvalid;
  logic          lk_s_bready;
  logic [7:0]    lk_s_araddr;
  logic          lk_s_arvalid;
  logic          lk_s_arready;
  logic [31:0]   lk_s_rdata;
  logic [1:0]    lk_s_rresp;
  logic          lk_s_rvalid;
  logic          lk_s_rready;
  logic [31:0]   lk_m_araddr;
  logic [7:0]    lk_m_arlen;
  logic [2:0]    lk_m_arsize;
  logic [1:0]    lk_m_arburst;
  logic          lk_m_arvalid;
  logic          lk_m_arready;
  logic [127:0]  lk_m_rdata;
  logic [1:0]    lk_m_rresp;
  logic          lk_m_rlast;
  logic          lk_m_rvalid;
  logic          lk_m_rready;
  logic [31:0]   lk_m_awaddr;
  logic [7:0]    lk_m_awlen;
  logic [2:0]    lk_m_awsize;
  logic [1:0]    lk_m_awburst;
  logic          lk_m_awvalid;
  logic          lk_m_awready;
  logic [127:0]  lk_m_wdata;
  logic [15:0]   lk_m_wstrb;
  logic          lk_m_wlast;
  logic          lk_m_wvalid;
  logic          lk_m_wready;
  logic [1:0]    lk_m_bresp;
  logic          lk_m_bvalid;
  logic          lk_m_bready;
  logic [7:0]    ra_s_awaddr;
  logic          ra_s_awvalid;
  logic          ra_s_awready;
  logic [31:0]   ra_s_wdata;
  logic [3:0]    ra_s_wstrb;
  logic          ra_s_wvalid;
  logic          ra_s_wready;
  logic [1:0]    ra_s_bresp;
  logic          ra_s_bvalid;
  logic          ra_s_bready;
  logic [7:0]    ra_s_araddr;
  logic          ra_s_arvalid;
  logic          ra_s_arready;
  logic [31:0]   ra_s_rdata;
  logic [1:0]    ra_s_rresp;
  logic          ra_s_rvalid;
  logic          ra_s_rready;
  logic [31:0]   ra_m_araddr;
  logic [7:0]    ra_m_arlen;
  logic [2:0]    ra_m_arsize;
  logic [1:0]    ra_m_arburst;
  logic          ra_m_arvalid;
  logic          ra_m_arready;
  logic [127:0]  ra_m_rdata;
  logic [1:0]    ra_m_rresp;
  logic          ra_m_rlast;
  logic          ra_m_rvalid;
  logic          ra_m_rready;
  logic [31:0]   ra_m_awaddr;
  logic [7:0]    ra_m_awlen;
  logic [2:0]    ra_m_awsize;
  logic [1:0]    ra_m_awburst;
  logic          ra_m_awvalid;
  logic          ra_m_awready;
  logic [127:0]  ra_m_wdata;
  logic [15:0]   ra_m_wstrb;
  logic          ra_m_wlast;
  logic          ra_m_wvalid;
  logic          ra_m_wready;
  logic [1:0]    ra_m_bresp;
  logic          ra_m_bvalid;
  logic          ra_m_bready;

  // ---------------- control port demultiplexer ----------------
  // A request is passed on only while neither core holds a response, so the
  // two cores never answer at the same time.
  logic wsel, rsel, b_busy, r_busy;
  assign wsel   = s_axi_control_awaddr[8];
  assign rsel   = s_axi_control_araddr[8];
  assign b_busy = lk_s_bvalid || ra_s_bvalid;
  assign r_busy = lk_s_rvalid || ra_s_rvalid;
  always_comb begin
    lk_s_awaddr = s_axi_control_awaddr[7:0];
    ra_s_awaddr = s_axi_control_awaddr[7:0];
    lk_s_wdata  = s_axi_control_wdata;  ra_s_wdata = s_axi_control_wdata;
    lk_s_wstrb  = s_axi_control_wstrb;  ra_s_wstrb = s_axi_control_wstrb;
    lk_s_awvalid = s_axi_control_awvalid && !b_busy && !wsel;
    ra_s_awvalid = s_axi_control_awvalid && !b_busy &&  wsel;
    lk_s_wvalid  = s_axi_control_wvalid  && !b_busy && !wsel;
    ra_s_wvalid  = s_axi_control_wvalid  && !b_busy &&  wsel;
    s_axi_control_awready = wsel ? ra_s_awready : lk_s_awready;
    s_axi_control_wready  = wsel ? ra_s_wready  : lk_s_wready;
    if (b_busy) begin
      s_axi_control_awready = 1'b0;
      s_axi_control_wready  = 1'b0;
    end
    s_axi_control_bvalid = b_busy;
    s_axi_control_bresp  = lk_s_bvalid ? lk_s_bresp : ra_s_bresp;
    lk_s_bready = s_axi_control_bready;
    ra_s_bready = s_axi_control_bready;
    lk_s_araddr = s_axi_control_araddr[7:0];
    ra_s_araddr = s_axi_control_araddr[7:0];
    lk_s_arvalid = s_axi_control_arvalid && !r_busy && !rsel;
    ra_s_arvalid = s_axi_control_arvalid && !r_busy &&  rsel;
    s_axi_control_arready = !r_busy && (rsel ? ra_s_arready : lk_s_arready);
    s_axi_control_rvalid = r_busy;
    s_axi_control_rdata  = lk_s_rvalid ? lk_s_rdata : ra_s_rdata;
    s_axi_control_rresp  = lk_s_rvalid ? lk_s_rresp : ra_s_rresp;
    lk_s_rready = s_axi_control_rready;
    ra_s_rready = s_axi_control_rready;
  end

  // ---------------- memory port arbiter ----------------
  typedef enum logic [1:0] {OWN_NONE, OWN_LK, OWN_RA} owner_e;
  owner_e rown, wown, rgnt, wgnt;
  always_comb begin
    rgnt = rown;
    if (rown == OWN_NONE) rgnt = lk_m_arvalid ? OWN_LK : (ra_m_arvalid ? OWN_RA : OWN_NONE);
    wgnt = wown;
    if (wown == OWN_NONE) wgnt = lk_m_awvalid ? OWN_LK : (ra_m_awvalid ? OWN_RA : OWN_NONE);
  end
  always_ff @(posedge ap_clk or negedge ap_rst_n) begin
    if (!ap_rst_n) begin
      rown <= OWN_NONE;
      wown <= OWN_NONE;
    end else begin
      if (m_axi_gmem_rvalid && m_axi_gmem_rready && m_axi_gmem_rlast) rown <= OWN_NONE;
      else if (m_axi_gmem_arvalid && m_axi_gmem_arready)             rown <= rgnt;
      if (m_axi_gmem_bvalid && m_axi_gmem_bready)                     wown <= OWN_NONE;
      else if (m_axi_gmem_awvalid)                                    wown <= wgnt;
    end
  end
  always_comb begin
    // read address / data
    m_axi_gmem_araddr  = (rgnt == OWN_RA) ? ra_m_araddr  : lk_m_araddr;
    m_axi_gmem_arlen   = (rgnt == OWN_RA) ? ra_m_arlen   : lk_m_arlen;
    m_axi_gmem_arsize  = (rgnt == OWN_RA) ? ra_m_arsize  : lk_m_arsize;
    m_axi_gmem_arburst = (rgnt == OWN_RA) ? ra_m_arburst : lk_m_arburst;
    m_axi_gmem_arvalid = (rown == OWN_NONE) && (lk_m_arvalid || ra_m_arvalid);
    lk_m_arready = (rown == OWN_NONE) && (rgnt == OWN_LK) && m_axi_gmem_arready;
    ra_m_arready = (rown == OWN_NONE) && (rgnt == OWN_RA) && m_axi_gmem_arready;
    lk_m_rdata = m_axi_gmem_rdata;  ra_m_rdata = m_axi_gmem_rdata;
    lk_m_rresp = m_axi_gmem_rresp;  ra_m_rresp = m_axi_gmem_rresp;
    lk_m_rlast = m_axi_gmem_rlast;  ra_m_rlast = m_axi_gmem_rlast;
    lk_m_rvalid = m_axi_gmem_rvalid && (rown == OWN_LK);
    ra_m_rvalid = m_axi_gmem_rvalid && (rown == OWN_RA);
    m_axi_gmem_rready = (rown == OWN_LK) ? lk_m_rready : ((rown == OWN_RA) ? ra_m_rready : 1'b0);
    // write address / data / response
    m_axi_gmem_awaddr  = (wgnt == OWN_RA) ? ra_m_awaddr  : lk_m_awaddr;
    m_axi_gmem_awlen   = (wgnt == OWN_RA) ? ra_m_awlen   : lk_m_awlen;
    m_axi_gmem_awsize  = (wgnt == OWN_RA) ? ra_m_awsize  : lk_m_awsize;
    m_axi_gmem_awburst = (wgnt == OWN_RA) ? ra_m_awburst : lk_m_awburst;
    m_axi_gmem_awvalid = (wgnt == OWN_LK) ? lk_m_awvalid : ((wgnt == OWN_RA) ? ra_m_awvalid : 1'b0);
    m_axi_gmem_wdata   = (wgnt == OWN_RA) ? ra_m_wdata   : lk_m_wdata;
    m_axi_gmem_wstrb   = (wgnt == OWN_RA) ? ra_m_wstrb   : lk_m_wstrb;
    m_axi_gmem_wlast   = (wgnt == OWN_RA) ? ra_m_wlast   : lk_m_wlast;
    m_axi_gmem_wvalid  = (wgnt == OWN_LK) ? lk_m_wvalid  : ((wgnt == OWN_RA) ? ra_m_wvalid : 1'b0);
    lk_m_awready = (wgnt == OWN_LK) && m_axi_gmem_awready;
    ra_m_awready = (wgnt == OWN_RA) && m_axi_gmem_awready;
    lk_m_wready  = (wgnt == OWN_LK) && m_axi_gmem_wready;
    ra_m_wready  = (wgnt == OWN_RA) && m_axi_gmem_wready;
    lk_m_bresp = m_axi_gmem_bresp;  ra_m_bresp = m_axi_gmem_bresp;
    lk_m_bvalid = m_axi_gmem_bvalid && (wown == OWN_LK);
    ra_m_bvalid = m_axi_gmem_bvalid && (wown == OWN_RA);
    m_axi_gmem_bready = (wown == OWN_LK) ? lk_m_bready : ((wown == OWN_RA) ? ra_m_bready : 1'b0);
  end

  pointlk_core #(.C1D(C1D), .C2D(C2D), .C3D(C3D)) u_lk (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_axi_awaddr(lk_s_awaddr), .s_axi_awvalid(lk_s_awvalid), .s_axi_awready(lk_s_awready), .s_axi_wdata(lk_s_wdata),
    .s_axi_wstrb(lk_s_wstrb), .s_axi_wvalid(lk_s_wvalid), .s_axi_wready(lk_s_wready), .s_axi_bresp(lk_s_bresp),
    .s_axi_bvalid(lk_s_bvalid), .s_axi_bready(lk_s_bready), .s_axi_araddr(lk_s_araddr), .s_axi_arvalid(lk_s_arvalid),
    .s_axi_arready(lk_s_arready), .s_axi_rdata(lk_s_rdata), .s_axi_rresp(lk_s_rresp), .s_axi_rvalid(lk_s_rvalid),
    .s_axi_rready(lk_s_rready), .m_axi_araddr(lk_m_araddr), .m_axi_arlen(lk_m_arlen), .m_axi_arsize(lk_m_arsize),
    .m_axi_arburst(lk_m_arburst), .m_axi_arvalid(lk_m_arvalid), .m_axi_arready(lk_m_arready), .m_axi_rdata(lk_m_rdata),
    .m_axi_rresp(lk_m_rresp), .m_axi_rlast(lk_m_rlast), .m_axi_rvalid(lk_m_rvalid), .m_axi_rready(lk_m_rready),
    .m_axi_awaddr(lk_m_awaddr), .m_axi_awlen(lk_m_awlen), .m_axi_awsize(lk_m_awsize), .m_axi_awburst(lk_m_awburst),
    .m_axi_awvalid(lk_m_awvalid), .m_axi_awready(lk_m_awready), .m_axi_wdata(lk_m_wdata), .m_axi_wstrb(lk_m_wstrb),
    .m_axi_wlast(lk_m_wlast), .m_axi_wvalid(lk_m_wvalid), .m_axi_wready(lk_m_wready), .m_axi_bresp(lk_m_bresp),
    .m_axi_bvalid(lk_m_bvalid), .m_axi_bready(lk_m_bready),
    .irq(irq_lk));

  reagent_core #(.C1D(C1D), .C2D(C2D), .C3D(C3D), .H1(H1), .H2(H2)) u_ra (
    .clk(ap_clk), .rst_n(ap_rst_n),
    .s_axi_awaddr(ra_s_awaddr), .s_axi_awvalid(ra_s_awvalid), .s_axi_awready(ra_s_awready), .s_axi_wdata(ra_s_wdata),
    .s_axi_wstrb(ra_s_wstrb), .s_axi_wvalid(ra_s_wvalid), .s_axi_wready(ra_s_wready), .s_axi_bresp(ra_s_bresp),
    .s_axi_bvalid(ra_s_bvalid), .s_axi_bready(ra_s_bready), .s_axi_araddr(ra_s_araddr), .s_axi_arvalid(ra_s_arvalid),
    .s_axi_arready(ra_s_arready), .s_axi_rdata(ra_s_rdata), .s_axi_rresp(ra_s_rresp), .s_axi_rvalid(ra_s_rvalid),
    .s_axi_rready(ra_s_rready), .m_axi_araddr(ra_m_araddr), .m_axi_arlen(ra_m_arlen), .m_axi_arsize(ra_m_arsize),
    .m_axi_arburst(ra_m_arburst), .m_axi_arvalid(ra_m_arvalid), .m_axi_arready(ra_m_arready), .m_axi_rdata(ra_m_rdata),
    .m_axi_rresp(ra_m_rresp), .m_axi_rlast(ra_m_rlast), .m_axi_rvalid(ra_m_rvalid), .m_axi_rready(ra_m_rready),
    .m_axi_awaddr(ra_m_awaddr), .m_axi_awlen(ra_m_awlen), .m_axi_awsize(ra_m_awsize), .m_axi_awburst(ra_m_awburst),
    .m_axi_awvalid(ra_m_awvalid), .m_axi_awready(ra_m_awready), .m_axi_wdata(ra_m_wdata), .m_axi_wstrb(ra_m_wstrb),
    .m_axi_wlast(ra_m_wlast), .m_axi_wvalid(ra_m_wvalid), .m_axi_wready(ra_m_wready), .m_axi_bresp(ra_m_bresp),
    .m_axi_bvalid(ra_m_bvalid), .m_axi_bready(ra_m_bready),
    .irq(irq_ra));

endmodule
