// tb_point_reader: self-checking test of the Read stage of the PointNet pipeline.
//
// Places a random point cloud in the memory model (one 16-byte word per point,
// x, y, z as FP32 in bytes 0-11), then reads it tile by tile through the
// memory-port controller into alternating banks, the last tile partly full,
// and checks every stored point and that one tile of n points costs one
// request of n beats.
module tb_point_reader;
  import pn_pkg::*;
  localparam int unsigned B = 6;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, wr_bank = 1'b0, busy, done;
  logic [31:0] addr = '0;
  logic [2:0] n_pts = '0;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_last;
  logic [31:0] rd_req_addr;
  logic [15:0] rd_req_beats;
  logic [127:0] rd_data;
  logic wr_req_valid = 1'b0, wr_req_ready, wr_done;
  logic [31:0] wr_req_addr = '0;
  logic [127:0] wr_req_data = '0;
  fvec3_t pts [2][B];
  logic [31:0] m_axi_araddr, m_axi_awaddr;
  logic [7:0] m_axi_arlen, m_axi_awlen;
  logic [2:0] m_axi_arsize, m_axi_awsize;
  logic [1:0] m_axi_arburst, m_axi_awburst, m_axi_rresp, m_axi_bresp;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready;
  logic m_axi_bvalid, m_axi_bready;
  logic [127:0] m_axi_rdata, m_axi_wdata;
  logic [15:0] m_axi_wstrb;
  int checks = 0, failures = 0, reqs = 0;

  point_reader #(.B(B)) dut (.*);
  gmem_master #(.MAX_BURST(16)) u_gm (.*);
  axi_mem_model #(.DEPTH(1024), .STALL(1'b1)) mem (
    .clk, .rst_n, .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arsize(m_axi_arsize),
    .arburst(m_axi_arburst), .arvalid(m_axi_arvalid), .arready(m_axi_arready), .rdata(m_axi_rdata),
    .rresp(m_axi_rresp), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid), .rready(m_axi_rready),
    .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awsize(m_axi_awsize), .awburst(m_axi_awburst),
    .awvalid(m_axi_awvalid), .awready(m_axi_awready), .wdata(m_axi_wdata), .wstrb(m_axi_wstrb),
    .wlast(m_axi_wlast), .wvalid(m_axi_wvalid), .wready(m_axi_wready), .bresp(m_axi_bresp),
    .bvalid(m_axi_bvalid), .bready(m_axi_bready));

  always #5 clk = ~clk;
  always @(negedge clk) if (rd_req_valid && rd_req_ready) reqs++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam int NP = 29;
    for (int i = 0; i < 1024; i++) mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t * int'(B) < NP; t++) begin
      int n, r0;
      n = (NP - t * int'(B) < int'(B)) ? NP - t * int'(B) : int'(B);
      r0 = reqs;
      @(negedge clk);
      start = 1'b1; addr = 32'(256 + t * B * 16); n_pts = 3'(n); wr_bank = t[0];
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (reqs != r0 + 1 || (rd_req_beats != 16'(n))) begin failures++; $display("tile %0d: %0d requests", t, reqs - r0); end
      for (int p = 0; p < n; p++) for (int i = 0; i < 3; i++) begin
        checks++;
        if (pts[t % 2][p][i] !== mem.mem[16 + t * B + p][32*i +: 32]) begin
          failures++;
          if (failures < 10) $display("tile %0d point %0d coord %0d wrong", t, p, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
