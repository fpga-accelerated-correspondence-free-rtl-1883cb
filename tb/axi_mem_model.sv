// axi_mem_model: behavioural model of the external DDR memory, seen through
// the AXI4 port of the processing system, for testbenches only.
//
// A 128-bit AXI4 subordinate over an array of DEPTH words (word address =
// byte address / 16). It accepts one read burst and one write burst at a time
// (INCR only), inserts random wait states on every ready/valid it drives when
// STALL is set, and counts bursts, stalls and bursts that cross a 4 KB
// boundary (an AXI rule violation) so that testbenches can check them. The
// array `mem` is read and written by testbenches hierarchically.
module axi_mem_model #(
  parameter int unsigned DEPTH = 65536,
  parameter bit          STALL = 1'b1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  araddr,
  input  logic [7:0]   arlen,
  input  logic [2:0]   arsize,
  input  logic [1:0]   arburst,
  input  logic         arvalid,
  output logic         arready,
  output logic [127:0] rdata,
  output logic [1:0]   rresp,
  output logic         rlast,
  output logic         rvalid,
  input  logic         rready,
  input  logic [31:0]  awaddr,
  input  logic [7:0]   awlen,
  input  logic [2:0]   awsize,
  input  logic [1:0]   awburst,
  input  logic         awvalid,
  output logic         awready,
  input  logic [127:0] wdata,
  input  logic [15:0]  wstrb,
  input  logic         wlast,
  input  logic         wvalid,
  output logic         wready,
  output logic [1:0]   bresp,
  output logic         bvalid,
  input  logic         bready
);
  logic [127:0] mem [DEPTH];
  int rd_bursts = 0, wr_bursts = 0, stalls = 0, cross_4k = 0, bad_size = 0;

  logic        r_act, w_act;
  logic [31:0] r_addr, w_addr;
  logic [8:0]  r_left;
  logic        rnd;

  assign rresp = 2'b00;
  assign bresp = 2'b00;
  assign rdata = mem[(r_addr >> 4) % DEPTH];
  assign rlast = r_act && (r_left == 9'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_act <= 1'b0; w_act <= 1'b0; r_addr <= '0; w_addr <= '0; r_left <= '0;
      arready <= 1'b0; rvalid <= 1'b0; awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0;
      rnd <= 1'b0;
    end else begin
      rnd <= STALL ? ($urandom % 4 == 0) : 1'b0;
      // read channel
      arready <= !r_act && !rnd;
      if (arvalid && arready) begin
        r_act  <= 1'b1;
        r_addr <= araddr;
        r_left <= 9'(arlen) + 9'd1;
        arready <= 1'b0;
        rd_bursts <= rd_bursts + 1;
        if ((araddr >> 12) != ((araddr + 32'(arlen) * 16) >> 12)) cross_4k <= cross_4k + 1;
        if (arsize != 3'd4 || arburst != 2'b01) bad_size <= bad_size + 1;
      end
      if (r_act) begin
        if (rvalid && rready) begin
          r_addr <= r_addr + 32'd16;
          r_left <= r_left - 9'd1;
          if (r_left == 9'd1) begin
            r_act  <= 1'b0;
            rvalid <= 1'b0;
          end else rvalid <= !rnd;
        end else begin
          rvalid <= rvalid || !rnd;
        end
        if (!rvalid && rnd) stalls <= stalls + 1;
      end
      // write channel
      awready <= !w_act && !bvalid && !rnd;
      if (awvalid && awready) begin
        w_act  <= 1'b1;
        w_addr <= awaddr;
        awready <= 1'b0;
        wr_bursts <= wr_bursts + 1;
        if (awsize != 3'd4 || awburst != 2'b01) bad_size <= bad_size + 1;
      end
      wready <= w_act && !rnd && !(wvalid && wready && wlast);
      if (wvalid && wready) begin
        for (int b = 0; b < 16; b++) if (wstrb[b]) mem[(w_addr >> 4) % DEPTH][8*b +: 8] <= wdata[8*b +: 8];
        w_addr <= w_addr + 32'd16;
        if (wlast) begin
          w_act  <= 1'b0;
          wready <= 1'b0;
          bvalid <= 1'b1;
        end
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
