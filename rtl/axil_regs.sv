// axil_regs: the core's 32-bit AXI-Lite control port ("s_axi_control").
//
// NREG 32-bit registers at byte offsets 4*i. Register 0 is the control word:
// writing bit 0 pulses `start` (ap_start); reads return bit 1 = done (set when
// the core finishes, cleared by the next start), bit 2 = idle, and bit 3 =
// load-parameters flag, which is the only stored bit of register 0. Register
// STAT_REG reads the core's status word `stat` (iterations run). All others are
// plain read/write registers, presented on `regs`. The register map itself is
// given in the core modules. The paper names the port and its use (control
// registers, number of iterations, step size); the map and the done/idle bits
// are this design's choice, in the style of HLS-generated control ports. One
// write (AW and W together) or read is accepted at a time; responses are OKAY.
module axil_regs #(
  parameter int unsigned NREG     = 16,
  parameter int unsigned STAT_REG = 15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // core side
  output logic [31:0] regs [NREG],
  output logic        start,
  input  logic        core_done,
  input  logic        core_idle,
  input  logic [31:0] stat
);
  logic done_flag;
  logic do_write;
  logic [$clog2(NREG)-1:0] widx, ridx;

  assign do_write      = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_awready = do_write;
  assign s_axi_wready  = do_write;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign s_axi_arready = !s_axi_rvalid;
  assign widx = s_axi_awaddr[2 +: $clog2(NREG)];
  assign ridx = s_axi_araddr[2 +: $clog2(NREG)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
      start <= 1'b0;
      done_flag <= 1'b0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      start <= 1'b0;
      if (core_done) done_flag <= 1'b1;
      if (do_write) begin
        s_axi_bvalid <= 1'b1;
        if (widx == '0) begin
          if (s_axi_wstrb[0]) begin
            regs[0][3] <= s_axi_wdata[3];
            if (s_axi_wdata[0]) begin
              start <= 1'b1;
              done_flag <= 1'b0;
            end
          end
        end else begin
          for (int b = 0; b < 4; b++)
            if (s_axi_wstrb[b]) regs[widx][8*b +: 8] <= s_axi_wdata[8*b +: 8];
        end
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
      if (s_axi_arvalid && !s_axi_rvalid) begin
        s_axi_rvalid <= 1'b1;
        if (ridx == '0)                              s_axi_rdata <= {28'd0, regs[0][3], core_idle, done_flag, 1'b0};
        else if (int'(ridx) == STAT_REG)             s_axi_rdata <= stat;
        else                                         s_axi_rdata <= regs[ridx];
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end
endmodule
