// tb_axil_regs: self-checking test of the AXI-Lite control register file.
//
// Writes random values to every register through the AXI-Lite port, with and
// without byte strobes, reads them back, and checks the control register:
// writing bit 0 gives a one-cycle start pulse, the done flag is set by the
// core's done pulse and cleared by the next start, bit 2 reads the core's idle
// state, bit 3 (load parameters) is stored, and the status register reads the
// `stat` input.
module tb_axil_regs;
  localparam int unsigned NREG = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] s_axi_awaddr = '0, s_axi_araddr = '0;
  logic s_axi_awvalid = 1'b0, s_axi_wvalid = 1'b0, s_axi_bready = 1'b0, s_axi_arvalid = 1'b0, s_axi_rready = 1'b0;
  logic [31:0] s_axi_wdata = '0;
  logic [3:0] s_axi_wstrb = '0;
  logic s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic [31:0] s_axi_rdata;
  logic [31:0] regs [NREG];
  logic start, core_done = 1'b0, core_idle = 1'b1;
  logic [31:0] stat = 32'h1234_5678;
  int checks = 0, failures = 0, starts = 0;
  logic [31:0] shadow [NREG];

  axil_regs #(.NREG(NREG), .STAT_REG(15)) dut (.*);
  always #5 clk = ~clk;
  always @(negedge clk) if (start) starts++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axil_write(input int r, input logic [31:0] d, input logic [3:0] strb);
    @(negedge clk);
    s_axi_awaddr = 8'(r * 4); s_axi_awvalid = 1'b1; s_axi_wdata = d; s_axi_wstrb = strb; s_axi_wvalid = 1'b1;
    s_axi_bready = 1'b1;
    #1;
    while (!(s_axi_awready && s_axi_wready)) @(negedge clk);
    @(negedge clk);
    s_axi_awvalid = 1'b0; s_axi_wvalid = 1'b0;
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);
    s_axi_bready = 1'b0;
  endtask

  task automatic axil_read(input int r, output logic [31:0] d);
    @(negedge clk);
    s_axi_araddr = 8'(r * 4); s_axi_arvalid = 1'b1; s_axi_rready = 1'b1;
    #1;
    while (!s_axi_arready) @(negedge clk);
    @(negedge clk);
    s_axi_arvalid = 1'b0;
    while (!s_axi_rvalid) @(negedge clk);
    d = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 1'b0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 1; r < 15; r++) begin
      shadow[r] = $urandom;
      axil_write(r, shadow[r], 4'hF);
    end
    for (int r = 1; r < 15; r++) begin
      logic [31:0] v;
      logic [3:0] sb;
      v = $urandom; sb = 4'($urandom);
      axil_write(r, v, sb);
      for (int b = 0; b < 4; b++) if (sb[b]) shadow[r][8*b +: 8] = v[8*b +: 8];
    end
    for (int r = 1; r < 15; r++) begin
      axil_read(r, d);
      checks++;
      if (d !== shadow[r] || regs[r] !== shadow[r]) begin failures++; $display("reg %0d: %h vs %h", r, d, shadow[r]); end
    end
    axil_read(15, d);
    checks++;
    if (d !== stat) begin failures++; $display("status register %h", d); end
    // start, done, idle, load flag
    axil_write(0, 32'h9, 4'h1);
    checks++;
    if (starts != 1) begin failures++; $display("start pulses %0d", starts); end
    core_idle = 1'b0;
    axil_read(0, d);
    checks++;
    if (d[3:1] !== 3'b100) begin failures++; $display("ctrl while busy %h", d); end
    @(negedge clk);
    core_done = 1'b1;
    @(negedge clk);
    core_done = 1'b0; core_idle = 1'b1;
    axil_read(0, d);
    checks++;
    if (d[3:1] !== 3'b111) begin failures++; $display("ctrl after done %h", d); end
    axil_write(0, 32'h1, 4'h1);
    axil_read(0, d);
    checks++;
    if (d[3:1] !== 3'b010 || starts != 2) begin failures++; $display("ctrl after restart %h, %0d starts", d, starts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
