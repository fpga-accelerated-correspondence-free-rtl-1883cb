// tb_gmem_master: self-checking test of the AXI4 memory-port controller.
//
// Connects the controller to the stalling memory model, issues read requests
// of random length (1 to 300 beats) at random addresses, some just below a
// 4 KB boundary, and checks that every beat arrives in order with the right
// data, that rd_last marks exactly the final beat, that no burst is longer
// than MAX_BURST beats or crosses a 4 KB boundary, and that the number of
// bursts is the minimum those two rules allow. Then checks single-beat
// writes land in memory and each raises wr_done once.
module tb_gmem_master;
  localparam int unsigned MAX_BURST = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rd_req_valid = 1'b0, rd_req_ready, rd_valid, rd_last;
  logic [31:0] rd_req_addr = '0;
  logic [15:0] rd_req_beats = '0;
  logic [127:0] rd_data;
  logic wr_req_valid = 1'b0, wr_req_ready, wr_done;
  logic [31:0] wr_req_addr = '0;
  logic [127:0] wr_req_data = '0;
  logic [31:0] m_axi_araddr, m_axi_awaddr;
  logic [7:0] m_axi_arlen, m_axi_awlen;
  logic [2:0] m_axi_arsize, m_axi_awsize;
  logic [1:0] m_axi_arburst, m_axi_awburst, m_axi_rresp, m_axi_bresp;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready;
  logic m_axi_bvalid, m_axi_bready;
  logic [127:0] m_axi_rdata, m_axi_wdata;
  logic [15:0] m_axi_wstrb;
  int checks = 0, failures = 0, long_bursts = 0, expect_bursts = 0;

  gmem_master #(.MAX_BURST(MAX_BURST)) dut (.*);
  axi_mem_model #(.DEPTH(8192), .STALL(1'b1)) mem (
    .clk, .rst_n, .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arsize(m_axi_arsize),
    .arburst(m_axi_arburst), .arvalid(m_axi_arvalid), .arready(m_axi_arready), .rdata(m_axi_rdata),
    .rresp(m_axi_rresp), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid), .rready(m_axi_rready),
    .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awsize(m_axi_awsize), .awburst(m_axi_awburst),
    .awvalid(m_axi_awvalid), .awready(m_axi_awready), .wdata(m_axi_wdata), .wstrb(m_axi_wstrb),
    .wlast(m_axi_wlast), .wvalid(m_axi_wvalid), .wready(m_axi_wready), .bresp(m_axi_bresp),
    .bvalid(m_axi_bvalid), .bready(m_axi_bready));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (m_axi_arvalid && m_axi_arready && int'(m_axi_arlen) + 1 > MAX_BURST) long_bursts++;

  initial begin
    for (int i = 0; i < 8192; i++) mem.mem[i] = {4{32'(i * 7 + 3)}} ^ {32'(i), 96'd0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20; n++) begin
      int beats, w0, got, last_seen;
      beats = (n == 0) ? 1 : 1 + $urandom % 300;
      w0 = (n % 3 == 0) ? 256 * (1 + $urandom % 20) - ($urandom % 8) : $urandom % 6000;
      // bursts the rules allow at minimum: split at 4 KB (256 words) and MAX_BURST
      begin
        int a, left;
        a = w0; left = beats;
        while (left > 0) begin
          int len;
          len = 256 - (a % 256);
          if (len > MAX_BURST) len = MAX_BURST;
          if (len > left) len = left;
          expect_bursts++;
          a += len; left -= len;
        end
      end
      @(negedge clk);
      rd_req_valid = 1'b1; rd_req_addr = 32'(w0 * 16); rd_req_beats = 16'(beats);
      while (!rd_req_ready) @(negedge clk);
      @(negedge clk);
      rd_req_valid = 1'b0;
      got = 0; last_seen = 0;
      while (got < beats) begin
        @(posedge clk);
        if (rd_valid) begin
          checks++;
          if (rd_data !== mem.mem[w0 + got]) begin
            failures++;
            if (failures < 10) $display("req %0d beat %0d wrong data", n, got);
          end
          checks++;
          if (rd_last != (got == beats - 1)) begin failures++; $display("rd_last wrong at beat %0d of %0d", got, beats); end
          got++;
        end
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (mem.rd_bursts != expect_bursts) begin failures++; $display("bursts %0d, expected %0d", mem.rd_bursts, expect_bursts); end
    checks++;
    if (mem.cross_4k != 0 || long_bursts != 0 || mem.bad_size != 0) begin failures++; $display("burst rule broken"); end
    checks++;
    if (mem.stalls == 0) begin failures++; $display("memory never stalled"); end
    for (int n = 0; n < 10; n++) begin
      logic [127:0] d;
      int a, dones;
      d = {$urandom, $urandom, $urandom, $urandom};
      a = $urandom % 8192;
      @(negedge clk);
      wr_req_valid = 1'b1; wr_req_addr = 32'(a * 16); wr_req_data = d;
      while (!wr_req_ready) @(negedge clk);
      @(negedge clk);
      wr_req_valid = 1'b0;
      dones = 0;
      repeat (30) begin
        @(posedge clk);
        if (wr_done) dones++;
      end
      checks++;
      if (dones != 1) begin failures++; $display("write %0d: %0d done pulses", n, dones); end
      checks++;
      if (mem.mem[a] !== d) begin failures++; $display("write %0d data wrong", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
