// gmem_master: the core's 128-bit AXI4 manager port ("gmem").
//
// Turns simple requests from the core into AXI4 transactions. A read request
// (address, number of 128-bit beats) is split into INCR bursts of at most
// MAX_BURST beats that never cross a 4 KB boundary; the returned beats are
// forwarded on rd_valid/rd_data, with rd_last on the final beat of the whole
// request. A write request carries one 128-bit word and becomes a single-beat
// burst; wr_done pulses when the write response arrives. Reads and writes are
// independent. Addresses must be 16-byte aligned. The paper gives the port's
// width and role (point clouds, parameters and transforms moved in bursts);
// the burst length limit and the request interface are this design's choices.
// A concurrent assertion checks that AR stays stable while it waits for
// ready; its `disable iff (!rst_n)` makes lint see rst_n both as the flops'
// reset and as a plain signal in the check, a warning that is expected here.
module gmem_master
  import pn_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // read requests
  input  logic         rd_req_valid,
  output logic         rd_req_ready,
  input  logic [31:0]  rd_req_addr,
  input  logic [15:0]  rd_req_beats,
  output logic         rd_valid,
  output logic [127:0] rd_data,
  output logic         rd_last,
  // write requests
  input  logic         wr_req_valid,
  output logic         wr_req_ready,
  input  logic [31:0]  wr_req_addr,
  input  logic [127:0] wr_req_data,
  output logic         wr_done,
  // AXI4 manager
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
  output logic         m_axi_bready
);
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA} rstate_e;
  typedef enum logic [1:0] {W_IDLE, W_SEND, W_RESP} wstate_e;
  rstate_e rs;
  wstate_e ws;
  logic [31:0] raddr;
  logic [15:0] rrem;      // beats of the request not yet received
  logic [8:0]  rburst;    // beats of the current burst not yet received

  function automatic logic [8:0] burst_len(input logic [31:0] a, input logic [15:0] rem);
    logic [8:0] to_4k;
    logic [15:0] n;
    to_4k = 9'(9'd256 - {1'b0, a[11:4]});
    n = rem;
    if (n > 16'(MAX_BURST)) n = 16'(MAX_BURST);
    if (n > 16'(to_4k)) n = 16'(to_4k);
    return n[8:0];
  endfunction

  assign m_axi_arsize  = 3'd4;    // 16 bytes per beat
  assign m_axi_arburst = 2'b01;   // INCR
  assign m_axi_awsize  = 3'd4;
  assign m_axi_awburst = 2'b01;
  assign m_axi_awlen   = 8'd0;
  assign m_axi_wstrb   = 16'hFFFF;
  assign m_axi_wlast   = 1'b1;
  assign m_axi_rready  = (rs == R_DATA);
  assign m_axi_bready  = (ws == W_RESP);
  assign rd_req_ready  = (rs == R_IDLE);
  assign wr_req_ready  = (ws == W_IDLE);
  assign rd_valid      = (rs == R_DATA) && m_axi_rvalid;
  assign rd_data       = m_axi_rdata;
  assign rd_last       = rd_valid && (rrem == 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE;
      raddr <= '0; rrem <= '0; rburst <= '0;
      m_axi_araddr <= '0; m_axi_arlen <= '0; m_axi_arvalid <= 1'b0;
    end else begin
      unique case (rs)
        R_IDLE: if (rd_req_valid && rd_req_beats != 16'd0) begin
          raddr <= rd_req_addr;
          rrem  <= rd_req_beats;
          rs    <= R_ADDR;
        end
        R_ADDR: begin
          if (!m_axi_arvalid) begin
            automatic logic [8:0] n = burst_len(raddr, rrem);
            m_axi_araddr  <= raddr;
            m_axi_arlen   <= 8'(n - 9'd1);
            m_axi_arvalid <= 1'b1;
            rburst        <= n;
            raddr         <= raddr + {19'd0, n, 4'd0};
          end else if (m_axi_arready) begin
            m_axi_arvalid <= 1'b0;
            rs <= R_DATA;
          end
        end
        R_DATA: if (m_axi_rvalid) begin
          rrem   <= rrem - 16'd1;
          rburst <= rburst - 9'd1;
          if (rrem == 16'd1)        rs <= R_IDLE;
          else if (rburst == 9'd1)  rs <= R_ADDR;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  logic aw_ok, w_ok;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_IDLE;
      m_axi_awaddr <= '0; m_axi_awvalid <= 1'b0;
      m_axi_wdata <= '0; m_axi_wvalid <= 1'b0;
      aw_ok <= 1'b0; w_ok <= 1'b0;
      wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      unique case (ws)
        W_IDLE: if (wr_req_valid) begin
          m_axi_awaddr  <= wr_req_addr;
          m_axi_awvalid <= 1'b1;
          m_axi_wdata   <= wr_req_data;
          m_axi_wvalid  <= 1'b1;
          aw_ok <= 1'b0; w_ok <= 1'b0;
          ws <= W_SEND;
        end
        W_SEND: begin
          if (m_axi_awvalid && m_axi_awready) begin m_axi_awvalid <= 1'b0; aw_ok <= 1'b1; end
          if (m_axi_wvalid && m_axi_wready)   begin m_axi_wvalid  <= 1'b0; w_ok  <= 1'b1; end
          if ((aw_ok || (m_axi_awvalid && m_axi_awready)) && (w_ok || (m_axi_wvalid && m_axi_wready)))
            ws <= W_RESP;
        end
        W_RESP: if (m_axi_bvalid) begin
          wr_done <= 1'b1;
          ws <= W_IDLE;
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  // AXI rule: address and data stay stable while valid waits for ready.
  property p_stable_ar;
    @(posedge clk) disable iff (!rst_n) m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr);
  endproperty
  a_stable_ar: assert property (p_stable_ar);
endmodule
