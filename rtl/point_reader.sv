// point_reader: the Read stage of the PointNet pipeline.
//
// Fetches one tile of up to B points from external memory. A point is one
// 128-bit word holding x, y, z as FP32 in bits [31:0], [63:32] and [95:64]
// (bits [127:96] unused), matching the paper's "N 128-bit packets with each
// containing three 32-bit floating-point coordinates". On `start` the reader
// issues one read request of `n_pts` beats at `addr` on the memory request
// port, stores the returned words in output bank `wr_bank` and pulses `done`
// after the last beat. Unused slots of a partial tile keep old data; later
// stages ignore them. Its latency is the memory's: n_pts beats plus the read
// round trip.
module point_reader
  import pn_pkg::*;
#(
  parameter int unsigned B = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [31:0]  addr,
  input  logic [$clog2(B+1)-1:0] n_pts,
  input  logic         wr_bank,
  output logic         busy,
  output logic         done,
  // memory read request port
  output logic         rd_req_valid,
  input  logic         rd_req_ready,
  output logic [31:0]  rd_req_addr,
  output logic [15:0]  rd_req_beats,
  input  logic         rd_valid,
  input  logic [127:0] rd_data,
  input  logic         rd_last,
  // tile of points
  output fvec3_t       pts [2][B]
);
  logic [$clog2(B+1)-1:0] cnt;
  logic                   wb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rd_req_valid <= 1'b0;
      rd_req_addr  <= '0;
      rd_req_beats <= '0;
      cnt <= '0;
      wb  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (rd_req_valid && rd_req_ready) rd_req_valid <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          rd_req_valid <= 1'b1;
          rd_req_addr  <= addr;
          rd_req_beats <= 16'(n_pts);
          cnt <= '0;
          wb  <= wr_bank;
        end
      end else if (rd_valid) begin
        if (int'(cnt) < B) pts[wb][cnt] <= {rd_data[31:0], rd_data[63:32], rd_data[95:64]};  // [0]=x, [1]=y, [2]=z
        cnt <= cnt + 1'b1;
        if (rd_last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
