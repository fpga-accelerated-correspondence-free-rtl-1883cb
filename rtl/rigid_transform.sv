// rigid_transform: the Transform stage of the PointNet pipeline.
//
// Applies a rigid transform G = [R|t] to each point of a tile and converts
// the result to the Q16.16 format of the first convolution. The arithmetic is
// FP32, as the paper uses single precision for geometric operations. The
// general form p' = R (p - mu) + mu + t covers both cores: PointLKCore passes
// mu = 0 (plain G p), ReAgentCore passes the centroid mu of the cloud, which is
// the disentangled transform of ReAgent. How mu is obtained is not given in the
// paper; here it is an input, supplied by the host through a control register.
// PP points are transformed per cycle, ceil(B/PP) cycles per tile; the
// arithmetic is combinational within the cycle. Control and banks work as in
// conv_layer.
module rigid_transform
  import pn_pkg::*;
#(
  parameter int unsigned B  = 2,
  parameter int unsigned PP = 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  logic   rd_bank,
  input  logic   wr_bank,
  input  pose_t  g,
  input  fvec3_t mu,
  output logic   busy,
  output logic   done,
  input  fvec3_t pts [2][B],
  output fx_t    y   [2][B][3]
);
  localparam int unsigned NPB = (B + PP - 1) / PP;

  logic [$clog2(NPB+1)-1:0] pb;
  logic                     rb, wb;

  function automatic fvec3_t xform(input fvec3_t p, input pose_t gg, input fvec3_t m);
    fvec3_t d, r;
    for (int i = 0; i < 3; i++) d[i] = fp_sub(p[i], m[i]);
    r = mat3_vec(pose_rot(gg), d);
    for (int i = 0; i < 3; i++) r[i] = fp_add(fp_add(r[i], m[i]), gg[i][3]);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pb <= '0; rb <= 1'b0; wb <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          pb <= '0; rb <= rd_bank; wb <= wr_bank;
        end
      end else begin
        for (int p = 0; p < PP; p++) begin
          automatic int unsigned pi = int'(pb) * PP + p;
          if (pi < B) begin
            automatic fvec3_t q = xform(pts[rb][pi], g, mu);
            for (int i = 0; i < 3; i++) y[wb][pi][i] <= fp_to_fx(q[i]);
          end
        end
        if (int'(pb) == NPB - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else pb <= pb + 1'b1;
      end
    end
  end
endmodule
