// se3_exp: the Exp module of PointLKCore, exp: se(3) -> SE(3).
//
// Input twist xi = (omega, rho) (FP32, omega = xi[0..2] rotation, rho =
// xi[3..5] translation). Output G = [R | t] with
//   R = I + A W + B W^2            (Rodrigues' formula, W = omega^wedge)
//   t = (I + B W + C W^2) rho      (left Jacobian of SO(3) times rho)
// where A = sin(th)/th, B = (1-cos(th))/th^2, C = (th-sin(th))/th^3 and
// th = |omega|. The paper names the formulas; evaluating A, B, C as Taylor
// series in th^2 up to th^8 is this design's choice: it needs neither square
// root, division nor trigonometric unit, and its error stays below 1e-6
// relative for th <= 1 rad, the range of LK updates. FP32 throughout.
// Timing: `start` latches xi; the result appears with `done` one cycle later.
module se3_exp
  import pn_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [5:0][31:0] xi,
  output logic         done,
  output pose_t        g
);
  // Taylor coefficients, FP32 bit patterns
  localparam fp_t A0 = 32'h3F800000, A1 = 32'hBE2AAAAB, A2 = 32'h3C088889, A3 = 32'hB9500D01, A4 = 32'h3638EF1D;
  localparam fp_t B0 = 32'h3F000000, B1 = 32'hBD2AAAAB, B2 = 32'h3AB60B61, B3 = 32'hB7D00D01, B4 = 32'h3493F27E;
  localparam fp_t EC0 = 32'h3E2AAAAB, EC1 = 32'hBC088889, EC2 = 32'h39500D01, EC3 = 32'hB638EF1D, EC4 = 32'h32D7322B;

  function automatic fp_t horner(input fp_t x, input fp_t c0, input fp_t c1, input fp_t c2,
                                 input fp_t c3, input fp_t c4);
    fp_t r;
    r = fp_add(fp_mul(c4, x), c3);
    r = fp_add(fp_mul(r, x), c2);
    r = fp_add(fp_mul(r, x), c1);
    return fp_add(fp_mul(r, x), c0);
  endfunction

  function automatic pose_t exp_map(input logic [5:0][31:0] v);
    fmat3_t w, w2, r, jl;
    fvec3_t t, rho;
    fp_t th2, a, b, c;
    th2 = fp_add(fp_add(fp_mul(v[0], v[0]), fp_mul(v[1], v[1])), fp_mul(v[2], v[2]));
    a = horner(th2, A0, A1, A2, A3, A4);
    b = horner(th2, B0, B1, B2, B3, B4);
    c = horner(th2, EC0, EC1, EC2, EC3, EC4);
    w = '{'{FP_ZERO, fp_neg(v[2]), v[1]},
          '{v[2], FP_ZERO, fp_neg(v[0])},
          '{fp_neg(v[1]), v[0], FP_ZERO}};
    w2 = mat3_mul(w, w);
    for (int i = 0; i < 3; i++) begin
      for (int k = 0; k < 3; k++) begin
        fp_t id;
        id = (i == k) ? FP_ONE : FP_ZERO;
        r[i][k]  = fp_add(id, fp_add(fp_mul(a, w[i][k]), fp_mul(b, w2[i][k])));
        jl[i][k] = fp_add(id, fp_add(fp_mul(b, w[i][k]), fp_mul(c, w2[i][k])));
      end
      rho[i] = v[3 + i];
    end
    t = mat3_vec(jl, rho);
    return make_pose(r, t);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0;
      g    <= pose_identity();
    end else begin
      done <= start;
      if (start) g <= exp_map(xi);
    end
  end
endmodule
