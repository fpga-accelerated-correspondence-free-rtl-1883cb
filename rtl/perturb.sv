// perturb: the Perturb module of PointLKCore.
//
// Produces the small rigid transform deltaG_j^{+/-} = I + (+/-) t e_j^wedge used
// to perturb the template for the numerical Jacobian. Because t is small the
// exponential reduces to this first-order form and every element is 0, 1 or
// +/-t, as the paper states. j = 0..2 is a rotation by +/-t about x, y, z
// (the skew-symmetric block of e_j^wedge), j = 3..5 a translation by +/-t along
// x, y, z (the last column). The paper counts j from 1; here it counts from 0.
// Combinational; t is FP32, `neg` selects the minus sign.
module perturb
  import pn_pkg::*;
(
  input  logic [2:0] j,
  input  logic       neg,
  input  fp_t        t,
  output pose_t      dg
);
  fp_t st;
  assign st = neg ? fp_neg(t) : t;

  always_comb begin
    dg = pose_identity();
    unique case (j)
      3'd0: begin dg[1][2] = fp_neg(st); dg[2][1] = st;         end  // about x
      3'd1: begin dg[0][2] = st;         dg[2][0] = fp_neg(st); end  // about y
      3'd2: begin dg[0][1] = fp_neg(st); dg[1][0] = st;         end  // about z
      3'd3: dg[0][3] = st;
      3'd4: dg[1][3] = st;
      3'd5: dg[2][3] = st;
      default: ;
    endcase
  end
endmodule
