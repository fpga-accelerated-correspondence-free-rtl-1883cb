// tb_perturb: self-checking test of the twist-perturbation generator.
//
// For every generator j (0-2 rotations about x, y, z; 3-5 translations along
// x, y, z) and both signs, checks every entry of dG = I +/- t e_j^ against the
// expected matrix built here from the se(3) basis. Combinational block, so no
// cycle count applies.
module tb_perturb;
  import pn_pkg::*;
  logic [2:0] j = '0;
  logic neg = 1'b0;
  fp_t t = '0;
  pose_t dg;
  int checks = 0, failures = 0;
  // binary32 <-> real conversions, written out so the checks do not rely on real
  function automatic real f2r(input logic [31:0] b);
    real m;
    if (b[30:23] == 8'd0) return 0.0;
    m = (1.0 + real'(b[22:0]) / 8388608.0) * $pow(2.0, real'(int'(b[30:23]) - 127));
    return b[31] ? -m : m;
  endfunction
  function automatic logic [31:0] r2f(input real x);
    logic [63:0] d;
    logic [24:0] m;
    int e;
    d = $realtobits(x);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == 11'd0 || e <= 0) return 32'd0;
    m = {2'b01, d[51:29]} + 25'(d[28]);
    if (m[24]) begin m = m >> 1; e++; end
    return {d[63], 8'(e), m[22:0]};
  endfunction

  perturb dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      real tv;
      tv = (rep == 0) ? 0.01 : real'($urandom % 1000) / 1000.0 + 0.001;
      for (int jj = 0; jj < 6; jj++) begin
        for (int sg = 0; sg < 2; sg++) begin
          real e [3][4];
          real s;
          s = sg ? -tv : tv;
          for (int r = 0; r < 3; r++) for (int c = 0; c < 4; c++) e[r][c] = (r == c) ? 1.0 : 0.0;
          case (jj)
            0: begin e[1][2] = -s; e[2][1] = s; end
            1: begin e[0][2] = s;  e[2][0] = -s; end
            2: begin e[0][1] = -s; e[1][0] = s; end
            default: e[jj - 3][3] = s;
          endcase
          j = 3'(jj); neg = sg[0]; t = r2f(tv);
          #1;
          for (int r = 0; r < 3; r++) for (int c = 0; c < 4; c++) begin
            checks++;
            if (f2r(dg[r][c]) != f2r(r2f(e[r][c]))) begin
              failures++;
              $display("j %0d neg %0d [%0d][%0d]: %f vs %f (%h)", jj, sg, r, c, f2r(dg[r][c]), e[r][c], dg[r][c]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
