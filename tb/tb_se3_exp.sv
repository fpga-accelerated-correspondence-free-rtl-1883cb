// tb_se3_exp: self-checking test of the SE(3) exponential map.
//
// Drives random twists with rotation angles up to 1 rad (and the zero twist)
// and compares R and t with Rodrigues' formula and the SO(3) left Jacobian
// evaluated here in double precision with the closed-form sin/cos
// coefficients, within 2e-5 absolute. Checks that `done` follows `start`
// after exactly one cycle.
module tb_se3_exp;
  import pn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic [5:0][31:0] xi = '0;
  pose_t g;
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

  se3_exp dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      real w [3], v [3], th, a, b, c, wm [3][3], w2 [3][3], r [3][3], vj [3][3], t [3];
      for (int k = 0; k < 3; k++) begin
        w[k] = (n == 0) ? 0.0 : (real'($urandom % 20001) / 10000.0 - 1.0) * 0.57;
        v[k] = (real'($urandom % 20001) / 10000.0 - 1.0) * 2.0;
        xi[k]     = r2f((w[k]));
        xi[k + 3] = r2f((v[k]));
        w[k] = real'(f2r(xi[k]));
        v[k] = real'(f2r(xi[k + 3]));
      end
      th = $sqrt(w[0] * w[0] + w[1] * w[1] + w[2] * w[2]);
      if (th < 1e-6) begin a = 1.0; b = 0.5; c = 1.0 / 6.0; end
      else begin
        a = $sin(th) / th; b = (1.0 - $cos(th)) / (th * th); c = (th - $sin(th)) / (th * th * th);
      end
      wm = '{'{0.0, -w[2], w[1]}, '{w[2], 0.0, -w[0]}, '{-w[1], w[0], 0.0}};
      for (int i = 0; i < 3; i++) for (int k = 0; k < 3; k++) begin
        w2[i][k] = 0.0;
        for (int m = 0; m < 3; m++) w2[i][k] += wm[i][m] * wm[m][k];
      end
      for (int i = 0; i < 3; i++) for (int k = 0; k < 3; k++) begin
        r[i][k]  = ((i == k) ? 1.0 : 0.0) + a * wm[i][k] + b * w2[i][k];
        vj[i][k] = ((i == k) ? 1.0 : 0.0) + b * wm[i][k] + c * w2[i][k];
      end
      for (int i = 0; i < 3; i++) t[i] = vj[i][0] * v[0] + vj[i][1] * v[1] + vj[i][2] * v[2];
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      checks++;
      if (!done) begin failures++; $display("done not one cycle after start"); end
      for (int i = 0; i < 3; i++) for (int k = 0; k < 4; k++) begin
        real e, got;
        e = (k < 3) ? r[i][k] : t[i];
        got = real'(f2r(g[i][k]));
        checks++;
        if (got - e > 2e-5 || e - got > 2e-5) begin
          failures++;
          if (failures < 10) $display("n %0d [%0d][%0d]: %f vs %f", n, i, k, got, e);
        end
      end
      @(negedge clk);
      checks++;
      if (done) begin failures++; $display("done longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
