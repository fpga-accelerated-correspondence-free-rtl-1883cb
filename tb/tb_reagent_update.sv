// tb_reagent_update: self-checking test of ReAgent's pose update.
//
// Loads the step table (step T(a) = sign(a - 5) 3^|a-5| / 900, and its sine
// and cosine) over the parameter bus, then applies random translation and
// rotation labels to a random pose and compares the result with
// R' = Rx(T(a_rx)) Ry(T(a_ry)) Rz(T(a_rz)) R and t' = t + T(a_t), computed
// here in double precision, within 1e-5. Checks the one-cycle latency.
module tb_reagent_update;
  import pn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic pw_valid = 1'b0;
  logic [23:0] pw_addr = '0;
  logic [127:0] pw_data = '0;
  logic [3:0] a_t [3];
  logic [3:0] a_r [3];
  pose_t g_in, g_out;
  real stp [N_LABEL];
  int checks = 0, failures = 0;
  // binary32 <-> real conversions, written out so the checks do not rely on shortreal
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
  reagent_update #(.BASE(7)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void rot(input int ax, input real ang, output real m [3][3]);
    real c, s;
    c = $cos(ang); s = $sin(ang);
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) m[i][j] = (i == j) ? 1.0 : 0.0;
    case (ax)
      0: begin m[1][1] = c; m[1][2] = -s; m[2][1] = s; m[2][2] = c; end
      1: begin m[0][0] = c; m[0][2] = s; m[2][0] = -s; m[2][2] = c; end
      default: begin m[0][0] = c; m[0][1] = -s; m[1][0] = s; m[1][1] = c; end
    endcase
  endfunction

  initial begin
    logic [31:0] tw [3 * N_LABEL];
    for (int a = 0; a < int'(N_LABEL); a++) begin
      int d;
      d = a - int'(N_ACT);
      stp[a] = (d == 0) ? 0.0 : ((d > 0) ? 1.0 : -1.0) * $pow(3.0, real'(d < 0 ? -d : d)) / 900.0;
      tw[3 * a] = r2f(stp[a]); tw[3 * a + 1] = r2f($sin(stp[a])); tw[3 * a + 2] = r2f($cos(stp[a]));
    end
    for (int i = 0; i < 3; i++) begin a_t[i] = '0; a_r[i] = '0; end
    g_in = pose_identity();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < (3 * int'(N_LABEL) + 3) / 4; w++) begin
      @(negedge clk);
      pw_valid = 1'b1; pw_addr = 24'(7 + w); pw_data = '0;
      for (int k = 0; k < 4; k++) if (4 * w + k < 3 * int'(N_LABEL)) pw_data[32*k +: 32] = tw[4 * w + k];
    end
    @(negedge clk);
    pw_valid = 1'b0;
    for (int n = 0; n < 100; n++) begin
      real r0 [3][3], m [3][3], q [3][3], t0 [3], e;
      rot(n % 3, real'($urandom % 628) / 100.0, r0);
      rot((n + 1) % 3, real'($urandom % 628) / 100.0, m);
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        q[i][j] = 0.0;
        for (int k = 0; k < 3; k++) q[i][j] += r0[i][k] * m[k][j];
      end
      for (int i = 0; i < 3; i++) begin
        for (int j = 0; j < 3; j++) begin g_in[i][j] = r2f(q[i][j]); r0[i][j] = f2r(g_in[i][j]); end
        t0[i] = real'($urandom % 2000) / 1000.0 - 1.0;
        g_in[i][3] = r2f(t0[i]);
        t0[i] = f2r(g_in[i][3]);
        a_t[i] = 4'($urandom % N_LABEL);
        a_r[i] = 4'($urandom % N_LABEL);
      end
      // reference
      begin
        real rx [3][3], ry [3][3], rz [3][3], p1 [3][3], p2 [3][3], rr [3][3];
        rot(0, stp[a_r[0]], rx); rot(1, stp[a_r[1]], ry); rot(2, stp[a_r[2]], rz);
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          p1[i][j] = 0.0;
          for (int k = 0; k < 3; k++) p1[i][j] += rx[i][k] * ry[k][j];
        end
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          p2[i][j] = 0.0;
          for (int k = 0; k < 3; k++) p2[i][j] += p1[i][k] * rz[k][j];
        end
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          rr[i][j] = 0.0;
          for (int k = 0; k < 3; k++) rr[i][j] += p2[i][k] * r0[k][j];
        end
        start = 1'b1;
        @(negedge clk);
        start = 1'b0;
        checks++;
        if (!done) begin failures++; $display("done not one cycle after start"); end
        for (int i = 0; i < 3; i++) for (int j = 0; j < 4; j++) begin
          e = (j < 3) ? rr[i][j] : t0[i] + stp[a_t[i]];
          checks++;
          if (f2r(g_out[i][j]) - e > 1e-5 || e - f2r(g_out[i][j]) > 1e-5) begin
            failures++;
            if (failures < 10) $display("n %0d [%0d][%0d]: %f vs %f", n, i, j, f2r(g_out[i][j]), e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
