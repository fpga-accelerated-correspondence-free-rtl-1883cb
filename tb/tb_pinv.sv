// tb_pinv: self-checking test of the Jacobian pseudoinverse unit.
//
// Fills a 6 x K Jacobian (stored as its six columns of length K) with random
// values, runs the unit and compares the result with (J^T J)^-1 J^T computed
// here in double precision by Gauss-Jordan elimination, within a relative
// tolerance. It also checks the defining property J^+ J = I6, and that the
// unit takes 2K + 7 cycles: K to accumulate J^T J, six for the blockwise 3x3
// inversion steps and K to multiply, plus the final cycle.
module tb_pinv;
  import pn_pkg::*;
  localparam int unsigned K = 16;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  fp_t jac [6][K];
  fp_t jpinv [6][K];
  int checks = 0, failures = 0, cycles;
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

  pinv #(.K(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 6; i++) for (int k = 0; k < int'(K); k++) jac[i][k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 4; run++) begin
      real jr [6][K], a [6][12], ref_p [6][K];
      for (int i = 0; i < 6; i++) for (int k = 0; k < int'(K); k++) begin
        jac[i][k] = r2f((real'($urandom % 20001) / 10000.0 - 1.0) * ((i < 3) ? 0.5 : 2.0));
        jr[i][k] = f2r(jac[i][k]);
      end
      // reference: [J^T J | I] reduced to [I | (J^T J)^-1]
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        a[i][j] = 0.0;
        for (int k = 0; k < int'(K); k++) a[i][j] += jr[i][k] * jr[j][k];
        a[i][j + 6] = (i == j) ? 1.0 : 0.0;
      end
      for (int c = 0; c < 6; c++) begin
        real piv;
        piv = a[c][c];
        for (int j = 0; j < 12; j++) a[c][j] /= piv;
        for (int i = 0; i < 6; i++) if (i != c) begin
          real f;
          f = a[i][c];
          for (int j = 0; j < 12; j++) a[i][j] -= f * a[c][j];
        end
      end
      for (int i = 0; i < 6; i++) for (int k = 0; k < int'(K); k++) begin
        ref_p[i][k] = 0.0;
        for (int j = 0; j < 6; j++) ref_p[i][k] += a[i][j + 6] * jr[j][k];
      end
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cycles = 1;
      while (!done) begin
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (cycles != 2 * K + 7) begin
        failures++;
        $display("latency %0d, expected %0d", cycles, 2 * K + 7);
      end
      for (int i = 0; i < 6; i++) for (int k = 0; k < int'(K); k++) begin
        real got, d;
        got = f2r(jpinv[i][k]);
        d = got - ref_p[i][k];
        if (d < 0.0) d = -d;
        checks++;
        if (d > 1e-3 * (1.0 + (ref_p[i][k] < 0.0 ? -ref_p[i][k] : ref_p[i][k]))) begin
          failures++;
          if (failures < 10) $display("run %0d [%0d][%0d]: %f vs %f", run, i, k, got, ref_p[i][k]);
        end
      end
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < int'(K); k++) s += f2r(jpinv[i][k]) * jr[j][k];
        if (i == j) s -= 1.0;
        checks++;
        if (s > 1e-3 || s < -1e-3) begin
          failures++;
          if (failures < 10) $display("run %0d (J+ J)[%0d][%0d] off by %f", run, i, j, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
