// tb_rigid_transform: self-checking test of the Transform stage.
//
// Fills both point banks with random points, applies a random rigid transform
// about a random centre mu and compares each Q16.16 output with
// R (p - mu) + mu + t computed here in double precision, within 2^-12. It also
// checks the cost of ceil(B/PP) cycles per tile.
module tb_rigid_transform;
  import pn_pkg::*;
  localparam int unsigned B = 5, PP = 2;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, rd_bank = 1'b0, wr_bank = 1'b0, busy, done;
  pose_t g;
  fvec3_t mu;
  fvec3_t pts [2][B];
  fx_t y [2][B][3];
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
  rigid_transform #(.B(B), .PP(PP)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r [3][3], t [3], m [3], c, s;
    g = pose_identity();
    for (int i = 0; i < 3; i++) mu[i] = '0;
    for (int b = 0; b < 2; b++) for (int p = 0; p < int'(B); p++) for (int i = 0; i < 3; i++) pts[b][p][i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 6; run++) begin
      c = $cos(real'(run) + 0.3); s = $sin(real'(run) + 0.3);
      r = '{'{c, -s, 0.0}, '{s, c, 0.0}, '{0.0, 0.0, 1.0}};
      if (run % 2 == 1) r = '{'{1.0, 0.0, 0.0}, '{0.0, c, -s}, '{0.0, s, c}};
      for (int i = 0; i < 3; i++) begin
        t[i] = real'($urandom % 2000) / 1000.0 - 1.0;
        m[i] = (run < 2) ? 0.0 : real'($urandom % 2000) / 1000.0 - 1.0;
        g[i][3] = r2f(t[i]); t[i] = f2r(g[i][3]);
        mu[i] = r2f(m[i]); m[i] = f2r(mu[i]);
        for (int j = 0; j < 3; j++) begin g[i][j] = r2f(r[i][j]); r[i][j] = f2r(g[i][j]); end
      end
      for (int p = 0; p < int'(B); p++) for (int i = 0; i < 3; i++)
        pts[run % 2][p][i] = r2f(real'($urandom % 4000) / 1000.0 - 2.0);
      start = 1'b1; rd_bank = run[0]; wr_bank = ~run[0];
      @(negedge clk);
      start = 1'b0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != (B + PP - 1) / PP + 1) begin failures++; $display("cycles %0d", cycles); end
      for (int p = 0; p < int'(B); p++) for (int i = 0; i < 3; i++) begin
        real e, got;
        e = m[i] + t[i];
        for (int j = 0; j < 3; j++) e += r[i][j] * (f2r(pts[run % 2][p][j]) - m[j]);
        got = real'(y[~run[0]][p][i]) / 65536.0;
        checks++;
        if (got - e > 1.0 / 4096.0 || e - got > 1.0 / 4096.0) begin
          failures++;
          if (failures < 10) $display("run %0d p %0d i %0d: %f vs %f", run, p, i, got, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
