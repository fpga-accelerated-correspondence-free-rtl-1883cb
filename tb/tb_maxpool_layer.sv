// tb_maxpool_layer: self-checking test of the MaxPool submodule.
//
// Clears the global feature with `init`, then streams tiles of random signed
// QuantConv outputs from alternating banks, the last tile only partly valid,
// and checks after every tile that feat[c] is the running maximum of
// relu(scale_c * z + shift_c) over all valid points so far. It also checks the
// per-tile cost of ceil(B/PP) * ceil(N/PO) cycles.
module tb_maxpool_layer;
  import pn_pkg::*;
  localparam int unsigned N = 20, B = 4, PP = 2, PO = 8, ZW = 18;
  localparam int unsigned AW = words_of(N, 4), WORDS = affine_words(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic pw_valid = 1'b0;
  logic [23:0] pw_addr = '0;
  logic [127:0] pw_data = '0;
  logic init = 1'b0, start = 1'b0, rd_bank = 1'b0;
  logic [2:0] n_valid = '0;
  logic busy, done;
  logic signed [ZW-1:0] x [2][B][N];
  fx_t feat [N];
  fx_t sc [N], sh [N];
  longint expv [N];
  int checks = 0, failures = 0, busy_cycles;

  maxpool_layer #(.N(N), .B(B), .PP(PP), .PO(PO), .ZW(ZW), .BASE(0)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < N; c++) begin
      sc[c] = 32'sd1 + $signed(32'($urandom % 300));
      sh[c] = $signed(32'($urandom % 2000000)) - 32'sd1000000;
      expv[c] = -64'sd2147483648;
    end
    for (int b = 0; b < 2; b++) for (int p = 0; p < B; p++) for (int c = 0; c < N; c++) x[b][p][c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < int'(WORDS); a++) begin
      @(negedge clk);
      pw_valid = 1'b1; pw_addr = 24'(a); pw_data = '0;
      for (int k = 0; k < 4; k++) begin
        if (a < int'(AW)) begin
          if (a * 4 + k < N) pw_data[32*k +: 32] = sc[a * 4 + k];
        end else if ((a - AW) * 4 + k < N) pw_data[32*k +: 32] = sh[(a - AW) * 4 + k];
      end
    end
    @(negedge clk);
    pw_valid = 1'b0;
    init = 1'b1;
    @(negedge clk);
    init = 1'b0;
    for (int t = 0; t < 5; t++) begin
      int nv;
      nv = (t == 4) ? 3 : B;
      for (int p = 0; p < B; p++) for (int c = 0; c < N; c++) x[t % 2][p][c] = ZW'($urandom);
      // points beyond n_valid hold a huge value that must be ignored
      if (nv < B) for (int c = 0; c < N; c++) x[t % 2][B - 1][c] = {1'b0, {(ZW - 1){1'b1}}};
      for (int p = 0; p < nv; p++) for (int c = 0; c < N; c++) begin
        longint u;
        u = longint'(x[t % 2][p][c]) * longint'(sc[c]) + longint'(sh[c]);
        if (u < 0) u = 0;
        if (u > 64'sh7FFF_FFFF) u = 64'sh7FFF_FFFF;
        if (u > expv[c]) expv[c] = u;
      end
      @(negedge clk);
      start = 1'b1; rd_bank = t[0]; n_valid = 3'(nv);
      @(negedge clk);
      start = 1'b0;
      busy_cycles = 1;
      while (!done) begin
        @(negedge clk);
        if (busy) busy_cycles++;
      end
      checks++;
      if (busy_cycles != ((B + PP - 1) / PP) * ((N + PO - 1) / PO)) begin
        failures++;
        $display("cycle count %0d", busy_cycles);
      end
      for (int c = 0; c < N; c++) begin
        checks++;
        if (longint'(feat[c]) != expv[c]) begin
          failures++;
          if (failures < 10) $display("tile %0d c %0d: %h vs %h", t, c, feat[c], expv[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
