// tb_actor: self-checking test of ReAgent's actor network.
//
// Loads both parameter sets (translation and rotation) of a reduced actor
// (state 2*FD, hidden H1 and H2, 33 outputs) with random values, drives random
// source and template features and checks, for both sets, that the three
// label outputs equal the per-axis argmax of the scores computed here layer by
// layer (Quant, QuantFC, Quant, QuantFC, dequantise, FC) in integer
// arithmetic. The run time must equal the sum of the layer costs
// (Quant: n cycles, FC(m,n): ceil(n/PO) * m cycles) plus one cycle per layer
// hand-over and one for the argmax.
module tb_actor;
  import pn_pkg::*;
  localparam int unsigned FD = 4, H1 = 8, H2 = 8, PO1 = 4, PO2 = 4, PO3 = 2;
  localparam int unsigned SD = 2 * FD, NOUT = 3 * N_LABEL;
  localparam int unsigned W0 = quant_words(SD), W1 = qconv_words(SD, H1), W2 = quant_words(H1);
  localparam int unsigned W3 = qconv_words(H1, H2), W4 = affine_words(H2), W5 = conv_words(H2, NOUT);
  localparam int unsigned NW = 2 * (W0 + W1 + W2 + W3 + W4 + W5);
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, pset = 1'b0, busy, done;
  logic pw_valid = 1'b0;
  logic [23:0] pw_addr = '0;
  logic [127:0] pw_data = '0;
  fx_t feat_s [FD], feat_t [FD];
  logic [3:0] labels [3];
  int checks = 0, failures = 0;

  fx_t s0 [2][SD], h0 [2][SD], s2 [2][H1], h2 [2][H1], s4 [2][H2], h4 [2][H2];
  logic signed [7:0] w1 [2][H1][SD], w3 [2][H2][H1];
  fx_t w5 [2][NOUT][H2], b5 [2][NOUT];
  logic [7:0] lut [LUT_LEN];
  logic [127:0] img [NW];

  actor #(.FD(FD), .H1(H1), .H2(H2), .PO1(PO1), .PO2(PO2), .PO3(PO3), .BASE(0)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint aff(input longint v, input fx_t sc, input fx_t sh, input int frac);
    longint p;
    p = v * longint'(sc);
    if (frac > 0) p = (p + 32768) >>> 16;
    p = p + longint'(sh);
    if (p < 0) p = 0;
    if (p > 64'sh7FFF_FFFF) p = 64'sh7FFF_FFFF;
    return p;
  endfunction
  function automatic int code(input longint u);
    longint idx;
    idx = (u + 32768) >>> 16;
    if (idx > LUT_LEN - 1) idx = LUT_LEN - 1;
    return int'(lut[idx]);
  endfunction

  task automatic put32(input int base, input int i, input fx_t v);
    img[base + i / 4][32*(i % 4) +: 32] = v;
  endtask
  task automatic put8(input int base, input int i, input logic [7:0] v);
    img[base + i / 16][8*(i % 16) +: 8] = v;
  endtask

  initial begin
    int a;
    for (int i = 0; i < int'(LUT_LEN); i++) lut[i] = 8'((i + 4) / 9);
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < int'(SD); c++) begin
        s0[s][c] = 32'sd37000000 + $signed(32'($urandom % 2000000));
        h0[s][c] = $signed(32'($urandom % 4000000)) - 32'sd1000000;
        for (int k = 0; k < int'(H1); k++) w1[s][k][c] = 8'($urandom);
      end
      for (int c = 0; c < int'(H1); c++) begin
        s2[s][c] = 32'sd800 + $signed(32'($urandom % 1200));
        h2[s][c] = $signed(32'($urandom % 60000000)) - 32'sd10000000;
        for (int k = 0; k < int'(H2); k++) w3[s][k][c] = 8'($urandom);
      end
      for (int c = 0; c < int'(H2); c++) begin
        s4[s][c] = 32'sd1 + $signed(32'($urandom % 3));
        h4[s][c] = $signed(32'($urandom % 20000)) - 32'sd10000;
      end
      for (int o = 0; o < int'(NOUT); o++) begin
        for (int c = 0; c < int'(H2); c++) w5[s][o][c] = $signed(32'($urandom % 131072)) - 32'sd65536;
        b5[s][o] = $signed(32'($urandom % 65536)) - 32'sd32768;
      end
    end
    for (int i = 0; i < int'(NW); i++) img[i] = '0;
    a = 0;
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < int'(SD); c++) begin put32(a, c, s0[s][c]); put32(a + words_of(SD, 4), c, h0[s][c]); end
      for (int i = 0; i < int'(LUT_LEN); i++) put8(a + 2 * words_of(SD, 4), i, lut[i]);
      a += W0;
    end
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < int'(H1 * SD); i++) put8(a, i, w1[s][i / SD][i % SD]);
      a += W1;
    end
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < int'(H1); c++) begin put32(a, c, s2[s][c]); put32(a + words_of(H1, 4), c, h2[s][c]); end
      for (int i = 0; i < int'(LUT_LEN); i++) put8(a + 2 * words_of(H1, 4), i, lut[i]);
      a += W2;
    end
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < int'(H2 * H1); i++) put8(a, i, w3[s][i / H1][i % H1]);
      a += W3;
    end
    for (int s = 0; s < 2; s++) begin
      for (int c = 0; c < int'(H2); c++) begin put32(a, c, s4[s][c]); put32(a + words_of(H2, 4), c, h4[s][c]); end
      a += W4;
    end
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < int'(NOUT * H2); i++) put32(a, i, w5[s][i / H2][i % H2]);
      for (int o = 0; o < int'(NOUT); o++) put32(a + words_of(NOUT * H2, 4), o, b5[s][o]);
      a += W5;
    end
    for (int i = 0; i < int'(FD); i++) begin feat_s[i] = '0; feat_t[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < int'(NW); i++) begin
      @(negedge clk);
      pw_valid = 1'b1; pw_addr = 24'(i); pw_data = img[i];
    end
    @(negedge clk);
    pw_valid = 1'b0;
    for (int run = 0; run < 6; run++) begin
      int s, cyc, expc, lab [3];
      longint st [SD], z, u1 [H1], f2 [H2], sc [NOUT];
      int q0 [SD], q1 [H1];
      s = run % 2;
      for (int i = 0; i < int'(FD); i++) begin
        feat_s[i] = $signed(32'($urandom % 300000)) - 32'sd60000;
        feat_t[i] = $signed(32'($urandom % 300000)) - 32'sd60000;
        st[i] = longint'(feat_s[i]); st[FD + i] = longint'(feat_t[i]);
      end
      for (int c = 0; c < int'(SD); c++) q0[c] = code(aff(st[c], s0[s][c], h0[s][c], 16));
      for (int k = 0; k < int'(H1); k++) begin
        z = 0;
        for (int c = 0; c < int'(SD); c++) z += longint'(q0[c]) * longint'(w1[s][k][c]);
        q1[k] = code(aff(z, s2[s][k], h2[s][k], 0));
      end
      for (int k = 0; k < int'(H2); k++) begin
        z = 0;
        for (int c = 0; c < int'(H1); c++) z += longint'(q1[c]) * longint'(w3[s][k][c]);
        f2[k] = aff(z, s4[s][k], h4[s][k], 0);
      end
      for (int o = 0; o < int'(NOUT); o++) begin
        z = longint'(b5[s][o]) <<< 16;
        for (int c = 0; c < int'(H2); c++) z += f2[c] * longint'(w5[s][o][c]);
        z = (z + 32768) >>> 16;
        if (z > 64'sh7FFF_FFFF) z = 64'sh7FFF_FFFF;
        if (z < -64'sh8000_0000) z = -64'sh8000_0000;
        sc[o] = z;
      end
      for (int ax = 0; ax < 3; ax++) begin
        lab[ax] = 0;
        for (int l = 1; l < int'(N_LABEL); l++) if (sc[ax * N_LABEL + l] > sc[ax * N_LABEL + lab[ax]]) lab[ax] = l;
      end
      @(negedge clk);
      start = 1'b1; pset = s[0];
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      for (int ax = 0; ax < 3; ax++) begin
        checks++;
        if (int'(labels[ax]) != lab[ax]) begin
          failures++;
          $display("run %0d set %0d axis %0d: label %0d vs %0d", run, s, ax, labels[ax], lab[ax]);
        end
      end
      expc = SD + ((H1 + PO1 - 1) / PO1) * SD + H1 + ((H2 + PO2 - 1) / PO2) * H1 + H2
           + ((NOUT + PO3 - 1) / PO3) * H2;
      checks++;
      if (cyc != expc + 8) begin failures++; $display("actor took %0d cycles, layers %0d", cyc, expc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
