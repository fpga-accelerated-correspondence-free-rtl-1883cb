// tb_quant_layer: self-checking test of the Quant submodule in both forms.
//
// Instance q8 is the code-producing form (OUT_CODES=1) after a Q16.16 layer:
// it applies the per-channel affine map and ReLU, rounds to a table index
// clipped to [0, K Qa] and emits the 8-bit code from the lookup table. The
// table loaded here is the LLT rule code(i) = round(i / K), i.e. the uniform
// quantiser on the K-times finer grid. Instance q32 is the dequantise-only
// form (OUT_CODES=0) on integer inputs, giving Q16.16 outputs. Every output
// is compared with a reference computed here, and the per-tile cost of
// ceil(B/PP) * ceil(N/PO) cycles is checked.
module tb_quant_layer;
  import pn_pkg::*;
  localparam int unsigned N = 9, B = 4, PP = 2, PO = 2, ZW = 20;
  localparam int unsigned AW = words_of(N, 4);
  localparam int unsigned W8 = quant_words(N), W32 = affine_words(N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic pw_valid = 1'b0;
  logic [23:0] pw_addr = '0;
  logic [127:0] pw_data = '0;
  logic start = 1'b0, rd_bank = 1'b0, wr_bank = 1'b1;
  logic [0:0] pset = '0;
  logic busy8, done8, busy32, done32;
  fx_t x8 [2][B][N];
  logic [7:0] y8 [2][B][N];
  logic signed [ZW-1:0] x32 [2][B][N];
  logic [31:0] y32 [2][B][N];
  fx_t sc8 [N], sh8 [N], sc32 [N], sh32 [N];
  logic [7:0] lut [LUT_LEN];
  int checks = 0, failures = 0, busy_cycles;

  quant_layer #(.N(N), .B(B), .PP(PP), .PO(PO), .IW(32), .IN_FRAC(16), .OUT_CODES(1'b1), .BASE(0)) q8 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start, .rd_bank, .wr_bank, .pset,
    .busy(busy8), .done(done8), .x(x8), .y(y8));
  quant_layer #(.N(N), .B(B), .PP(PP), .PO(PO), .IW(ZW), .IN_FRAC(0), .OUT_CODES(1'b0), .BASE(W8)) q32 (
    .clk, .rst_n, .pw_valid, .pw_addr, .pw_data, .start, .rd_bank, .wr_bank, .pset,
    .busy(busy32), .done(done32), .x(x32), .y(y32));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint affine(input longint v, input fx_t sc, input fx_t sh, input int frac);
    longint p;
    p = v * longint'(sc);
    if (frac > 0) p = (p + (64'sd1 <<< (frac - 1))) >>> frac;
    p = p + longint'(sh);
    if (p < 0) p = 0;
    if (p > 64'sh7FFF_FFFF) p = 64'sh7FFF_FFFF;
    return p;
  endfunction

  task automatic put(input int a, input logic [127:0] d);
    @(negedge clk);
    pw_valid = 1'b1; pw_addr = 24'(a); pw_data = d;
  endtask

  initial begin
    for (int i = 0; i < int'(LUT_LEN); i++) lut[i] = 8'((i + K_LLT / 2) / K_LLT);
    for (int c = 0; c < N; c++) begin
      // scale K Qa / s_a with s_a around 4.0 and a small signed shift
      sc8[c]  = 32'sd37000000 + $signed(32'($urandom % 2000000));
      sh8[c]  = $signed(32'($urandom % 400000)) - 32'sd200000;
      sc32[c] = 32'sd100 + $signed(32'($urandom % 1000));
      sh32[c] = $signed(32'($urandom % 200000)) - 32'sd100000;
    end
    for (int b = 0; b < 2; b++) for (int p = 0; p < B; p++) for (int c = 0; c < N; c++) begin
      x8[b][p][c]  = $signed(32'($urandom % 400000)) - 32'sd80000;  // about -1.2 .. 4.9
      x32[b][p][c] = ZW'($signed(32'($urandom % 400000)) - 32'sd200000);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < int'(W8); a++) begin
      logic [127:0] d;
      d = '0;
      if (a < int'(AW)) for (int k = 0; k < 4; k++) begin
        if (a * 4 + k < N) d[32*k +: 32] = sc8[a * 4 + k];
      end else if (a < int'(2 * AW)) for (int k = 0; k < 4; k++) begin
        if ((a - AW) * 4 + k < N) d[32*k +: 32] = sh8[(a - AW) * 4 + k];
      end else for (int k = 0; k < 16; k++) begin
        if ((a - 2 * AW) * 16 + k < LUT_LEN) d[8*k +: 8] = lut[(a - 2 * AW) * 16 + k];
      end
      put(a, d);
    end
    for (int a = 0; a < int'(W32); a++) begin
      logic [127:0] d;
      d = '0;
      for (int k = 0; k < 4; k++) begin
        if (a < int'(AW)) begin
          if (a * 4 + k < N) d[32*k +: 32] = sc32[a * 4 + k];
        end else if ((a - AW) * 4 + k < N) d[32*k +: 32] = sh32[(a - AW) * 4 + k];
      end
      put(W8 + a, d);
    end
    @(negedge clk);
    pw_valid = 1'b0;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk);
      start = 1'b1; rd_bank = run[0]; wr_bank = ~run[0];
      @(negedge clk);
      start = 1'b0;
      busy_cycles = 1;
      while (!(done8 && done32)) begin
        @(negedge clk);
        if (busy8) busy_cycles++;
      end
      checks++;
      if (busy_cycles != ((B + PP - 1) / PP) * ((N + PO - 1) / PO)) begin
        failures++;
        $display("cycle count %0d", busy_cycles);
      end
      for (int p = 0; p < B; p++) for (int c = 0; c < N; c++) begin
        longint u, idx, e32;
        u = affine(longint'(x8[run][p][c]), sc8[c], sh8[c], 16);
        idx = (u + 32768) >>> 16;
        if (idx > LUT_LEN - 1) idx = LUT_LEN - 1;
        checks++;
        if (y8[1 - run][p][c] != lut[idx]) begin
          failures++;
          if (failures < 10) $display("code mismatch p %0d c %0d: %0d vs %0d", p, c, y8[1 - run][p][c], lut[idx]);
        end
        e32 = affine(longint'(x32[run][p][c]), sc32[c], sh32[c], 0);
        checks++;
        if (longint'(y32[1 - run][p][c]) != e32) begin
          failures++;
          if (failures < 10) $display("affine mismatch p %0d c %0d: %h vs %h", p, c, y32[1 - run][p][c], e32);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
