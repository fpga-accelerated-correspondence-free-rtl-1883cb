// tb_quant_conv: self-checking test of the quantised point-wise convolution.
//
// Loads two random sets of signed 8-bit weight codes, fills both banks with
// random unsigned 8-bit activation codes and checks every integer output
// Z = sum_j x_j w_ij exactly, including the extreme codes (255 x -128), which
// set the accumulator width b_a + b_w + ceil(log2 m). It also checks the
// per-tile cost of ceil(B/PP) * ceil(N/PO) * M busy cycles.
module tb_quant_conv;
  import pn_pkg::*;
  localparam int unsigned M = 12, N = 20, B = 5, PP = 2, PO = 8, NSET = 2, BASE = 3;
  localparam int unsigned WORDS = qconv_words(M, N);
  localparam int unsigned ZW = BA + BW + $clog2(M);

  logic clk = 1'b0, rst_n = 1'b0;
  logic pw_valid = 1'b0;
  logic [23:0] pw_addr = '0;
  logic [127:0] pw_data = '0;
  logic start = 1'b0, rd_bank = 1'b0, wr_bank = 1'b0;
  logic [1:0] pset = '0;
  logic busy, done;
  logic [BA-1:0] x [2][B][M];
  logic signed [ZW-1:0] y [2][B][N];
  logic signed [BW-1:0] w [NSET][N][M];
  int checks = 0, failures = 0, busy_cycles;

  quant_conv #(.M(M), .N(N), .B(B), .PP(PP), .PO(PO), .NSET(NSET), .BASE(BASE)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_out(input int s, input int bank, input int p, input int o);
    int acc;
    acc = 0;
    for (int j = 0; j < M; j++) acc += int'(x[bank][p][j]) * int'(w[s][o][j]);
    return acc;
  endfunction

  initial begin
    for (int b = 0; b < 2; b++) for (int p = 0; p < B; p++) for (int j = 0; j < M; j++)
      x[b][p][j] = 8'($urandom);
    for (int s = 0; s < NSET; s++) for (int o = 0; o < N; o++) for (int j = 0; j < M; j++)
      w[s][o][j] = 8'($urandom);
    for (int j = 0; j < M; j++) begin
      x[0][0][j] = 8'd255;
      w[0][0][j] = -8'sd128;
      w[1][1][j] = 8'sd127;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NSET; s++) begin
      for (int a = 0; a < int'(WORDS); a++) begin
        @(negedge clk);
        pw_valid = 1'b1;
        pw_addr  = 24'(BASE + s * WORDS + a);
        pw_data  = '0;
        for (int k = 0; k < 16; k++) begin
          int idx;
          idx = a * 16 + k;
          if (idx < N * M) pw_data[8*k +: 8] = w[s][idx / M][idx % M];
        end
      end
    end
    @(negedge clk);
    pw_valid = 1'b0;
    for (int run = 0; run < 4; run++) begin
      int s, rb, wbk;
      s = run % 2; rb = run / 2; wbk = 1 - rb;
      @(negedge clk);
      start = 1'b1; rd_bank = rb[0]; wr_bank = wbk[0]; pset = 2'(s);
      @(negedge clk);
      start = 1'b0;
      busy_cycles = 1;
      while (!done) begin
        @(negedge clk);
        if (busy) busy_cycles++;
      end
      checks++;
      if (busy_cycles != ((B + PP - 1) / PP) * ((N + PO - 1) / PO) * M) begin
        failures++;
        $display("cycle count %0d", busy_cycles);
      end
      for (int p = 0; p < B; p++) for (int o = 0; o < N; o++) begin
        checks++;
        if (int'(y[wbk][p][o]) != ref_out(s, rb, p, o)) begin
          failures++;
          if (failures < 10) $display("mismatch run %0d p %0d o %0d: %0d vs %0d", run, p, o, y[wbk][p][o], ref_out(s, rb, p, o));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
