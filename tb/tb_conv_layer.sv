// tb_conv_layer: self-checking test of the Q16.16 point-wise convolution.
//
// Loads two random parameter sets through the parameter write bus (at a
// non-zero base address), fills both input banks with random Q16.16 points,
// runs a tile from each bank with each set and compares every output with a
// reference computed here as round(sum_j x_j w_ij + b_i) with saturation.
// It also checks that one tile takes ceil(B/PP) * ceil(N/PO) * M busy cycles,
// the per-tile cost of a layer with point and output unrolling PP and PO.
module tb_conv_layer;
  import pn_pkg::*;
  localparam int unsigned M = 3, N = 10, B = 3, PP = 2, PO = 4, NSET = 2, BASE = 5;
  localparam int unsigned WW = words_of(N * M, 4), WORDS = conv_words(M, N);

  logic clk = 1'b0, rst_n = 1'b0;
  logic pw_valid = 1'b0;
  logic [23:0] pw_addr = '0;
  logic [127:0] pw_data = '0;
  logic start = 1'b0, rd_bank = 1'b0, wr_bank = 1'b0;
  logic [1:0] pset = '0;
  logic busy, done;
  fx_t x [2][B][M];
  fx_t y [2][B][N];
  fx_t w [NSET][N][M];
  fx_t bi [NSET][N];
  int checks = 0, failures = 0, busy_cycles;

  conv_layer #(.M(M), .N(N), .B(B), .PP(PP), .PO(PO), .NSET(NSET), .BASE(BASE)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t ref_out(input int s, input int bank, input int p, input int o);
    logic signed [63:0] acc;
    acc = 64'(bi[s][o]) <<< 16;
    for (int j = 0; j < M; j++) acc += 64'(x[bank][p][j]) * 64'(w[s][o][j]);
    acc = (acc + 64'sd32768) >>> 16;
    if (acc > 64'sh7FFF_FFFF) return 32'sh7FFF_FFFF;
    if (acc < -64'sh8000_0000) return 32'sh8000_0000;
    return fx_t'(acc);
  endfunction

  task automatic write_word(input int a, input logic [127:0] d);
    @(negedge clk);
    pw_valid = 1'b1; pw_addr = 24'(a); pw_data = d;
    @(negedge clk);
    pw_valid = 1'b0;
  endtask

  initial begin
    for (int b = 0; b < 2; b++) for (int p = 0; p < B; p++) for (int j = 0; j < M; j++)
      x[b][p][j] = $signed($urandom) >>> 12;
    for (int s = 0; s < NSET; s++) begin
      for (int o = 0; o < N; o++) begin
        for (int j = 0; j < M; j++) w[s][o][j] = $signed($urandom) >>> 13;
        bi[s][o] = $signed($urandom) >>> 12;
      end
      // one extreme weight to exercise saturation
      w[s][0][0] = 32'sh7FFF_FFFF;
      x[0][0][0] = 32'sh7FFF_0000;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int s = 0; s < NSET; s++) begin
      for (int a = 0; a < int'(WORDS); a++) begin
        logic [127:0] d;
        d = '0;
        for (int k = 0; k < 4; k++) begin
          int idx;
          if (a < int'(WW)) begin
            idx = a * 4 + k;
            if (idx < N * M) d[32*k +: 32] = w[s][idx / M][idx % M];
          end else begin
            idx = (a - WW) * 4 + k;
            if (idx < N) d[32*k +: 32] = bi[s][idx];
          end
        end
        write_word(BASE + s * WORDS + a, d);
      end
    end
    // an out-of-range write must not disturb anything
    write_word(BASE + NSET * WORDS, {128{1'b1}});
    for (int run = 0; run < 4; run++) begin
      int s, rb, wbk;
      s = run % 2; rb = run / 2; wbk = 1 - rb;
      @(negedge clk);
      start = 1'b1; rd_bank = rb[0]; wr_bank = wbk[0]; pset = 2'(s);
      @(posedge clk);
      #1 start = 1'b0;
      busy_cycles = 0;
      while (!done) begin
        @(posedge clk);
        if (busy) busy_cycles++;
      end
      checks++;
      if (busy_cycles != ((B + PP - 1) / PP) * ((N + PO - 1) / PO) * M) begin
        failures++;
        $display("cycle count %0d", busy_cycles);
      end
      for (int p = 0; p < B; p++) for (int o = 0; o < N; o++) begin
        checks++;
        if (y[wbk][p][o] !== ref_out(s, rb, p, o)) begin
          failures++;
          if (failures < 10) $display("mismatch run %0d p %0d o %0d: %h vs %h", run, p, o, y[wbk][p][o], ref_out(s, rb, p, o));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
