// pinv: the PInv module of PointLKCore, J^+ = (J^T J)^-1 J^T.
//
// J is the K x 6 Jacobian, held by the core as six columns jac[c][k] (FP32).
// The module works in three phases, as the paper describes:
//   1. ACC  (K cycles): accumulates the 6x6 symmetric matrix A = J^T J, one
//      row of J per cycle (21 distinct products).
//   2. INV  (6 cycles): partitions A into 3x3 blocks [P Q; Q^T S], inverts P by
//      the adjoint method, forms the Schur complement M = S - Q^T P^-1 Q,
//      inverts M the same way and assembles A^-1 by the blockwise inversion
//      formula. P and M are assumed invertible, as in the paper.
//   3. MUL  (K cycles): jpinv[r][k] = sum_c A^-1[r][c] jac[c][k].
// Latency 2K + 7 cycles from `start` to `done`. FP32 arithmetic.
module pinv
  import pn_pkg::*;
#(
  parameter int unsigned K = FEAT_DIM
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic done,
  input  fp_t  jac   [6][K],
  output fp_t  jpinv [6][K]
);
  typedef enum logic [3:0] {S_IDLE, S_ACC, S_PI, S_T, S_M, S_MI, S_UR, S_UL, S_MUL} state_e;
  state_e st;
  logic [$clog2(K+1)-1:0] k;
  fp_t a    [6][6];
  fmat3_t pi_m, t_m, m_m, mi_m, ur_m;

  function automatic fmat3_t inv3(input fmat3_t x);
    fmat3_t adj, r;
    fp_t det, rdet;
    // adjugate: transpose of the cofactor matrix
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        automatic int i1 = (j + 1) % 3, i2 = (j + 2) % 3;
        automatic int j1 = (i + 1) % 3, j2 = (i + 2) % 3;
        adj[i][j] = fp_sub(fp_mul(x[i1][j1], x[i2][j2]), fp_mul(x[i1][j2], x[i2][j1]));
      end
    det = fp_add(fp_add(fp_mul(x[0][0], adj[0][0]), fp_mul(x[0][1], adj[1][0])), fp_mul(x[0][2], adj[2][0]));
    rdet = fp_div(FP_ONE, det);
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) r[i][j] = fp_mul(adj[i][j], rdet);
    return r;
  endfunction

  function automatic fmat3_t blk(input int r0, input int c0);
    fmat3_t m;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) m[i][j] = a[r0 + i][c0 + j];
    return m;
  endfunction

  function automatic fmat3_t tr(input fmat3_t x);
    fmat3_t m;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) m[i][j] = x[j][i];
    return m;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      busy <= 1'b0;
      done <= 1'b0;
      k <= '0;
      for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) a[i][j] <= FP_ZERO;
      pi_m <= '0; t_m <= '0; m_m <= '0; mi_m <= '0; ur_m <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1;
          k <= '0;
          for (int i = 0; i < 6; i++) for (int j = 0; j < 6; j++) a[i][j] <= FP_ZERO;
          st <= S_ACC;
        end
        S_ACC: begin
          for (int i = 0; i < 6; i++)
            for (int j = i; j < 6; j++) begin
              automatic fp_t s = fp_add(a[i][j], fp_mul(jac[i][k], jac[j][k]));
              a[i][j] <= s;
              a[j][i] <= s;
            end
          if (int'(k) == K - 1) begin
            k <= '0;
            st <= S_PI;
          end else k <= k + 1'b1;
        end
        S_PI: begin pi_m <= inv3(blk(0, 0)); st <= S_T; end                   // P^-1
        S_T:  begin t_m <= mat3_mul(pi_m, blk(0, 3)); st <= S_M; end           // T = P^-1 Q
        S_M: begin                                                             // M = S - Q^T T
          automatic fmat3_t qt = mat3_mul(tr(blk(0, 3)), t_m);
          automatic fmat3_t s3 = blk(3, 3);
          for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) m_m[i][j] <= fp_sub(s3[i][j], qt[i][j]);
          st <= S_MI;
        end
        S_MI: begin mi_m <= inv3(m_m); st <= S_UR; end
        S_UR: begin                                                            // UR = -T M^-1
          automatic fmat3_t u = mat3_mul(t_m, mi_m);
          for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) ur_m[i][j] <= fp_neg(u[i][j]);
          st <= S_UL;
        end
        S_UL: begin                                                            // UL = P^-1 - UR T^T
          automatic fmat3_t u = mat3_mul(ur_m, tr(t_m));
          for (int i = 0; i < 3; i++)
            for (int j = 0; j < 3; j++) begin
              a[i][j]         <= fp_sub(pi_m[i][j], u[i][j]);
              a[i][j + 3]     <= ur_m[i][j];
              a[j + 3][i]     <= ur_m[i][j];
              a[i + 3][j + 3] <= mi_m[i][j];
            end
          st <= S_MUL;
        end
        S_MUL: begin
          for (int r = 0; r < 6; r++) begin
            automatic fp_t s = FP_ZERO;
            for (int c = 0; c < 6; c++) s = fp_add(s, fp_mul(a[r][c], jac[c][k]));
            jpinv[r][k] <= s;
          end
          if (int'(k) == K - 1) begin
            k <= '0;
            busy <= 1'b0;
            done <= 1'b1;
            st <= S_IDLE;
          end else k <= k + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
