// reagent_update: the Update module of ReAgentCore.
//
// Turns the two action-label vectors into a pose update and applies it in
// ReAgent's disentangled form. Each label a in [0, 2*N_ACT] indexes the table
// T, whose entry holds the step size T(a) = +/-3^|a-N_ACT|/900 (0 at a = N_ACT)
// and its sine and cosine, so no trigonometric unit is needed (the paper stores
// them for this reason). Then
//   t(a_t)  = [T(a_tx), T(a_ty), T(a_tz)]
//   R(a_r)  = Rx(T(a_rx)) Ry(T(a_ry)) Rz(T(a_rz))
//   R_i     = R(a_r) R_{i-1},   t_i = t(a_t) + t_{i-1}.
// FP32 arithmetic. `start` latches the inputs, the new pose appears with
// `done` one cycle later. The table (N_LABEL entries of step, sin, cos; FP32,
// four per word, entry-major) is loaded over the parameter bus at BASE.
module reagent_update
  import pn_pkg::*;
#(
  parameter int unsigned BASE = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pw_valid,
  input  logic [23:0]  pw_addr,
  input  logic [127:0] pw_data,
  input  logic         start,
  input  logic [3:0]   a_t [3],
  input  logic [3:0]   a_r [3],
  input  pose_t        g_in,
  output logic         done,
  output pose_t        g_out
);
  localparam int unsigned WORDS = words_of(3 * N_LABEL, 4);
  fp_t tbl [3 * N_LABEL];   // [3a] step, [3a+1] sin, [3a+2] cos

  always_ff @(posedge clk) begin
    if (pw_valid && pw_addr >= 24'(BASE) && pw_addr < 24'(BASE + WORDS)) begin
      for (int k = 0; k < 4; k++) begin
        automatic int unsigned idx = (int'(pw_addr) - BASE) * 4 + k;
        if (idx < 3 * N_LABEL) tbl[idx] <= pw_data[32*k +: 32];
      end
    end
  end

  function automatic fp_t step_of(input logic [3:0] a);
    return (int'(a) < N_LABEL) ? tbl[3 * int'(a)] : FP_ZERO;
  endfunction
  function automatic fp_t sin_of(input logic [3:0] a);
    return (int'(a) < N_LABEL) ? tbl[3 * int'(a) + 1] : FP_ZERO;
  endfunction
  function automatic fp_t cos_of(input logic [3:0] a);
    return (int'(a) < N_LABEL) ? tbl[3 * int'(a) + 2] : FP_ONE;
  endfunction

  function automatic pose_t update(input logic [3:0] at [3], input logic [3:0] ar [3], input pose_t g);
    fmat3_t rx, ry, rz, r;
    fvec3_t t;
    fp_t s, c;
    s = sin_of(ar[0]); c = cos_of(ar[0]);
    rx = '{'{FP_ONE, FP_ZERO, FP_ZERO}, '{FP_ZERO, c, fp_neg(s)}, '{FP_ZERO, s, c}};
    s = sin_of(ar[1]); c = cos_of(ar[1]);
    ry = '{'{c, FP_ZERO, s}, '{FP_ZERO, FP_ONE, FP_ZERO}, '{fp_neg(s), FP_ZERO, c}};
    s = sin_of(ar[2]); c = cos_of(ar[2]);
    rz = '{'{c, fp_neg(s), FP_ZERO}, '{s, c, FP_ZERO}, '{FP_ZERO, FP_ZERO, FP_ONE}};
    r = mat3_mul(mat3_mul(mat3_mul(rx, ry), rz), pose_rot(g));
    for (int i = 0; i < 3; i++) t[i] = fp_add(step_of(at[i]), g[i][3]);
    return make_pose(r, t);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done  <= 1'b0;
      g_out <= pose_identity();
    end else begin
      done <= start;
      if (start) g_out <= update(a_t, a_r, g_in);
    end
  end
endmodule
