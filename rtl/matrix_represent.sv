// matrix_represent: turns a monic complex polynomial into a new task for the
// PE loop, holding the polynomial's Frobenius companion matrix.
//
// For P(z) = z^d + c[d-1] z^(d-1) + ... + c[0] (d = deg, 2 <= d <= N) the
// leading d x d block of the matrix is
//     row 0      : -c[d-1], -c[d-2], ..., -c[0]
//     row i >= 1 : 1 at column i-1, 0 elsewhere
// which is upper Hessenberg and has the roots of P as eigenvalues. Entries
// outside the leading block are zero and never touched. The task starts at
// m = d, (row,col) = (1,0), matmul_mode = left, iter = 0.
//
// Interface: coef[k] is c[k] (binary32 complex); coef[k] for k >= deg is
// ignored. Purely combinational; the input selector registers the task.
// That the matrix is the companion matrix follows the published design; the choice of
// the first-row form of it, and degrees below N being placed in the leading
// block, are this design's.
module matrix_represent
  import hqr_pkg::*;
(
  input  logic [IDX_W-1:0] deg,
  input  cvec_t            coef,
  output task_t            task_o
);

  always_comb begin
    task_o       = '0;
    task_o.valid = 1'b1;
    task_o.deg   = deg;
    task_o.m     = deg;
    task_o.row   = IDX_W'(1);
    task_o.col   = '0;
    task_o.mode  = MM_LEFT;
    task_o.iter  = '0;
    for (int j = 0; j < N; j++) begin
      if (j < int'(deg)) task_o.a[0][j] = c_neg(coef[int'(deg) - 1 - j]);
    end
    for (int i = 1; i < N; i++) begin
      if (i < int'(deg)) task_o.a[i][i-1] = C_ONE;
    end
  end

endmodule
