// diag_shift: the two Diagonal Shift stages of the PE core.
//
// With SUBTRACT = 1 (first stage of the core) the stage acts on the first
// pass of a QR iteration (matmul_mode = left, row = 1): it takes the shift
// s = a[m-1][m-1], stores it in the task and subtracts it from the diagonal
// entries a[k][k], k < m. With SUBTRACT = 0 (last stage) it acts on the last
// pass of the iteration (matmul_mode = right, row = m-1) and adds the stored
// s back. Both hold N complex adders, one per diagonal entry; entries k >= m
// (eigenvalues already found) are left alone. On every other pass, and for a
// gap or a finished task, the stage is only a pipeline register.
//
// Interface: task in, task out. Timing: one register stage, one task per
// cycle. The trigger points and the N adders follow the published design; storing s in
// the task is this design's way of carrying it from the first to the last
// pass of the iteration.
module diag_shift
  import hqr_pkg::*;
#(
  parameter bit SUBTRACT = 1'b1
) (
  input  logic  clk,
  input  logic  rst,
  input  task_t task_i,
  output task_t task_o
);

  logic  active;
  task_t nxt;

  always_comb begin
    nxt = task_i;
    if (SUBTRACT)
      active = task_i.valid && !task_i.done && task_i.mode == MM_LEFT && task_i.row == IDX_W'(1);
    else
      active = task_i.valid && !task_i.done && task_i.mode == MM_RIGHT && task_i.row == task_i.m - IDX_W'(1);
    if (active) begin
      if (SUBTRACT) nxt.shift = task_i.a[task_i.m - IDX_W'(1)][task_i.m - IDX_W'(1)];
      for (int k = 0; k < N; k++) begin
        if (k < int'(task_i.m)) begin
          if (SUBTRACT) nxt.a[k][k] = c_sub(task_i.a[k][k], nxt.shift);
          else          nxt.a[k][k] = c_add(task_i.a[k][k], task_i.shift);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) task_o.valid <= 1'b0;
    else     task_o       <= nxt;
  end

endmodule
