// task_scheduler: the Task Next Step Scheduler. It sits at the exit of the
// PE core and moves each task one step on through the single-shift QR
// algorithm, then hands it back to the input selector.
//
// Next-step rule, applied after every pass (the state is the position
// (row,col) of the rotation, matmul_mode, iter and the active order m):
//   if the next position (row+1,col+1) is not (m, m-1):  row += 1, col += 1
//   else (row,col) <- (1,0) and
//     matmul_mode == left  : matmul_mode <- right
//     matmul_mode == right : matmul_mode <- left and
//        iter != max_iter  : iter += 1
//        iter == max_iter  : iter <- 0 and
//            m > 2  : m -= 1   (a[m-1][m-1] is an eigenvalue; deflate)
//            m == 2 : output results
// so an iteration at order m is 2m-2 passes and a polynomial of degree n
// takes n(n-1)T passes, T = MAX_ITER+1 iterations per order.
// Output writes all eigenvalues, the diagonal a[k][k], into the FIFO cache
// in one cycle and leaves a gap in the loop. Should the FIFO be full, the
// task is marked done and goes round the loop untouched until there is room.
//
// Interface: task_i from the PE core; fb_o back to the input selector;
// res_valid_o/res_o write port of the FIFO, gated by fifo_full_i.
// Timing: combinational.
// The rule follows the published design's state diagram. Comparing the incremented
// position with (m, m-1) and the done/retry behaviour on a full FIFO are this
// design's reading and choice.
module task_scheduler
  import hqr_pkg::*;
#(
  parameter int unsigned MAX_ITER = 9      // T = MAX_ITER + 1 = 10 iterations
) (
  input  task_t   task_i,
  input  logic    fifo_full_i,
  output task_t   fb_o,
  output logic    res_valid_o,
  output result_t res_o
);

  logic finish;

  always_comb begin
    fb_o        = task_i;
    finish      = 1'b0;
    res_valid_o = 1'b0;
    res_o.deg   = task_i.deg;
    for (int k = 0; k < N; k++) res_o.eig[k] = task_i.a[k][k];

    if (task_i.valid) begin
      if (task_i.done) begin
        finish = 1'b1;
      end else if (task_i.row + IDX_W'(1) != task_i.m || task_i.col + IDX_W'(1) != task_i.m - IDX_W'(1)) begin
        fb_o.row = task_i.row + IDX_W'(1);
        fb_o.col = task_i.col + IDX_W'(1);
      end else begin
        fb_o.row = IDX_W'(1);
        fb_o.col = '0;
        if (task_i.mode == MM_LEFT) begin
          fb_o.mode = MM_RIGHT;
        end else begin
          fb_o.mode = MM_LEFT;
          if (task_i.iter != ITER_W'(MAX_ITER)) begin
            fb_o.iter = task_i.iter + ITER_W'(1);
          end else begin
            fb_o.iter = '0;
            if (task_i.m > IDX_W'(2)) fb_o.m = task_i.m - IDX_W'(1);
            else                     finish = 1'b1;
          end
        end
      end
      if (finish) begin
        if (fifo_full_i) begin
          fb_o.done = 1'b1;
        end else begin
          res_valid_o = 1'b1;
          fb_o.valid  = 1'b0;
        end
      end
    end
  end

endmodule
