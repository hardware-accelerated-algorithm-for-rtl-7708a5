// matrix_mult: applies the Givens rotation r of the current pass to the
// task's matrix, in place, with 2N complex "a*x + b*y" units.
//
// Left pass  (A <- Q_r A): rows r-1 and r are rotated,
//     a[r-1][j] <- c*x + s*y,   a[r][j] <- -conj(s)*x + conj(c)*y,
//     with x = a[r-1][j], y = a[r][j].
// Right pass (A <- A Q_r^H): columns r-1 and r are rotated,
//     a[j][r-1] <- conj(c)*x + conj(s)*y,   a[j][r] <- -s*x + c*y,
//     with x = a[j][r-1], y = a[j][r].
// Only j < m (the active block) is written. The N units of the first bank
// produce the new row/column r-1, the N units of the second bank row/column r.
//
// Stage 1, the matrix selector, picks the coefficient matrix ([c s; -s* c*]
// or its right-pass counterpart), reads (c,s) of rotation r from the task's
// store and gathers the two rows or columns. Stage 2 runs the 2N units and
// writes the results back. Gaps and finished tasks pass unchanged.
// Interface: task in, task out. Timing: latency 2 cycles, one task per cycle.
// The structure follows the published design; the split into two stages is this
// design's.
module matrix_mult
  import hqr_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  task_t task_i,
  output task_t task_o
);

  typedef struct packed {
    task_t t;
    logic  act;
    cplx_t p0, q0;   // coefficients of bank 0 (new row/col r-1)
    cplx_t p1, q1;   // coefficients of bank 1 (new row/col r)
    cvec_t x, y;
  } sel_t;

  sel_t  sel_d, sel;
  cvec_t z0, z1;
  task_t out_d;

  // stage 1: matrix selector
  always_comb begin
    cplx_t c, s;
    int    r;
    sel_d     = '0;
    sel_d.t   = task_i;
    sel_d.act = task_i.valid && !task_i.done;
    r = int'(task_i.row);
    c = task_i.gc[task_i.row - IDX_W'(1)];
    s = task_i.gs[task_i.row - IDX_W'(1)];
    if (task_i.mode == MM_LEFT) begin
      sel_d.p0 = c;                 sel_d.q0 = s;
      sel_d.p1 = c_neg(c_conj(s));  sel_d.q1 = c_conj(c);
      for (int j = 0; j < N; j++) begin
        sel_d.x[j] = task_i.a[r-1][j];
        sel_d.y[j] = task_i.a[r][j];
      end
    end else begin
      sel_d.p0 = c_conj(c);         sel_d.q0 = c_conj(s);
      sel_d.p1 = c_neg(s);          sel_d.q1 = c;
      for (int j = 0; j < N; j++) begin
        sel_d.x[j] = task_i.a[j][r-1];
        sel_d.y[j] = task_i.a[j][r];
      end
    end
  end

  // stage 2: 2N complex mul-adders
  for (genvar j = 0; j < N; j++) begin : g_units
    complex_mul_adder u_bank0 (.a(sel.p0), .x(sel.x[j]), .b(sel.q0), .y(sel.y[j]), .z(z0[j]));
    complex_mul_adder u_bank1 (.a(sel.p1), .x(sel.x[j]), .b(sel.q1), .y(sel.y[j]), .z(z1[j]));
  end

  always_comb begin
    int r;
    out_d = sel.t;
    r = int'(sel.t.row);
    if (sel.act) begin
      for (int j = 0; j < N; j++) begin
        if (j < int'(sel.t.m)) begin
          if (sel.t.mode == MM_LEFT) begin
            out_d.a[r-1][j] = z0[j];
            out_d.a[r][j]   = z1[j];
          end else begin
            out_d.a[j][r-1] = z0[j];
            out_d.a[j][r]   = z1[j];
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sel.t.valid  <= 1'b0;
      task_o.valid <= 1'b0;
    end else begin
      sel    <= sel_d;
      task_o <= out_d;
    end
  end

endmodule
