// pe_core: the processing element, a non-blocking pipeline of four modules
// in this order: Diagonal Shift (subtract), Givens Rotation, Matrix
// Multiplication, Diagonal Shift (add).
//
// Each task makes one pass through the core per step of the algorithm. On a
// given pass only the modules the step needs act on the matrix; the others
// just carry it along, so the pipeline itself is the storage for all tasks
// in flight and no separate memory of intermediate states is needed. A pass
// applies one Givens rotation r: in a left pass it computes (c,s) and rotates
// rows r-1, r; in a right pass it rotates columns r-1, r with the (c,s)
// stored on the left pass r. The shift is subtracted on the first pass of a
// QR iteration and added back on its last.
//
// Interface: task in, task out, one per cycle, never stalls.
// Timing: latency 1 + 3 + 2 + 1 = 7 cycles.
module pe_core
  import hqr_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  task_t task_i,
  output task_t task_o
);

  task_t t_sub, t_giv, t_mm;

  diag_shift #(.SUBTRACT(1'b1)) u_shift_sub (.clk, .rst, .task_i(task_i), .task_o(t_sub));
  givens_rotation               u_givens    (.clk, .rst, .task_i(t_sub),  .task_o(t_giv));
  matrix_mult                   u_matmul    (.clk, .rst, .task_i(t_giv),  .task_o(t_mm));
  diag_shift #(.SUBTRACT(1'b0)) u_shift_add (.clk, .rst, .task_i(t_mm),   .task_o(task_o));

endmodule
