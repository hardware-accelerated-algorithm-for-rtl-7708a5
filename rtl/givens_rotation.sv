// givens_rotation: computes the Givens rotation of a left pass.
//
// On a pass with matmul_mode = left and position (row,col) = (r, r-1) the
// unit takes a = a[r-1][r-1] and b = a[r][r-1] and forms, in three register
// stages,
//     stage 1: |a|^2 + |b|^2
//     stage 2: rho = 1 / sqrt(|a|^2 + |b|^2)
//     stage 3: c = rho * conj(a),  s = rho * conj(b)
// so that [c s; -conj(s) conj(c)] [a; b] = [sqrt(|a|^2+|b|^2); 0]. The pair
// is written into the task's coefficient store at index r-1, where the
// matrix multiplication reads it now and again in the right pass r.
// If a = b = 0 the rotation is the identity (c = 1, s = 0).
// On right passes, gaps and finished tasks the unit is a 3-stage delay line.
//
// Interface: task in, task out. Timing: latency 3 cycles, one task per
// cycle. The three steps follow the published design; the zero case is this design's.
module givens_rotation
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
    cplx_t a;
    cplx_t b;
    fp32_t v;    // |a|^2 + |b|^2, then rho
  } gstage_t;

  gstage_t s1, s2;
  gstage_t s1_d, s2_d;
  task_t   s3_d;

  // stage 1: squared magnitudes
  always_comb begin
    s1_d     = '0;
    s1_d.t   = task_i;
    s1_d.act = task_i.valid && !task_i.done && task_i.mode == MM_LEFT;
    s1_d.a   = task_i.a[task_i.row - IDX_W'(1)][task_i.col];
    s1_d.b   = task_i.a[task_i.row][task_i.col];
    s1_d.v   = fp_add(c_abs2(s1_d.a), c_abs2(s1_d.b));
  end

  // stage 2: reciprocal square root
  always_comb begin
    s2_d   = s1;
    s2_d.v = fp_rsqrt(s1.v);
  end

  // stage 3: c and s
  always_comb begin
    s3_d = s2.t;
    if (s2.act) begin
      if (s2.v[30:23] == 8'hFF) begin
        s3_d.gc[s2.t.row - IDX_W'(1)] = C_ONE;
        s3_d.gs[s2.t.row - IDX_W'(1)] = C_ZERO;
      end else begin
        s3_d.gc[s2.t.row - IDX_W'(1)] = c_scale(s2.v, c_conj(s2.a));
        s3_d.gs[s2.t.row - IDX_W'(1)] = c_scale(s2.v, c_conj(s2.b));
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s1.t.valid   <= 1'b0;
      s2.t.valid   <= 1'b0;
      task_o.valid <= 1'b0;
    end else begin
      s1     <= s1_d;
      s2     <= s2_d;
      task_o <= s3_d;
    end
  end

endmodule
