// tb_matrix_mult: random matrices, rotations and pass states through the
// matrix multiplication unit, one per cycle. After exactly 2 cycles the
// result is compared with a double-precision model: in a left pass rows r-1
// and r become (c*x + s*y, -conj(s)*x + conj(c)*y), in a right pass columns
// r-1 and r become (conj(c)*x + conj(s)*y, -s*x + c*y), for j < m only; every
// other entry, gaps and finished tasks must be unchanged.
module tb_matrix_mult;
  import hqr_pkg::*;
  import tb_util_pkg::*;

  logic  clk = 0, rst = 1;
  task_t ti, to;
  task_t sent [$];
  int checks = 0, failures = 0;
  int n_left = 0, n_right = 0;

  matrix_mult dut (.clk, .rst, .task_i(ti), .task_o(to));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && sent.size() == 2) begin
    task_t e;
    #1;
    e = sent.pop_front();
    if (e.valid && !e.done) begin
      int  r, m;
      rc_t c, s;
      r = int'(e.row); m = int'(e.m);
      c = c2r(e.gc[r-1]); s = c2r(e.gs[r-1]);
      if (e.mode == MM_LEFT) n_left++; else n_right++;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          rc_t x, y, want;
          bit  touched;
          touched = 1'b0;
          if (e.mode == MM_LEFT && (i == r-1 || i == r) && j < m) begin
            touched = 1'b1;
            x = c2r(e.a[r-1][j]); y = c2r(e.a[r][j]);
            want = (i == r-1) ? radd(rmul(c, x), rmul(s, y))
                              : radd(rmul(rneg(rconj(s)), x), rmul(rconj(c), y));
          end
          if (e.mode == MM_RIGHT && (j == r-1 || j == r) && i < m) begin
            touched = 1'b1;
            x = c2r(e.a[i][r-1]); y = c2r(e.a[i][r]);
            want = (j == r-1) ? radd(rmul(rconj(c), x), rmul(rconj(s), y))
                              : radd(rmul(rneg(s), x), rmul(c, y));
          end
          if (touched) check(close(c2r(to.a[i][j]), want, 1e-5), $sformatf("a[%0d][%0d] mode %0d r %0d", i, j, e.mode, r));
          else         check(to.a[i][j] == e.a[i][j], $sformatf("a[%0d][%0d] untouched", i, j));
        end
      check(to.gc == e.gc && to.gs == e.gs && to.row == e.row && to.mode == e.mode, "state carried");
    end else begin
      check(to == e, "gap or finished task unchanged");
    end
  end

  initial begin
    ti = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int trial = 0; trial < 600; trial++) begin
      @(negedge clk);
      ti = '0;
      ti.valid = ($urandom % 8) != 0;
      ti.done  = ($urandom % 10) == 0;
      ti.mode  = mm_mode_e'($urandom % 2);
      ti.m     = IDX_W'(2 + $urandom % (N - 1));
      ti.row   = IDX_W'(1 + $urandom % (int'(ti.m) - 1));
      ti.col   = ti.row - 1;
      for (int k = 0; k < N - 1; k++) begin ti.gc[k] = r2c(crand(1.0)); ti.gs[k] = r2c(crand(1.0)); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) ti.a[i][j] = r2c(crand(2.0));
      sent.push_back(ti);
    end
    @(negedge clk);
    ti = '0;
    repeat (3) @(posedge clk);
    #2;
    check(n_left > 150 && n_right > 150, "both modes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
