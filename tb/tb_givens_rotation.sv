// tb_givens_rotation: streams random left-pass tasks (one per cycle, with
// gaps and right passes mixed in) through the Givens unit. For each left pass
// it checks, after exactly 3 cycles, that the stored (c,s) of rotation r
// satisfies c*a + s*b = sqrt(|a|^2+|b|^2) and -conj(s)*a + conj(c)*b = 0 for
// a = a[r-1][r-1], b = a[r][r-1], equals conj(a)/|.| and conj(b)/|.| from a
// double-precision model, and that the a = b = 0 case gives (1, 0). Other
// tasks must come out unchanged.
module tb_givens_rotation;
  import hqr_pkg::*;
  import tb_util_pkg::*;

  logic  clk = 0, rst = 1;
  task_t ti, to;
  task_t sent [$];
  int checks = 0, failures = 0;

  givens_rotation dut (.clk, .rst, .task_i(ti), .task_o(to));

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

  // checker: output k corresponds to input k issued 3 cycles before
  int n_rot = 0, n_zero = 0;
  always @(posedge clk) if (!rst && sent.size() == 3) begin
    task_t e;
    #1;
    e = sent.pop_front();
    if (e.valid && !e.done && e.mode == MM_LEFT) begin
      int r;
      rc_t a, b, c, s, want_c, want_s;
      real nrm;
      r = int'(e.row);
      a = c2r(e.a[r-1][r-1]);
      b = c2r(e.a[r][r-1]);
      c = c2r(to.gc[r-1]);
      s = c2r(to.gs[r-1]);
      nrm = $sqrt(rabs(a) * rabs(a) + rabs(b) * rabs(b));
      n_rot++;
      if (nrm == 0.0) begin
        n_zero++;
        check(to.gc[r-1] == C_ONE && to.gs[r-1] == '0, "zero column gives identity");
      end else begin
        want_c = rc(a.re / nrm, -a.im / nrm);
        want_s = rc(b.re / nrm, -b.im / nrm);
        check(close(c, want_c, 1e-6) && close(s, want_s, 1e-6), $sformatf("c,s of rotation %0d", r));
        check(close(radd(rmul(c, a), rmul(s, b)), rc(nrm, 0), 1e-6), "rotation gives the norm");
        check(close(radd(rmul(rneg(rconj(s)), a), rmul(rconj(c), b)), rc(0, 0), 1e-6 * nrm), "rotation zeroes b");
      end
      for (int k = 0; k < N - 1; k++) if (k != r - 1)
        check(to.gc[k] == e.gc[k] && to.gs[k] == e.gs[k], "other coefficients kept");
      check(to.a == e.a && to.row == e.row && to.valid, "matrix and state carried");
    end else begin
      check(to == e, "inactive pass unchanged");
    end
  end

  initial begin
    ti = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int trial = 0; trial < 800; trial++) begin
      @(negedge clk);
      ti = '0;
      ti.valid = ($urandom % 6) != 0;
      ti.done  = ($urandom % 10) == 0;
      ti.mode  = ($urandom % 4 == 0) ? MM_RIGHT : MM_LEFT;
      ti.m     = IDX_W'(2 + $urandom % (N - 1));
      ti.row   = IDX_W'(1 + $urandom % (int'(ti.m) - 1));
      ti.col   = ti.row - 1;
      for (int k = 0; k < N - 1; k++) begin ti.gc[k] = r2c(crand(1.0)); ti.gs[k] = r2c(crand(1.0)); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) ti.a[i][j] = r2c(crand($pow(10.0, real'($urandom % 5) - 2.0)));
      if ($urandom % 25 == 0) begin
        ti.a[ti.row-1][ti.col] = '0;
        ti.a[ti.row][ti.col]   = '0;
      end
      if ($urandom % 15 == 0) ti.a[ti.row][ti.col] = '0;
      sent.push_back(ti);
    end
    @(negedge clk);
    ti = '0;
    repeat (4) @(posedge clk);
    #2;
    check(n_rot > 300 && n_zero > 3, "rotations and zero cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
