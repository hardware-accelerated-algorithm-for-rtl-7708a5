// tb_diag_shift: both variants of the diagonal shift stage (subtract and
// add) on random matrices and random algorithm states. Checks the one-cycle
// latency, that only the first pass of an iteration (subtract) or its last
// pass (add) changes the matrix, that exactly the diagonal entries k < m move
// by the shift (values from a double-precision model), and that the
// subtract stage records s = a[m-1][m-1].
module tb_diag_shift;
  import hqr_pkg::*;
  import tb_util_pkg::*;

  logic  clk = 0, rst = 1;
  task_t ti, to_sub, to_add;
  int checks = 0, failures = 0;

  diag_shift #(.SUBTRACT(1'b1)) dut_sub (.clk, .rst, .task_i(ti), .task_o(to_sub));
  diag_shift #(.SUBTRACT(1'b0)) dut_add (.clk, .rst, .task_i(ti), .task_o(to_add));

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

  initial begin
    int n_sub = 0, n_add = 0;
    ti = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int trial = 0; trial < 600; trial++) begin
      task_t e;
      bit    sub_act, add_act;
      @(negedge clk);
      ti = '0;
      ti.valid = 1'b1;
      ti.done  = ($urandom % 8) == 0;
      ti.m     = IDX_W'(2 + $urandom % (N - 1));
      ti.row   = IDX_W'(1 + $urandom % (int'(ti.m) - 1));
      if ($urandom % 3 == 0) ti.row = ti.m - 1;
      if ($urandom % 3 == 0) ti.row = 1;
      ti.col   = ti.row - 1;
      ti.mode  = mm_mode_e'($urandom % 2);
      ti.shift = r2c(crand(2.0));
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) ti.a[i][j] = r2c(crand(3.0));
      e = ti;
      sub_act = !e.done && e.mode == MM_LEFT  && e.row == 1;
      add_act = !e.done && e.mode == MM_RIGHT && e.row == e.m - 1;
      @(posedge clk); #1;
      // subtract stage
      if (sub_act) begin
        rc_t s;
        n_sub++;
        s = c2r(e.a[e.m-1][e.m-1]);
        check(to_sub.shift == e.a[e.m-1][e.m-1], "shift recorded");
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            if (i == j && i < int'(e.m))
              check(close(c2r(to_sub.a[i][j]), rsub(c2r(e.a[i][j]), s), 1e-6), $sformatf("sub a[%0d][%0d]", i, j));
            else
              check(to_sub.a[i][j] == e.a[i][j], "sub leaves other entries");
      end else begin
        check(to_sub == e, "sub inactive: register only");
      end
      // add stage
      if (add_act) begin
        n_add++;
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            if (i == j && i < int'(e.m))
              check(close(c2r(to_add.a[i][j]), radd(c2r(e.a[i][j]), c2r(e.shift)), 1e-6), $sformatf("add a[%0d][%0d]", i, j));
            else
              check(to_add.a[i][j] == e.a[i][j], "add leaves other entries");
        check(to_add.shift == e.shift, "add keeps shift");
      end else begin
        check(to_add == e, "add inactive: register only");
      end
    end
    check(n_sub > 50 && n_add > 50, "both stages active often");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
