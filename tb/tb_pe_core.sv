// tb_pe_core: runs complete root-finding tasks through the PE core with the
// schedule (row, matmul_mode, iter, m) advanced by the testbench itself.
// Every pass is compared with the double-precision reference pass applied to
// the same input, and must come out exactly 7 cycles after it went in; the
// seven tasks take turns, one pass at a time. A task must finish after
// exactly n(n-1)T passes with the roots of its polynomial on the diagonal.
module tb_pe_core;
  import hqr_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;

  localparam int LAT = 7;
  localparam int T   = 10;

  logic  clk = 0, rst = 1;
  task_t ti, to;
  int checks = 0, failures = 0;

  pe_core dut (.clk, .rst, .task_i(ti), .task_o(to));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // next step, written from the algorithm: m-1 rotations left, m-1 right,
  // T iterations per order, deflate down to order 2
  function automatic bit advance(ref task_t t);
    if (int'(t.row) < int'(t.m) - 1) begin t.row++; t.col++; return 0; end
    t.row = 1; t.col = 0;
    if (t.mode == MM_LEFT) begin t.mode = MM_RIGHT; return 0; end
    t.mode = MM_LEFT;
    if (int'(t.iter) < T - 1) begin t.iter++; return 0; end
    t.iter = 0;
    if (t.m > 2) begin t.m--; return 0; end
    return 1;
  endfunction

  task_t  slot   [LAT];
  rvec_t  roots  [LAT];
  int     passes [LAT];
  int     finished = 0;
  real    worst = 0.0;

  task automatic load(int s);
    rvec_t c;
    int    d;
    d = 2 + $urandom % (N - 1);
    if (s < 2) d = N;
    do roots[s] = random_roots(d); while (!converges(roots[s], d, T));
    c = poly_from_roots(roots[s], d);
    slot[s] = '0;
    slot[s].valid = 1; slot[s].deg = IDX_W'(d); slot[s].m = IDX_W'(d);
    slot[s].row = 1; slot[s].mode = MM_LEFT;
    for (int j = 0; j < d; j++) slot[s].a[0][j] = r2c(rneg(c[d-1-j]));
    for (int i = 1; i < d; i++) slot[s].a[i][i-1] = C_ONE;
    passes[s] = 0;
  endtask

  initial begin
    int cyc;
    ti = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int s = 0; s < LAT; s++) load(s);
    cyc = 0;
    while (finished < 21) begin
      int    s;
      task_t sent;
      s = cyc % LAT;
      @(negedge clk);
      ti = slot[s];
      sent = slot[s];
      repeat (LAT) @(posedge clk);
      #1;
      begin
        rtask_t want;
        want = ref_pass(from_task(sent));
        for (int i = 0; i < N; i++)
          for (int j = 0; j < N; j++)
            check(close(c2r(to.a[i][j]), want.a[i][j], 2e-4), $sformatf("pass %0d a[%0d][%0d]", passes[s], i, j));
        check(to.valid && to.row == sent.row && to.m == sent.m && to.mode == sent.mode, "state carried");
      end
      slot[s] = to;
      passes[s]++;
      if (advance(slot[s])) begin
        rvec_t got;
        int d;
        d = int'(slot[s].deg);
        for (int k = 0; k < N; k++) got[k] = c2r(slot[s].a[k][k]);
        check(root_match_err(got, roots[s], d) < 1e-3, $sformatf("roots of degree %0d task", d));
        if (root_match_err(got, roots[s], d) > worst) worst = root_match_err(got, roots[s], d);
        check(passes[s] == d * (d - 1) * T, "n(n-1)T passes");
        finished++;
        load(s);
      end
      @(negedge clk);
      ti = '0;
      cyc++;
    end
    $display("tasks=%0d worst root error=%g", finished, worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
