// tb_task_scheduler: walks tasks of every degree through the next-step rule
// and checks the whole state sequence against an independent enumeration of
// the schedule (for each order m = n..2, T iterations, each m-1 left passes
// then m-1 right passes), that the result comes out after exactly n(n-1)T
// passes carrying the diagonal, that a full FIFO turns the result into a
// 'done' task that recirculates unchanged and is written once there is room,
// and that gaps stay gaps.
module tb_task_scheduler;
  import hqr_pkg::*;

  localparam int T = 4;

  task_t   ti, fb;
  logic    full, rv;
  result_t res;
  int checks = 0, failures = 0;

  task_scheduler #(.MAX_ITER(T - 1)) dut (.task_i(ti), .fifo_full_i(full), .fb_o(fb), .res_valid_o(rv), .res_o(res));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_full = 0;
    full = 0;
    ti = '0;
    #1 check(!rv && !fb.valid, "gap stays a gap");
    for (int d = 2; d <= N; d++) begin
      task_t cur;
      int    passes;
      cur = '0;
      cur.valid = 1; cur.deg = IDX_W'(d); cur.m = IDX_W'(d); cur.row = 1; cur.col = 0; cur.mode = MM_LEFT;
      for (int k = 0; k < N; k++) cur.a[k][k] = '{re: 32'(k + 10 * d), im: 32'(k)};
      passes = 0;
      for (int m = d; m >= 2; m--)
        for (int it = 0; it < T; it++)
          for (int md = 0; md < 2; md++)
            for (int r = 1; r <= m - 1; r++) begin
              check(cur.valid && int'(cur.m) == m && int'(cur.iter) == it && int'(cur.mode) == md &&
                    int'(cur.row) == r && int'(cur.col) == r - 1,
                    $sformatf("d=%0d state m=%0d iter=%0d mode=%0d row=%0d", d, m, it, md, r));
              ti = cur;
              full = (passes % 7 == 3);
              #1;
              passes++;
              if (passes == d * (d - 1) * T) begin
                // last pass: result (first with a full FIFO for odd d)
                if (d % 2 == 1) begin
                  full = 1; #1;
                  check(!rv && fb.valid && fb.done, "full FIFO: task marked done");
                  ti = fb; #1;
                  check(!rv && fb == ti, "done task recirculates unchanged");
                  n_full++;
                  full = 0; #1;
                end
                check(rv && !fb.valid, "result written, slot freed");
                check(int'(res.deg) == d, "result degree");
                for (int k = 0; k < N; k++) check(res.eig[k] == cur.a[k][k], "result is the diagonal");
              end else begin
                check(!rv, "no result before the end");
                cur = fb;
              end
            end
    end
    check(n_full > 0, "full FIFO case seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
