// tb_input_selector: drives random mixes of recirculating tasks, gaps and
// new tasks and checks the registered choice: a recirculating task always
// wins, a new task is taken only in a gap (and only then is ready high), and
// an idle gap stays a gap.
module tb_input_selector;
  import hqr_pkg::*;

  logic  clk = 0, rst = 1;
  task_t fb, nw, q;
  logic  nv, nr;
  int checks = 0, failures = 0;

  input_selector dut (.clk, .rst, .fb_i(fb), .new_i(nw), .new_valid_i(nv), .new_ready_o(nr), .task_o(q));

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
    int n_fb = 0, n_new = 0, n_gap = 0;
    fb = '0; nw = '0; nv = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 1000; i++) begin
      task_t efb, enw;
      logic  env;
      @(negedge clk);
      fb = '0; nw = '0;
      fb.valid = ($urandom % 3) != 0;
      fb.iter  = ITER_W'($urandom);
      fb.a[0][0].re = $urandom;
      nw.valid = 1'b1;
      nw.deg   = IDX_W'(2 + $urandom % (N - 1));
      nw.a[1][0].im = $urandom;
      nv = $urandom % 2;
      efb = fb; enw = nw; env = nv;
      #1 check(nr == !fb.valid, "ready only in a gap");
      @(posedge clk); #1;
      if (efb.valid) begin
        check(q == efb, "recirculating task has priority"); n_fb++;
      end else if (env) begin
        check(q == enw, "new task taken in a gap"); n_new++;
      end else begin
        check(!q.valid, "gap stays a gap"); n_gap++;
      end
    end
    check(n_fb > 100 && n_new > 100 && n_gap > 50, "all cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
