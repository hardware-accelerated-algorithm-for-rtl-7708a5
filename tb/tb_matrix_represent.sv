// tb_matrix_represent: builds companion matrices of random polynomials of
// every degree 2..N and compares every entry and every state field with the
// expected first-row companion form.
module tb_matrix_represent;
  import hqr_pkg::*;
  import tb_util_pkg::*;

  logic [IDX_W-1:0] deg;
  cvec_t            coef;
  task_t            t;
  int checks = 0, failures = 0;

  matrix_represent dut (.deg(deg), .coef(coef), .task_o(t));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 50; trial++) begin
      deg = IDX_W'(2 + trial % (N - 1));
      for (int k = 0; k < N; k++) coef[k] = r2c(crand(4.0));
      #1;
      check(t.valid && t.m == deg && t.deg == deg && t.row == 1 && t.col == 0 &&
            t.mode == MM_LEFT && t.iter == 0 && !t.done, "state fields");
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          cplx_t want;
          want = '0;
          if (i == 0 && j < int'(deg)) begin
            want.re = coef[int'(deg) - 1 - j].re ^ 32'h8000_0000;
            want.im = coef[int'(deg) - 1 - j].im ^ 32'h8000_0000;
          end else if (i < int'(deg) && j == i - 1) begin
            want = '{re: 32'h3F80_0000, im: 32'h0};
          end
          check(t.a[i][j] == want, $sformatf("deg %0d a[%0d][%0d]", deg, i, j));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
