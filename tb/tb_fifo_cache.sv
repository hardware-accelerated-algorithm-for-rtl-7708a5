// tb_fifo_cache: random pushes and pops against a queue model at a small
// depth: data order, first-word fall-through, full and empty flags, and
// the cycle after a push at which the entry becomes visible.
module tb_fifo_cache;
  import hqr_pkg::*;

  localparam int DEPTH = 5;

  logic    clk = 0, rst = 1;
  logic    push, pop, full, empty;
  result_t din, dout;
  result_t model [$];
  int checks = 0, failures = 0;

  fifo_cache #(.DEPTH(DEPTH)) dut (.clk, .rst, .push_i(push), .din_i(din), .pop_i(pop),
                                   .dout_o(dout), .full_o(full), .empty_o(empty));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_full = 0, n_empty = 0;
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 3000; i++) begin
      int phase;
      @(negedge clk);
      check(full == (model.size() == DEPTH), "full flag");
      check(empty == (model.size() == 0), "empty flag");
      if (model.size() > 0) check(dout == model[0], "head entry");
      if (full) n_full++;
      if (empty) n_empty++;
      phase = (i / 200) % 3;   // fill-biased, drain-biased, balanced
      push = !full && ($urandom % 4 < (phase == 0 ? 3 : phase == 1 ? 1 : 2));
      pop  = !empty && ($urandom % 4 < (phase == 0 ? 1 : phase == 1 ? 3 : 2));
      for (int k = 0; k < N; k++) din.eig[k] = '{re: $urandom, im: $urandom};
      din.deg = IDX_W'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    check(n_full > 20 && n_empty > 20, "full and empty reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
