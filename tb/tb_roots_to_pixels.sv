// tb_roots_to_pixels: feeds result entries of random degree through a
// queue standing in for the FIFO head and checks every pixel increment
// against coordinates worked out in double precision: one root per cycle,
// pixel one cycle later, off-screen roots dropped, the entry popped with its
// last root. Window: re in [-2, 2), im in (-1.5, 1.5], 16 pixels per unit on
// a 64 x 48 screen.
module tb_roots_to_pixels;
  import hqr_pkg::*;
  import tb_util_pkg::*;

  localparam int H = 64, V = 48;
  localparam int AW = $clog2(H * V);

  logic    clk = 0, rst = 1;
  logic    empty, pop, pv;
  result_t head;
  logic [AW-1:0] pa;
  result_t q [300];
  int      rd = 0;
  int      want [$];
  int checks = 0, failures = 0;
  int n_on = 0, n_off = 0;

  roots_to_pixels #(.H_RES(H), .V_RES(V)) dut (
    .clk, .rst, .empty_i(empty), .head_i(head), .pop_o(pop),
    .re_min_i(r2f(-2.0)), .im_max_i(r2f(1.5)), .scale_i(r2f(16.0)),
    .pix_valid_o(pv), .pix_addr_o(pa));

  always #5 clk = ~clk;

  assign empty = rd >= 300;
  assign head  = empty ? '0 : q[rd];

  always @(posedge clk) if (pop) rd <= rd + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected pixel stream: -1 for a dropped root
  function automatic int pixel_of(cplx_t z);
    real x, y;
    x = (f2r(z.re) + 2.0) * 16.0;
    y = (1.5 - f2r(z.im)) * 16.0;
    if (x < 0.0 || y < 0.0 || x >= H || y >= V) return -1;
    return $floor(y) * H + $floor(x);
  endfunction

  initial begin
    int nroots = 0;
    for (int e = 0; e < 300; e++) begin
      result_t r;
      r = '0;
      r.deg = IDX_W'(2 + $urandom % (N - 1));
      for (int k = 0; k < N; k++) begin
        // avoid values within float rounding of a pixel border
        real re, im;
        re = (real'($urandom % 90) - 45.0 + 0.5) / 16.0 + 0.01 * urand();
        im = (real'($urandom % 70) - 35.0 + 0.5) / 16.0 + 0.01 * urand();
        r.eig[k] = r2c(rc(re, im));
        if (k < int'(r.deg)) want.push_back(pixel_of(r.eig[k]));
      end
      q[e] = r;
      nroots += int'(r.deg);
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    repeat (nroots + 3) @(posedge clk);
    check(empty, "all entries popped, one root per cycle");
    check(want.size() == 0, "every root handled");
    check(n_on > 100 && n_off > 100, "roots on and off screen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker: the k-th cycle with a non-empty head produces pixel k
  logic took = 1'b0;
  always @(posedge clk) begin
    took <= !rst && !empty;
  end
  always @(negedge clk) if (took) begin
    int w;
    w = want.pop_front();
    if (w < 0) begin
      n_off++;
      check(!pv, "off-screen root dropped");
    end else begin
      n_on++;
      check(pv && int'(pa) == w, $sformatf("pixel %0d got %0d/%0d", w, pv, pa));
    end
  end

endmodule
