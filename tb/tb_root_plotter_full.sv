// tb_root_plotter_full: the plotter at its default size (degree 6, T = 10,
// 1920 x 1080 screen, 1024-entry FIFO) through one complete operation:
// 24 degree-6 polynomials streamed in back to back, every result checked
// against the true roots, the pass rate checked (a task takes exactly
// n(n-1)T = 300 passes of 8 cycles, so with the loop full one polynomial
// finishes every 300 cycles on average), the density memory checked against
// a model, and then one whole 1080p frame of the video output compared pixel
// by pixel with that model.
module tb_root_plotter_full;
  import hqr_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 1920, V = 1080, T = 10, LOOP = 8, NPOLY = 24;
  localparam int PASSES = N * (N - 1) * T;

  logic clk = 0, clk_pix = 0, rst = 1, rst_pix = 1;
  logic in_valid, in_ready;
  logic [IDX_W-1:0] in_deg;
  cvec_t in_coef;
  logic [23:0] rgb;
  logic hsync, vsync, de;
  int checks = 0, failures = 0;

  root_plotter_top dut (
    .clk, .rst, .clk_pix, .rst_pix,
    .in_valid, .in_ready, .in_deg, .in_coef,
    .re_min(r2f(-1.6)), .im_max(r2f(0.9)), .scale(r2f(600.0)),
    .rgb, .hsync, .vsync, .de);

  always #5 clk = ~clk;
  always #3.367 clk_pix = ~clk_pix;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rvec_t  roots [NPOLY];
  longint t_in  [NPOLY];
  longint t_out [$];
  int     n_in = 0, n_out = 0;
  bit     matched [NPOLY];
  real    worst = 0.0;
  int     model [int];     // sparse density model: address -> count

  initial begin
    for (int p = 0; p < NPOLY; p++) do roots[p] = random_roots(N); while (!converges(roots[p], N, T));
    in_valid = 0; in_deg = '0; in_coef = '0;
    repeat (3) @(posedge clk);
    rst <= 0; rst_pix <= 0;
    while (n_in < NPOLY) begin
      rvec_t c;
      @(negedge clk);
      c = poly_from_roots(roots[n_in], N);
      in_valid = 1;
      in_deg = IDX_W'(N);
      for (int k = 0; k < N; k++) in_coef[k] = r2c(c[k]);
      @(posedge clk);
      if (in_ready) begin t_in[n_in] = $time / 10; n_in++; end
    end
    @(negedge clk);
    in_valid = 0;
  end

  always @(posedge clk) if (!rst && dut.res_valid) begin
    rvec_t got;
    int    best;
    real   be;
    for (int k = 0; k < N; k++) got[k] = c2r(dut.res.eig[k]);
    best = -1; be = 1.0e30;
    for (int p = 0; p < NPOLY; p++)
      if (!matched[p] && root_match_err(got, roots[p], N) < be) begin be = root_match_err(got, roots[p], N); best = p; end
    check(best >= 0 && be < 2e-3, $sformatf("roots (err %g)", be));
    if (best >= 0) begin
      matched[best] = 1;
      if (be > worst) worst = be;
      check($time / 10 - t_in[best] == PASSES * LOOP, "latency of a task: n(n-1)T passes of 8 cycles");
    end
    t_out.push_back($time / 10);
    for (int k = 0; k < N; k++) begin
      real x, y;
      x = (got[k].re + 1.6) * 600.0; y = (0.9 - got[k].im) * 600.0;
      if (x >= 0 && y >= 0 && x < H && y < V) begin
        int a;
        a = int'($floor(y)) * H + int'($floor(x));
        if (!model.exists(a)) model[a] = 0;
        if (model[a] < 15) model[a]++;
      end
    end
    n_out++;
  end

  initial begin
    int n_de, n_bad, n_lit;
    wait (n_out == NPOLY);
    repeat (50) @(posedge clk);
    // rate: result i and i+8 are one full task (300 passes x 8 cycles) apart,
    // i.e. one result per n(n-1)T = 300 cycles on average
    for (int i = 0; i + LOOP < NPOLY; i++)
      check(t_out[i + LOOP] - t_out[i] == PASSES * LOOP, "one result per n(n-1)T cycles");
    $display("average cycles per polynomial: %0d (n(n-1)T = %0d)", (t_out[NPOLY-1] - t_out[LOOP-1]) / (NPOLY - LOOP), PASSES);
    begin
      int nz = 0;
      foreach (model[a]) begin
        check(int'(dut.u_vmem.mem[a]) == model[a], "density of a plotted pixel");
        nz++;
      end
      n_lit = 0;
      for (int a = 0; a < H * V; a++) if (dut.u_vmem.mem[a] != 0) n_lit++;
      check(n_lit == nz && nz > 100, "no other pixel touched");
    end
    // one whole frame
    @(posedge vsync); @(negedge vsync);
    n_de = 0; n_bad = 0;
    while (!vsync) begin
      @(posedge clk_pix); #0.1;
      if (de) begin
        int g;
        g = model.exists(n_de) ? model[n_de] * 255 / 15 : 0;
        if (rgb != {8'(g), 8'(g), 8'(g)}) n_bad++;
        n_de++;
      end
    end
    check(n_de == H * V, "visible pixels per frame");
    check(n_bad == 0, $sformatf("frame content (%0d wrong pixels)", n_bad));
    $display("worst root error %g, lit pixels %0d", worst, n_lit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
