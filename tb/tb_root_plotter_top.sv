// tb_root_plotter_top: end-to-end run of the plotter on a small screen
// (64 x 48) with a 2-entry FIFO and the default T = 10 QR iterations.
// Polynomials of every degree 2..6 are built from chosen roots (some of them
// off screen) and streamed in. The testbench checks
//   * every result against the true roots (FP32 accuracy, 2e-3),
//   * that every task took exactly n(n-1)T passes of 8 cycles,
//   * the video memory against a density model computed from the results,
//   * one full video frame of rgb/de against the memory model.
// and counts the mechanisms of the design, each of which must occur: a new
// task entering in a gap, recirculation, shift subtract and add, the switch
// to right and back to left half-sweeps, iteration steps, deflation, result
// output, a full FIFO turning a result into a retry, dropped off-screen
// roots, back-to-back increments of one pixel, saturation of a counter.
module tb_root_plotter_top;
  import hqr_pkg::*;
  import tb_util_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 64, V = 48, T = 10, LOOP = 8, NPOLY = 40;
  localparam int AW = $clog2(H * V);

  logic clk = 0, clk_pix = 0, rst = 1, rst_pix = 1;
  logic in_valid, in_ready;
  logic [IDX_W-1:0] in_deg;
  cvec_t in_coef;
  logic [23:0] rgb;
  logic hsync, vsync, de;
  int checks = 0, failures = 0;

  root_plotter_top #(.QR_ITERS(T), .FIFO_DEPTH(2), .H_RES(H), .V_RES(V)) dut (
    .clk, .rst, .clk_pix, .rst_pix,
    .in_valid, .in_ready, .in_deg, .in_coef,
    .re_min(r2f(-1.6)), .im_max(r2f(1.2)), .scale(r2f(20.0)),
    .rgb, .hsync, .vsync, .de);

  always #5 clk = ~clk;              // 100 MHz
  always #3.367 clk_pix = ~clk_pix;  // 148.5 MHz

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus ----------------
  rvec_t roots [NPOLY];
  int    degs  [NPOLY];
  longint t_in [NPOLY];
  int    n_in = 0, n_out = 0;
  int    model [H*V];
  rc_t   SHARED = '{re: -0.52, im: 0.31};

  initial begin
    // degrees come in groups of eight, so a whole loop's worth of tasks
    // finishes within a few cycles and fills the FIFO; every other
    // polynomial has a root on one shared pixel (saturation), the first four
    // of degree 2 a double root there (same pixel twice in a row), every
    // seventh a root off screen
    for (int p = 0; p < NPOLY; p++) begin
      degs[p]  = 2 + (p / 8) % (N - 1);
      do begin
        bit ok;
        roots[p] = random_roots(degs[p]);
        if (p % 2 == 0) roots[p][0] = SHARED;
        if (p < 4) roots[p][1] = SHARED;
        if (p % 7 == 3) roots[p][degs[p] - 1] = rc(1.5, 1.5);
        ok = 1;
        for (int k = (p < 4) ? 2 : 1; k < degs[p]; k++) if (rabs(rsub(roots[p][k], SHARED)) < 0.15) ok = 0;
        if (ok && (p < 4 || converges(roots[p], degs[p], T))) break;
      end while (1);
    end
    for (int i = 0; i < H * V; i++) model[i] = 0;
    in_valid = 0; in_deg = '0; in_coef = '0;
    repeat (3) @(posedge clk);
    rst <= 0; rst_pix <= 0;
    while (n_in < NPOLY) begin
      rvec_t c;
      @(negedge clk);
      if ($urandom % 4 != 0) begin
        c = poly_from_roots(roots[n_in], degs[n_in]);
        in_valid = 1;
        in_deg = IDX_W'(degs[n_in]);
        for (int k = 0; k < N; k++) in_coef[k] = r2c(c[k]);
      end else in_valid = 0;
      @(posedge clk);
      if (in_valid && in_ready) begin t_in[n_in] = $time / 10; n_in++; end
    end
    @(negedge clk);
    in_valid = 0;
  end

  // ---------------- result checker ----------------
  // the loop keeps tasks in order of entry per slot; match results to inputs
  // by their roots
  bit matched [NPOLY];
  real worst = 0.0;
  int n_sat = 0;
  always @(posedge clk) if (!rst && dut.res_valid) begin
    rvec_t got;
    int    d, best;
    real   be;
    d = int'(dut.res.deg);
    for (int k = 0; k < N; k++) got[k] = c2r(dut.res.eig[k]);
    best = -1; be = 1.0e30;
    for (int p = 0; p < NPOLY; p++)
      if (!matched[p] && degs[p] == d && root_match_err(got, roots[p], d) < be) begin
        be = root_match_err(got, roots[p], d); best = p;
      end
    check(best >= 0 && be < 2e-3, $sformatf("roots of a degree-%0d polynomial (err %g)", d, be));
    if (best >= 0) begin
      matched[best] = 1;
      if (be > worst) worst = be;
      // a task enters at t_in and leaves n(n-1)T passes of LOOP cycles later,
      // plus LOOP cycles per retry on a full FIFO
      check(($time / 10 - t_in[best]) % LOOP == 0 && ($time / 10 - t_in[best]) >= d * (d - 1) * T * LOOP,
            "task latency n(n-1)T passes");
    end
    for (int k = 0; k < d; k++) begin
      real x, y;
      x = (got[k].re + 1.6) * 20.0; y = (1.2 - got[k].im) * 20.0;
      if (x >= 0 && y >= 0 && x < H && y < V) begin
        int a;
        a = int'($floor(y)) * H + int'($floor(x));
        if (model[a] == 15) n_sat++;
        if (model[a] < 15) model[a]++;
      end
    end
    n_out++;
  end

  // ---------------- mechanism counters ----------------
  int c_new, c_recirc, c_sub, c_add, c_to_right, c_to_left, c_iter, c_defl, c_out, c_retry, c_drop, c_pix, c_fwd;
  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) c_new++;
    if (dut.fb_task.valid) c_recirc++;
    if (dut.u_pe.u_shift_sub.active) c_sub++;
    if (dut.u_pe.u_shift_add.active) c_add++;
    if (dut.pe_task.valid && !dut.pe_task.done && dut.fb_task.valid) begin
      if (dut.pe_task.mode == MM_LEFT && dut.fb_task.mode == MM_RIGHT) c_to_right++;
      if (dut.pe_task.mode == MM_RIGHT && dut.fb_task.mode == MM_LEFT) c_to_left++;
      if (dut.fb_task.iter == dut.pe_task.iter + 1) c_iter++;
      if (dut.fb_task.m == dut.pe_task.m - 1) c_defl++;
    end
    if (dut.res_valid) c_out++;
    if (dut.fb_task.valid && dut.fb_task.done && !dut.pe_task.done) c_retry++;
    if (!dut.fifo_empty && !dut.u_r2p.on_screen) c_drop++;
    if (dut.pix_valid) c_pix++;
    if (dut.u_vmem.s1_valid && dut.u_vmem.wb_valid && dut.u_vmem.s1_addr == dut.u_vmem.wb_addr) c_fwd++;
  end

  // ---------------- end: memory and one video frame ----------------
  initial begin
    int n_de, n_frames;
    c_new = 0; c_recirc = 0; c_sub = 0; c_add = 0; c_to_right = 0; c_to_left = 0; c_iter = 0;
    c_defl = 0; c_out = 0; c_retry = 0; c_drop = 0; c_pix = 0; c_fwd = 0;
    wait (n_out == NPOLY);
    repeat (100) @(posedge clk);
    for (int a = 0; a < H * V; a++)
      check(int'(dut.u_vmem.mem[a]) == model[a], $sformatf("density of pixel %0d", a));
    // one whole frame from the start of vsync
    @(posedge vsync); @(negedge vsync);
    n_de = 0;
    while (!vsync) begin
      @(posedge clk_pix); #0.1;
      if (de) begin
        int g;
        g = model[n_de] * 255 / 15;
        check(rgb == {8'(g), 8'(g), 8'(g)}, $sformatf("video pixel %0d", n_de));
        n_de++;
      end
    end
    check(n_de == H * V, "visible pixels per frame");
    $display("worst root error %g", worst);
    $display("mechanisms: new=%0d recirculate=%0d shift_sub=%0d shift_add=%0d to_right=%0d to_left=%0d iter=%0d deflate=%0d output=%0d fifo_full_retry=%0d offscreen_drop=%0d pixel=%0d same_pixel_forward=%0d saturate=%0d",
             c_new, c_recirc, c_sub, c_add, c_to_right, c_to_left, c_iter, c_defl, c_out, c_retry, c_drop, c_pix, c_fwd, n_sat);
    check(c_new == NPOLY && c_out == NPOLY, "all polynomials in and out");
    check(c_recirc > 0 && c_sub > 0 && c_add > 0 && c_to_right > 0 && c_to_left > 0 && c_iter > 0 &&
          c_defl > 0 && c_retry > 0 && c_drop > 0 && c_pix > 0 && c_fwd > 0 && n_sat > 0, "every mechanism occurred");
    check(c_sub == c_add, "one shift add per shift subtract");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
