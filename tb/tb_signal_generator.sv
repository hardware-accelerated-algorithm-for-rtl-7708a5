// tb_signal_generator: a reduced raster (16 x 6 visible, porches 2/3/4 and
// 1/2/3) over two frames. Checks line and frame periods, the position and
// width of hsync, vsync and data-enable, that each visible pixel reads its
// own video memory address, and the density-to-grey mapping through a
// one-cycle memory model whose content is a function of the address.
module tb_signal_generator;

  localparam int H = 16, HF = 2, HS = 3, HB = 4, V = 6, VF = 1, VS = 2, VB = 3;
  localparam int HT = H + HF + HS + HB, VT = V + VF + VS + VB;
  localparam int AW = $clog2(H * V);

  logic clk = 0, rst = 1;
  logic [AW-1:0] addr;
  logic [3:0] data;
  logic [23:0] rgb;
  logic hs, vs, de;
  int checks = 0, failures = 0;

  signal_generator #(.H_RES(H), .H_FP(HF), .H_SYNC(HS), .H_BP(HB),
                     .V_RES(V), .V_FP(VF), .V_SYNC(VS), .V_BP(VB), .DW(4)) dut (
    .clk, .rst, .rd_addr_o(addr), .rd_data_i(data), .rgb_o(rgb), .hsync_o(hs), .vsync_o(vs), .de_o(de));

  always #5 clk = ~clk;
  always @(posedge clk) data <= 4'(addr * 7 + 3);   // memory model, 1 cycle

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_de = 0, n_hs = 0, n_vs = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    #1;   // counters at (0,0)
    for (int p = 0; p <= 2 * HT * VT; p++) begin
      int x, y, px, py;
      bit act, hsy, vsy;
      x = p % HT; y = (p / HT) % VT;
      if (x < H && y < V) check(int'(addr) == y * H + x, "memory address of the pixel");
      if (p > 0) begin
        // outputs now describe the previous pixel
        px = (p - 1) % HT; py = ((p - 1) / HT) % VT;
        act = px < H && py < V;
        hsy = px >= H + HF && px < H + HF + HS;
        vsy = py >= V + VF && py < V + VF + VS;
        check(de == act && hs == hsy && vs == vsy, $sformatf("sync/de at (%0d,%0d)", px, py));
        if (act) begin
          int d, g;
          d = ((py * H + px) * 7 + 3) % 16;
          g = d * 255 / 15;
          check(rgb == {8'(g), 8'(g), 8'(g)}, "grey level");
        end else check(rgb == 24'd0, "black in blanking");
        n_de += int'(de); n_hs += int'(hs); n_vs += int'(vs);
      end
      @(posedge clk); #1;
    end
    check(n_de == 2 * H * V && n_hs == 2 * VT * HS && n_vs == 2 * VS * HT, "counts per frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
