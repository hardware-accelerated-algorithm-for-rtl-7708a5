// tb_video_memory: random pixel increments on a small frame (16 x 8, 4-bit
// counters), including back-to-back increments of the same pixel and
// saturation at 15, with the write clock and the read clock unrelated. The
// read port is then swept and every counter compared with a model count,
// one cycle of read latency.
module tb_video_memory;

  localparam int H = 16, V = 8, DW = 4;
  localparam int AW = $clog2(H * V);

  logic clk_a = 0, clk_b = 0, rst = 1;
  logic inc_v;
  logic [AW-1:0] inc_addr, rd_addr;
  logic [DW-1:0] rd_data;
  int model [H*V];
  int checks = 0, failures = 0;

  video_memory #(.H_RES(H), .V_RES(V), .DW(DW)) dut (
    .clk_a, .rst_a(rst), .inc_valid_i(inc_v), .inc_addr_i(inc_addr),
    .clk_b, .rd_addr_i(rd_addr), .rd_data_o(rd_data));

  always #5 clk_a = ~clk_a;
  always #3.367 clk_b = ~clk_b;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_same = 0, n_sat = 0, last;
    inc_v = 0; inc_addr = '0; rd_addr = '0;
    for (int i = 0; i < H * V; i++) model[i] = 0;
    repeat (2) @(posedge clk_a);
    rst <= 0;
    last = -1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk_a);
      inc_v = ($urandom % 5) != 0;
      // first 600 requests spread over 100 pixels, then pixel 120 only
      // (saturation); a third repeat the previous pixel back to back
      if (i >= 600) inc_addr = AW'(120);
      else if ($urandom % 3 == 0 && last >= 0) inc_addr = AW'(last);
      else inc_addr = AW'($urandom % 100);
      if (inc_v) begin
        if (int'(inc_addr) == last) n_same++;
        if (model[inc_addr] == 15) n_sat++;
        if (model[inc_addr] < 15) model[inc_addr]++;
        last = int'(inc_addr);
      end else last = -1;
    end
    @(negedge clk_a);
    inc_v = 0;
    repeat (4) @(posedge clk_a);
    for (int i = 0; i < H * V; i++) begin
      @(negedge clk_b);
      rd_addr = AW'(i);
      @(posedge clk_b); #0.5;
      check(int'(rd_data) == model[i], $sformatf("pixel %0d: %0d want %0d", i, rd_data, model[i]));
    end
    check(n_same > 100 && n_sat > 100 && model[5] < 15, "repeats and saturation seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
