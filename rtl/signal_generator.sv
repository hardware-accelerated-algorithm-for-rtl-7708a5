// signal_generator: scans the video memory for a 1920x1080 at 60 Hz display
// (148.5 MHz pixel clock) and turns each pixel's root density into colour.
//
// Horizontal and vertical counters run over the whole raster, 2200 x 1125
// clocks including blanking (the standard CEA-861 1080p timing: 88/44/148
// clocks of front porch, sync and back porch per line, 4/5/36 lines per
// frame, syncs active high). In the visible area the counters address the
// video memory; the memory answers a cycle later, so the sync and data-enable
// outputs are delayed by one register to stay aligned with the colour.
// The density d (DW bits) becomes a grey level, d scaled to 0..255 on all
// three channels.
//
// Interface: rd_addr_o/rd_data_i to the video memory's read port; rgb_o,
// hsync_o, vsync_o, de_o towards the DVI encoder. Timing: one pixel per
// clock. The 1080p60 resolution and clock are the published design's; the raster
// numbers are the video standard's and the colour map is this design's.
module signal_generator #(
  parameter int unsigned H_RES   = 1920,
  parameter int unsigned H_FP    = 88,
  parameter int unsigned H_SYNC  = 44,
  parameter int unsigned H_BP    = 148,
  parameter int unsigned V_RES   = 1080,
  parameter int unsigned V_FP    = 4,
  parameter int unsigned V_SYNC  = 5,
  parameter int unsigned V_BP    = 36,
  parameter int unsigned DW      = 4,
  localparam int unsigned H_TOTAL = H_RES + H_FP + H_SYNC + H_BP,
  localparam int unsigned V_TOTAL = V_RES + V_FP + V_SYNC + V_BP,
  localparam int AW = $clog2(H_RES * V_RES)
) (
  input  logic          clk,
  input  logic          rst,
  output logic [AW-1:0] rd_addr_o,
  input  logic [DW-1:0] rd_data_i,
  output logic [23:0]   rgb_o,
  output logic          hsync_o,
  output logic          vsync_o,
  output logic          de_o
);

  logic [11:0] hc, vc;
  logic        active, hs, vs;
  logic [7:0]  grey;

  assign active = 32'(hc) < H_RES && 32'(vc) < V_RES;
  assign hs     = 32'(hc) >= H_RES + H_FP && 32'(hc) < H_RES + H_FP + H_SYNC;
  assign vs     = 32'(vc) >= V_RES + V_FP && 32'(vc) < V_RES + V_FP + V_SYNC;
  assign rd_addr_o = active ? AW'(32'(vc) * H_RES + 32'(hc)) : '0;

  always_comb begin
    int g;
    g = (int'(rd_data_i) * 255) / ((1 << DW) - 1);
    grey = 8'(g);
  end
  assign rgb_o = de_o ? {grey, grey, grey} : 24'd0;

  always_ff @(posedge clk) begin
    if (rst) begin
      hc      <= '0;
      vc      <= '0;
      hsync_o <= 1'b0;
      vsync_o <= 1'b0;
      de_o    <= 1'b0;
    end else begin
      if (32'(hc) == H_TOTAL - 1) begin
        hc <= '0;
        vc <= (32'(vc) == V_TOTAL - 1) ? '0 : vc + 12'd1;
      end else begin
        hc <= hc + 12'd1;
      end
      hsync_o <= hs;
      vsync_o <= vs;
      de_o    <= active;
    end
  end

endmodule
