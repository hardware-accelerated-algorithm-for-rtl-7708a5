// root_plotter_top: complex polynomial root-density plotter.
//
// Polynomials stream in; each is turned into its companion matrix and solved
// for all its roots by single-shift QR iteration in a loop made of
//   input selector -> PE core (diagonal shift -, Givens rotation, matrix
//   multiplication, diagonal shift +) -> task next-step scheduler -> back.
// Every task goes round the loop once per Givens rotation; the loop holds
// LOOP_DEPTH = 8 tasks at a time (1 input register + 7 PE core stages), so it
// does one rotation pass per clock and finishes a degree-n polynomial every
// n(n-1)T clocks on average. Finished root sets go into the FIFO cache, are
// mapped to screen pixels and counted into the video memory, which the
// signal generator shows as a 1920x1080 at 60 Hz density graph.
//
// Clock domains: clk (PE side, 100 MHz in the reference setting) and clk_pix
// (video side, 148.5 MHz), each with its own synchronous active-high reset;
// they meet only in the dual-port video memory.
// Interface: in_valid/in_ready/in_deg/in_coef accept one polynomial
// z^deg + in_coef[deg-1] z^(deg-1) + ... + in_coef[0] per handshake;
// re_min/im_max/scale set the plotted window; rgb/hsync/vsync/de is the
// pixel stream for an external DVI encoder and HDMI output, which are not
// part of this RTL.
module root_plotter_top
  import hqr_pkg::*;
#(
  parameter int unsigned QR_ITERS   = 10,     // T, iterations per order m
  parameter int unsigned FIFO_DEPTH = 1024,
  parameter int unsigned H_RES      = 1920,
  parameter int unsigned V_RES      = 1080,
  parameter int unsigned DENSITY_W  = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             clk_pix,
  input  logic             rst_pix,
  // polynomial input
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IDX_W-1:0] in_deg,
  input  cvec_t            in_coef,
  // plotted window
  input  fp32_t            re_min,
  input  fp32_t            im_max,
  input  fp32_t            scale,
  // pixel stream
  output logic [23:0]      rgb,
  output logic             hsync,
  output logic             vsync,
  output logic             de
);

  localparam int AW = $clog2(H_RES * V_RES);

  task_t   new_task, sel_task, pe_task, fb_task;
  logic    res_valid, fifo_full, fifo_empty, fifo_pop;
  result_t res, fifo_head;
  logic          pix_valid;
  logic [AW-1:0] pix_addr, rd_addr;
  logic [DENSITY_W-1:0] rd_data;

  matrix_represent u_represent (.deg(in_deg), .coef(in_coef), .task_o(new_task));

  input_selector u_select (
    .clk, .rst,
    .fb_i(fb_task), .new_i(new_task), .new_valid_i(in_valid), .new_ready_o(in_ready),
    .task_o(sel_task)
  );

  pe_core u_pe (.clk, .rst, .task_i(sel_task), .task_o(pe_task));

  task_scheduler #(.MAX_ITER(QR_ITERS - 1)) u_sched (
    .task_i(pe_task), .fifo_full_i(fifo_full),
    .fb_o(fb_task), .res_valid_o(res_valid), .res_o(res)
  );

  fifo_cache #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst,
    .push_i(res_valid), .din_i(res),
    .pop_i(fifo_pop), .dout_o(fifo_head),
    .full_o(fifo_full), .empty_o(fifo_empty)
  );

  roots_to_pixels #(.H_RES(H_RES), .V_RES(V_RES)) u_r2p (
    .clk, .rst,
    .empty_i(fifo_empty), .head_i(fifo_head), .pop_o(fifo_pop),
    .re_min_i(re_min), .im_max_i(im_max), .scale_i(scale),
    .pix_valid_o(pix_valid), .pix_addr_o(pix_addr)
  );

  video_memory #(.H_RES(H_RES), .V_RES(V_RES), .DW(DENSITY_W)) u_vmem (
    .clk_a(clk), .rst_a(rst), .inc_valid_i(pix_valid), .inc_addr_i(pix_addr),
    .clk_b(clk_pix), .rd_addr_i(rd_addr), .rd_data_o(rd_data)
  );

  signal_generator #(.H_RES(H_RES), .V_RES(V_RES), .DW(DENSITY_W)) u_video (
    .clk(clk_pix), .rst(rst_pix),
    .rd_addr_o(rd_addr), .rd_data_i(rd_data),
    .rgb_o(rgb), .hsync_o(hsync), .vsync_o(vsync), .de_o(de)
  );

endmodule
