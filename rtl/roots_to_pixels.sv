// roots_to_pixels: converts the roots held in the FIFO cache into pixel
// positions of the density graph and issues one pixel increment per root.
//
// The screen shows the window of the complex plane whose top-left corner is
// re_min + i*im_max, at scale_i pixels per unit. A root z = a + bi lands on
//     x = floor((a - re_min) * scale),  y = floor((im_max - b) * scale)
// and is drawn when 0 <= x < H_RES and 0 <= y < V_RES; roots off screen are
// dropped. The unit reads the FIFO head (first-word fall-through), converts
// root k = 0 .. deg-1 of it in consecutive cycles and pops the entry with
// its last root, so it handles one root per cycle.
//
// Interface: FIFO read side (empty_i, head_i, pop_o); window registers
// re_min_i, im_max_i, scale_i (binary32); pixel output pix_valid_o with
// pix_addr_o = y*H_RES + x. Timing: a root's pixel appears one cycle after
// it is read. The mapping z = a+bi -> (x,y) is the published design's; the window
// parameters and the address layout are this design's.
module roots_to_pixels
  import hqr_pkg::*;
#(
  parameter int unsigned H_RES = 1920,
  parameter int unsigned V_RES = 1080,
  localparam int AW = $clog2(H_RES * V_RES)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          empty_i,
  input  result_t       head_i,
  output logic          pop_o,
  input  fp32_t         re_min_i,
  input  fp32_t         im_max_i,
  input  fp32_t         scale_i,
  output logic          pix_valid_o,
  output logic [AW-1:0] pix_addr_o
);

  logic [IDX_W-1:0] k;
  cplx_t            z;
  logic [16:0]      fx, fy;
  logic             on_screen;

  always_comb begin
    z  = head_i.eig[k];
    fx = fp_floor_u16(fp_mul(fp_sub(z.re, re_min_i), scale_i));
    fy = fp_floor_u16(fp_mul(fp_sub(im_max_i, z.im), scale_i));
    on_screen = fx[16] && fy[16] && 32'(fx[15:0]) < H_RES && 32'(fy[15:0]) < V_RES;
    pop_o = !rst && !empty_i && (k + IDX_W'(1) >= head_i.deg);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      k           <= '0;
      pix_valid_o <= 1'b0;
    end else begin
      pix_valid_o <= !empty_i && on_screen;
      pix_addr_o  <= AW'(32'(fy[15:0]) * H_RES + 32'(fx[15:0]));
      if (!empty_i) k <= pop_o ? '0 : k + IDX_W'(1);
    end
  end

endmodule
