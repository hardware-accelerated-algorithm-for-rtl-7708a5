// video_memory: the frame buffer of the root density graph, one DW-bit
// density counter per pixel of an H_RES x V_RES screen.
//
// Port A (PE clock) increments a pixel: a request reads the counter, the
// next cycle writes it back plus one, saturating at 2^DW - 1. Requests may
// come every cycle, also to the same pixel: a read that missed the write of
// the request just before it takes that written value instead (forwarding).
// Port B (video clock) reads one pixel per cycle with one cycle of latency.
// The two ports are in different clock domains and share only the array,
// as a true dual-port block RAM does. The memory starts cleared.
//
// The published design names the video memory and gives its size in block RAMs (256);
// a 4-bit density per pixel (1920*1080*4 bits = 230 block RAMs of 36 Kb) is
// this design's reading of that, and the increment-with-saturation rule is
// this design's choice.
module video_memory #(
  parameter int unsigned H_RES = 1920,
  parameter int unsigned V_RES = 1080,
  parameter int unsigned DW    = 4,
  localparam int unsigned WORDS = H_RES * V_RES,
  localparam int AW = $clog2(WORDS)
) (
  input  logic          clk_a,
  input  logic          rst_a,
  input  logic          inc_valid_i,
  input  logic [AW-1:0] inc_addr_i,
  input  logic          clk_b,
  input  logic [AW-1:0] rd_addr_i,
  output logic [DW-1:0] rd_data_o
);

  logic [DW-1:0] mem [WORDS];

  initial begin
    for (int i = 0; i < int'(WORDS); i++) mem[i] = '0;
  end

  // port A: read-modify-write increment, two stages
  logic          s1_valid, wb_valid;
  logic [AW-1:0] s1_addr, wb_addr;
  logic [DW-1:0] s1_data, wb_data, cur, nxt;

  always_comb begin
    cur = (wb_valid && wb_addr == s1_addr) ? wb_data : s1_data;
    nxt = (cur == '1) ? cur : cur + DW'(1);
  end

  always_ff @(posedge clk_a) begin
    s1_data <= mem[inc_addr_i];
    s1_addr <= inc_addr_i;
    if (s1_valid) mem[s1_addr] <= nxt;
    wb_addr <= s1_addr;
    wb_data <= nxt;
    if (rst_a) begin
      s1_valid <= 1'b0;
      wb_valid <= 1'b0;
    end else begin
      s1_valid <= inc_valid_i;
      wb_valid <= s1_valid;
    end
  end

  // port B: read
  always_ff @(posedge clk_b) begin
    rd_data_o <= mem[rd_addr_i];
  end

  addr_range_a : assert property (@(posedge clk_a) disable iff (rst_a) inc_valid_i |-> 32'(inc_addr_i) < WORDS)
    else $error("video_memory: address %0d out of range", inc_addr_i);

endmodule
