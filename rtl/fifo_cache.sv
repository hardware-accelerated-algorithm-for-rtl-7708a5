// fifo_cache: first-in first-out store of finished results between the PE
// loop and the pixel conversion.
//
// One entry holds all eigenvalues of one polynomial (result_t, N complex
// binary32 values and the degree), so the scheduler writes a result in a
// single cycle and the PE loop never waits for the drawing side.
// Interface: push_i/din_i (ignored when full_o), pop_i/dout_o (dout_o shows
// the oldest entry while empty_o is low: first-word fall-through).
// Timing: a pushed entry is visible at dout_o the cycle after the push.
// DEPTH = 1024 is this design's estimate from the block RAM count the published design
// reports for the FIFO; the published design gives no depth.
module fifo_cache
  import hqr_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    push_i,
  input  result_t din_i,
  input  logic    pop_i,
  output result_t dout_o,
  output logic    full_o,
  output logic    empty_o
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  result_t        mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;
  logic [AW:0]    count;
  logic           do_push, do_pop;

  assign full_o  = count == (AW+1)'(DEPTH);
  assign empty_o = count == '0;
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;
  assign dout_o  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din_i;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  no_push_when_full_a : assert property (@(posedge clk) disable iff (rst) push_i |-> !full_o)
    else $error("fifo_cache: push while full");
  no_pop_when_empty_a : assert property (@(posedge clk) disable iff (rst) pop_i |-> !empty_o)
    else $error("fifo_cache: pop while empty");

endmodule
