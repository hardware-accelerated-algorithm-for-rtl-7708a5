// input_selector: the entry of the PE loop.
//
// Every cycle one slot of the loop arrives from the task next-step scheduler.
// If it carries a task, that task is re-issued to the PE core: recirculating
// work always has priority. If the slot is empty (a pipeline gap, left by a
// task that has finished), a new polynomial is taken from the external input
// in its place. The loop therefore stays full while input is available and
// nothing ever has to wait inside it.
//
// Interface: fb_i is the scheduler's task (fb_i.valid = 0 marks a gap);
// new_i/new_valid_i/new_ready_o is a valid/ready handshake for new tasks
// (built by matrix_represent); new_ready_o is high exactly in a gap.
// Timing: one register stage; task_o is the registered choice.
// The priority rule is the published design's; the handshake and the register are this
// design's.
module input_selector
  import hqr_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  task_t fb_i,
  input  task_t new_i,
  input  logic  new_valid_i,
  output logic  new_ready_o,
  output task_t task_o
);

  assign new_ready_o = !fb_i.valid;

  always_ff @(posedge clk) begin
    if (rst) begin
      task_o.valid <= 1'b0;
    end else if (fb_i.valid) begin
      task_o <= fb_i;
    end else if (new_valid_i) begin
      task_o       <= new_i;
      task_o.valid <= 1'b1;
    end else begin
      task_o.valid <= 1'b0;
    end
  end

  new_deg_a : assert property (@(posedge clk) disable iff (rst)
      (new_valid_i && new_ready_o) |-> (int'(new_i.deg) >= 2 && int'(new_i.deg) <= N))
    else $error("input_selector: new task with degree %0d", new_i.deg);

endmodule
