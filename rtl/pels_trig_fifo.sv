// pels_trig_fifo: buffer of pending triggers of one PELS link.
//
// The paper buffers the trigger signal with a FIFO so that a trigger arriving
// while the execution unit is still running a sequence is not lost. A trigger
// carries no data, so the FIFO reduces to an occupancy counter: push adds a
// pending trigger, pop removes one when the execution unit starts a sequence.
// The depth (2) is this design's choice. A push into a full FIFO is dropped
// and sets the sticky overflow flag, which the CPU clears through clr_ovf_i.
//
// Timing: push and pop act on the rising clock edge; empty_o/full_o are
// registered-state decodes, so a trigger pushed in cycle t is visible as
// not-empty in cycle t+1. Push and pop in the same cycle keep the count.
module pels_trig_fifo #(
  parameter int unsigned DEPTH = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic push_i,
  input  logic pop_i,
  input  logic clr_ovf_i,
  output logic empty_o,
  output logic full_o,
  output logic overflow_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [CNT_W-1:0] cnt_q;
  logic             ovf_q;
  logic             do_push, do_pop;

  assign empty_o = (cnt_q == '0);
  assign full_o  = (cnt_q == CNT_W'(DEPTH));
  assign do_pop  = pop_i & ~empty_o;
  assign do_push = push_i & (~full_o | do_pop);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
      ovf_q <= 1'b0;
    end else begin
      if (do_push && !do_pop)      cnt_q <= cnt_q + 1'b1;
      else if (do_pop && !do_push) cnt_q <= cnt_q - 1'b1;
      if (push_i && !do_push)      ovf_q <= 1'b1;
      else if (clr_ovf_i)          ovf_q <= 1'b0;
    end
  end

  assign overflow_o = ovf_q;
  assign count_o    = cnt_q;

  // A pop is only requested when something is pending.
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o);

endmodule
