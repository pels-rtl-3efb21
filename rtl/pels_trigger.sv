// pels_trigger: the trigger unit of one PELS link.
//
// All input events are broadcast to every link. This unit ANDs them with the
// link's private event mask and evaluates the trigger condition on the masked
// set: "any selected event active" (OR) or "all selected events active"
// (AND), as the paper describes. An empty mask never triggers.
//
// The condition is combinational from the events. trigger_o is a one-cycle
// pulse in the cycle the condition becomes true (rising edge of the
// condition), so an event line that is held high does not re-trigger the
// link every cycle. The edge detection and the empty-mask rule are this
// design's choices; the paper does not say how long an event lasts.
//
// Timing: trigger_o is combinational from events_i in the same cycle; one
// register (cond_q) remembers the previous condition. No trigger is produced
// while enable_i is low.
module pels_trigger
  import pels_pkg::*;
#(
  parameter int unsigned NUM_IN = 36  // events seen by a link (external + loop-back)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              enable_i,
  input  logic [NUM_IN-1:0] events_i,
  input  logic [NUM_IN-1:0] mask_i,
  input  trig_mode_e        mode_i,
  output logic              cond_o,     // current condition (for status)
  output logic              trigger_o   // one-cycle trigger pulse
);

  logic [NUM_IN-1:0] masked;
  logic              cond_q;

  always_comb begin
    masked = events_i & mask_i;
    if (mask_i == '0) begin
      cond_o = 1'b0;
    end else if (mode_i == TRIG_AND) begin
      cond_o = (masked == mask_i);
    end else begin
      cond_o = |masked;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) cond_q <= 1'b0;
    else         cond_q <= cond_o & enable_i;
  end

  assign trigger_o = enable_i & cond_o & ~cond_q;

endmodule
