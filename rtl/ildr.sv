// ildr: Inter-loop Dependency Resolution unit.
//
// Takes the result token of a compute unit and re-tags it for a later loop
// iteration: the data passes unchanged and the thread ID goes through an
// adder that adds the configured distance DIFF (the number of iterations
// between the producer and the consumer of the loop-carried value). The
// re-tagged token is offered to the unit's selector and written into the
// unit's own token buffer, where it meets the other operand of the
// consuming thread.
//
// Timing: purely combinational, so a result registered at the unit's output
// in cycle n is written into the token buffer at the end of cycle n, i.e.
// the dependent operand reaches the next iteration one cycle after the
// result is produced. Interface: valid/ready on both sides.
//
// Follows the paper: the adder TID + DIFF on the tag and the data path that
// bypasses it. Own choice: a result whose new thread ID falls outside the
// thread group (TID + DIFF >= tg_size) has no consumer in this group and is
// dropped (dropped pulses); the value still leaves through the unit's
// normal output.
module ildr
  import drcgra_pkg::*;
(
  input  tid_t           diff,
  input  logic [TID_W:0] tg_size,
  input  logic           in_valid,
  input  token_t         in_tok,
  output logic           in_ready,
  output logic           out_valid,
  output token_t         out_tok,
  input  logic           out_ready,
  output logic           dropped
);

  logic [TID_W:0] new_tid;
  logic           beyond;

  assign new_tid = {1'b0, in_tok.tid} + {1'b0, diff};
  assign beyond  = new_tid >= tg_size;

  assign out_tok.tid  = new_tid[TID_W-1:0];
  assign out_tok.data = in_tok.data;
  assign out_valid    = in_valid && !beyond;
  assign in_ready     = beyond || out_ready;
  assign dropped      = in_valid && beyond;

endmodule
