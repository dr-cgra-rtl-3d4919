// dr_selector: input selector in front of a compute unit's dependent operand.
//
// Chooses which token is written into the dependent operand's column of the
// unit's token buffer: the original input arriving over the grid (initial
// values of the loop-carried variable, or every value when no dependency is
// mapped) or the re-tagged result coming back from the unit's own ILDR.
// When dep_en is low the selector passes only the original input and the
// feedback side is held off. When dep_en is high both sources are accepted;
// the feedback token wins a cycle in which both are valid and the original
// token waits (original_stall pulses).
//
// Interface: valid/ready on all three sides, combinational.
// Follows the paper: a selector choosing between the original input and the
// ILDR's data-dependent value. Own choice: fixed priority for the feedback.
module dr_selector
  import drcgra_pkg::*;
(
  input  logic   dep_en,
  input  logic   orig_valid,
  input  token_t orig_tok,
  output logic   orig_ready,
  input  logic   fb_valid,
  input  token_t fb_tok,
  output logic   fb_ready,
  output logic   out_valid,
  output token_t out_tok,
  output logic   out_from_fb,
  input  logic   out_ready,
  output logic   original_stall
);

  logic use_fb;
  assign use_fb         = dep_en && fb_valid;
  assign out_valid      = use_fb || orig_valid;
  assign out_tok        = use_fb ? fb_tok : orig_tok;
  assign out_from_fb    = use_fb;
  assign fb_ready       = dep_en && out_ready;
  assign orig_ready     = out_ready && !use_fb;
  assign original_stall = use_fb && orig_valid;

endmodule
