// tos_match: compares the top of the tag stack with one fixed tag.
//
// A parent-child step "p/c" may only fire when the element that is open
// around the new <c> is a <p>, i.e. when the top of the stack is p at the
// moment the '>' of <c> arrives (the push of <c> happens one clock later).
// This block is that comparison. With ROOT_STEP set it instead checks that
// the stack is empty, which is what a parent-child step from the document
// root ("/c" as the first step) needs.
//
// Interface: purely combinational, one 16-bit equality compare.
//
// The paper draws this check as a tag parser fed by the top of stack; a
// direct 16-bit compare of the stored code is this design's implementation.
module tos_match #(
  parameter xf_pkg::tag_t TAG       = "a0",
  parameter bit           ROOT_STEP = 1'b0
) (
  input  xf_pkg::tag_t tos,
  input  logic         stack_empty,
  output logic         hit
);

  assign hit = ROOT_STEP ? stack_empty : (!stack_empty && tos == TAG);

endmodule
