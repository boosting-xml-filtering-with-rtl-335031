// xpath_node: one location step of a stack-enhanced regular expression.
//
// A path profile such as a0//b0 becomes a chain of these steps. A step is
// "active" from the clock after its element opens inside the right context
// until that element closes:
//   hit    = <TAG> recognised  AND  the previous step is active (par_active)
//            AND, for a parent-child step, the top of stack is the parent's
//            tag (tos_match) -- the stack still shows the parent, because the
//            new tag is pushed one clock later;
//   active : set by hit, cleared when </TAG> is recognised.
// The close-tag parser is the negation block of the regular expression: the
// next step can only fire while this one is active, so e.g. <b0> only
// counts before the </a0> of the enclosing <a0>. A first step (ROOT_STEP) has
// no previous step; if it is a parent-child step it requires an empty stack.
//
// Interface: dec/valid come from the character decoder; hit is combinational
// in the clock of the final '>' of the tag, active is registered.
//
// The open-tag parser enabled by the previous step, the negation block on the
// close tag and the extra top-of-stack check for "/" follow the paper. As
// in the paper, a nested element with the same tag as an active step clears
// that step when it closes.
module xpath_node #(
  parameter xf_pkg::tag_t  TAG        = "b0",
  parameter xf_pkg::tag_t  PARENT_TAG = "a0",
  parameter xf_pkg::axis_e AXIS       = xf_pkg::AXIS_DESC,
  parameter bit            ROOT_STEP  = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [255:0] dec,
  input  logic         valid,
  input  logic         par_active,
  input  xf_pkg::tag_t tos,
  input  logic         stack_empty,
  output logic         hit,
  output logic         active
);
  import xf_pkg::*;

  logic en, open_match, close_match, tos_ok;

  assign en = ROOT_STEP ? 1'b1 : par_active;

  tag_match #(.TAG(TAG), .CLOSE(1'b0)) u_open (
    .clk, .rst_n, .dec, .valid, .en(en), .match(open_match)
  );

  tag_match #(.TAG(TAG), .CLOSE(1'b1)) u_close (
    .clk, .rst_n, .dec, .valid, .en(active), .match(close_match)
  );

  if (AXIS == AXIS_CHILD) begin : g_child
    tos_match #(.TAG(PARENT_TAG), .ROOT_STEP(ROOT_STEP)) u_tos (
      .tos, .stack_empty, .hit(tos_ok)
    );
  end else begin : g_desc
    assign tos_ok = 1'b1;
  end

  assign hit = open_match && tos_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           active <= 1'b0;
    else if (close_match) active <= 1'b0;
    else if (hit)         active <= 1'b1;
  end

endmodule
