// xpath_group: a set of XPath profiles compiled onto one shared input.
//
// The profiles are given as a forest of common-prefix trees (see xf_pkg):
// NODES lists the location steps, each naming its tag, the step it follows
// and the axis between them; LEAF gives, for each profile, the step where it
// ends. One xpath_node is built per table entry, so a prefix shared by many
// profiles is built once. Profile p matches in the clock where its last step
// hits; prof_match[p] is then high for that one clock. All steps see the
// same decoded character each clock and work in parallel.
//
// Two groups make up the filter: one whose profiles contain parent-child
// steps and read the tag stack, and one whose profiles do not. WITH_STACK = 0
// marks the second; a parent-child step in its table is an elaboration error,
// and its stack inputs are not used.
//
// Interface: dec/valid from the character decoder, tos/stack_empty from the
// tag stack; prof_match is combinational (final '>' of the matching tag).
//
// Building profiles from per-step tag parsers, the common-prefix sharing and
// the split into stack and stack-free groups follow the paper. Describing
// the profiles by a parameter table, rather than by generated HDL per
// profile, is this design's.
module xpath_group #(
  parameter int               N_NODES    = xf_pkg::N_STK_NODES,
  parameter int               N_PROF     = xf_pkg::N_STK_PROF,
  parameter xf_pkg::node_t    NODES [N_NODES] = xf_pkg::STK_NODES,
  parameter xf_pkg::node_idx_t LEAF [N_PROF]  = xf_pkg::STK_LEAF,
  parameter bit               WITH_STACK = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [255:0]      dec,
  input  logic              valid,
  input  xf_pkg::tag_t      tos,
  input  logic              stack_empty,
  output logic [N_PROF-1:0] prof_match,
  output logic [N_NODES-1:0] node_active
);
  import xf_pkg::*;

  logic [N_NODES-1:0] node_hit;

  for (genvar n = 0; n < N_NODES; n++) begin : g_node
    localparam bit IS_ROOT = (NODES[n].parent == ROOT);
    localparam int PIDX    = IS_ROOT ? 0 : int'(NODES[n].parent);
    localparam tag_t PTAG  = IS_ROOT ? NO_TAG : NODES[PIDX].tag;

    if (!IS_ROOT && PIDX >= n) begin : g_bad_order
      $error("xpath_group: node %0d must follow its parent %0d", n, PIDX);
    end
    if (!WITH_STACK && NODES[n].axis == AXIS_CHILD) begin : g_bad_axis
      $error("xpath_group: node %0d is parent-child in a stack-free group", n);
    end

    logic par_active;
    if (IS_ROOT) begin : g_root
      assign par_active = 1'b1;
    end else begin : g_inner
      assign par_active = node_active[PIDX];
    end

    xpath_node #(
      .TAG(NODES[n].tag), .PARENT_TAG(PTAG), .AXIS(NODES[n].axis),
      .ROOT_STEP(IS_ROOT)
    ) u_node (
      .clk, .rst_n, .dec, .valid,
      .par_active(par_active),
      .tos(WITH_STACK ? tos : NO_TAG),
      .stack_empty(WITH_STACK ? stack_empty : 1'b1),
      .hit(node_hit[n]),
      .active(node_active[n])
    );
  end

  for (genvar p = 0; p < N_PROF; p++) begin : g_prof
    if (int'(LEAF[p]) >= N_NODES) begin : g_bad_leaf
      $error("xpath_group: profile %0d ends at missing node %0d", p, int'(LEAF[p]));
    end
    localparam int L = int'(LEAF[p]);
    assign prof_match[p] = node_hit[L];
  end

endmodule
