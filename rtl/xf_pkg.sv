// xf_pkg: types and constants shared by the XML filter.
//
// Tags are dictionary codes of exactly two 8-bit symbols, so an open tag is
// four characters ("<a0>") and a close tag five ("</a0>"). A tag code is the
// two symbols packed first-symbol-high, which is what the string literal "a0"
// gives when assigned to a 16-bit vector.
//
// A set of XPath profiles is described to the hardware as a forest of
// common-prefix trees: a table of nodes, one per location step, each naming
// its tag, the node it follows (or ROOT) and the axis that links it to that
// node. A profile is the index of the node where its path ends. Two profiles
// that share a prefix share the nodes of that prefix, and so share its
// hardware. The default tables below are this design's own example profile
// set, sized like the sixteen-profile example organisation of the paper
// (4 profiles that use the stack, 12 that do not).
package xf_pkg;

  localparam int TAG_W = 16;
  typedef logic [TAG_W-1:0] tag_t;

  // Tag code used for "no tag", e.g. the top of an empty stack.
  localparam tag_t NO_TAG = '0;

  localparam int NODE_IDX_W = 16;
  typedef logic [NODE_IDX_W-1:0] node_idx_t;
  localparam node_idx_t ROOT = '1;   // up to 65535 steps per group

  typedef enum logic {
    AXIS_DESC  = 1'b0,   // ancestor-descendant "//"
    AXIS_CHILD = 1'b1    // parent-child "/"
  } axis_e;

  typedef struct packed {
    tag_t      tag;      // tag this step looks for
    node_idx_t parent;   // node this step follows, ROOT for the first step
    axis_e     axis;     // axis between the parent step and this one
  } node_t;

  localparam logic [7:0] CH_LT    = 8'h3C;  // '<'
  localparam logic [7:0] CH_GT    = 8'h3E;  // '>'
  localparam logic [7:0] CH_SLASH = 8'h2F;  // '/'

  // Profiles that use the tag stack (at least one parent-child step).
  //   P0  a0/b0        P1  a0/b0/c0     P2  a0//c0/d0    P3  b1/e0
  localparam int N_STK_NODES = 7;
  localparam int N_STK_PROF  = 4;
  localparam node_t STK_NODES [N_STK_NODES] = '{
    '{tag: "a0", parent: ROOT,  axis: AXIS_DESC },   // 0
    '{tag: "b0", parent: 16'd0,  axis: AXIS_CHILD},   // 1
    '{tag: "c0", parent: 16'd1,  axis: AXIS_CHILD},   // 2
    '{tag: "c0", parent: 16'd0,  axis: AXIS_DESC },   // 3
    '{tag: "d0", parent: 16'd3,  axis: AXIS_CHILD},   // 4
    '{tag: "b1", parent: ROOT,  axis: AXIS_DESC },   // 5
    '{tag: "e0", parent: 16'd5,  axis: AXIS_CHILD}    // 6
  };
  localparam node_idx_t STK_LEAF [N_STK_PROF] = '{16'd1, 16'd2, 16'd4, 16'd6};

  // Profiles with ancestor-descendant steps only.
  //   Q0  a0//b0                     Q1  a0//b0//c0//d0
  //   Q2  a0//b0//c0//e0             Q3  a0//c1
  //   Q4  b1//a1                     Q5  b1//a1//d1//e1
  //   Q6  b1//a1//d1//e1//c2//d2     Q7  b1//a1//d1//e1//c2//e2
  //   Q8  c0//a0                     Q9  f0//f1
  //   Q10 f0//f1//f2//f3             Q11 b1//b0
  localparam int N_NOS_NODES = 20;
  localparam int N_NOS_PROF  = 12;
  localparam node_t NOS_NODES [N_NOS_NODES] = '{
    '{tag: "a0", parent: ROOT,  axis: AXIS_DESC},    // 0
    '{tag: "b0", parent: 16'd0,  axis: AXIS_DESC},    // 1
    '{tag: "c0", parent: 16'd1,  axis: AXIS_DESC},    // 2
    '{tag: "d0", parent: 16'd2,  axis: AXIS_DESC},    // 3
    '{tag: "e0", parent: 16'd2,  axis: AXIS_DESC},    // 4
    '{tag: "c1", parent: 16'd0,  axis: AXIS_DESC},    // 5
    '{tag: "b1", parent: ROOT,  axis: AXIS_DESC},    // 6
    '{tag: "a1", parent: 16'd6,  axis: AXIS_DESC},    // 7
    '{tag: "d1", parent: 16'd7,  axis: AXIS_DESC},    // 8
    '{tag: "e1", parent: 16'd8,  axis: AXIS_DESC},    // 9
    '{tag: "c2", parent: 16'd9,  axis: AXIS_DESC},    // 10
    '{tag: "d2", parent: 16'd10, axis: AXIS_DESC},    // 11
    '{tag: "e2", parent: 16'd10, axis: AXIS_DESC},    // 12
    '{tag: "c0", parent: ROOT,  axis: AXIS_DESC},    // 13
    '{tag: "a0", parent: 16'd13, axis: AXIS_DESC},    // 14
    '{tag: "f0", parent: ROOT,  axis: AXIS_DESC},    // 15
    '{tag: "f1", parent: 16'd15, axis: AXIS_DESC},    // 16
    '{tag: "f2", parent: 16'd16, axis: AXIS_DESC},    // 17
    '{tag: "f3", parent: 16'd17, axis: AXIS_DESC},    // 18
    '{tag: "b0", parent: 16'd6,  axis: AXIS_DESC}     // 19
  };
  localparam node_idx_t NOS_LEAF [N_NOS_PROF] = '{
    16'd1, 16'd3, 16'd4, 16'd5, 16'd7, 16'd9, 16'd11, 16'd12, 16'd14, 16'd16, 16'd18, 16'd19
  };

endpackage
