// xml_filter_top: the XML filter, from document stream to matched profiles.
//
// The document arrives 32 bits at a time and is unpacked to one character
// per clock. The ASCII decoder turns each character into one of 256 lines,
// which every tag parser of every profile watches in parallel. Beside them the
// tag filter extracts each tag and pushes (open) or pops (close) the single
// tag stack, whose top is read by the parent-child steps. Profiles are split
// into a group that uses the stack and a group that does not, each with its
// own output priority encoder.
//
//   in_word -> stream_unpacker -> char_decoder -+-> xpath_group (stack) -> prio_encoder -> stk_*
//                                               +-> xpath_group (no stack) -> prio_encoder -> nos_*
//                                               +-> tag_filter -> tag_stack -> tos (to stack group)
//
// Timing: one character per clock. The final '>' of a matching tag leaves the
// unpacker in clock t; the profile number is on stk_idx/nos_idx with
// stk_valid/nos_valid in clock t+2.
//
// Interface: in_word/in_valid/in_ready is a valid-ready handshake from the
// host link (first character in bits [7:0]; NUL bytes are padding). The
// stack flags are sticky until reset; stack_depth is the current nesting. The defaults give the paper's
// sixteen-profile example organisation: 4 stack profiles on a 2-bit encoder,
// 12 stack-free profiles on a 4-bit encoder. The host link itself and the
// host software (dictionary replacement, result decoding) are outside.
module xml_filter_top #(
  parameter int                STACK_DEPTH = 64,
  parameter int                N_STK_NODES = xf_pkg::N_STK_NODES,
  parameter int                N_STK_PROF  = xf_pkg::N_STK_PROF,
  parameter xf_pkg::node_t     STK_NODES [N_STK_NODES] = xf_pkg::STK_NODES,
  parameter xf_pkg::node_idx_t STK_LEAF  [N_STK_PROF]  = xf_pkg::STK_LEAF,
  parameter int                N_NOS_NODES = xf_pkg::N_NOS_NODES,
  parameter int                N_NOS_PROF  = xf_pkg::N_NOS_PROF,
  parameter xf_pkg::node_t     NOS_NODES [N_NOS_NODES] = xf_pkg::NOS_NODES,
  parameter xf_pkg::node_idx_t NOS_LEAF  [N_NOS_PROF]  = xf_pkg::NOS_LEAF,
  localparam int               STK_W = (N_STK_PROF > 1) ? $clog2(N_STK_PROF) : 1,
  localparam int               NOS_W = (N_NOS_PROF > 1) ? $clog2(N_NOS_PROF) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // document stream from the host
  input  logic [31:0]      in_word,
  input  logic             in_valid,
  output logic             in_ready,
  // profiles that use the stack
  output logic [STK_W-1:0] stk_idx,
  output logic             stk_valid,
  output logic             stk_multi,
  // profiles that do not
  output logic [NOS_W-1:0] nos_idx,
  output logic             nos_valid,
  output logic             nos_multi,
  // stack status
  output logic             stack_overflow,
  output logic             stack_underflow,
  output logic [$clog2(STACK_DEPTH+1)-1:0] stack_depth
);
  import xf_pkg::*;

  logic [7:0]   ch, ch_q;
  logic         ch_valid, valid_q;
  logic [255:0] dec;
  logic         push, pop, stack_empty;
  tag_t         tag, tos;
  logic [N_STK_PROF-1:0]  stk_match;
  logic [N_NOS_PROF-1:0]  nos_match;

  stream_unpacker u_unpack (
    .clk, .rst_n, .in_word, .in_valid, .in_ready, .ch, .ch_valid
  );

  char_decoder u_dec (
    .clk, .rst_n, .ch, .ch_valid, .dec, .ch_q, .valid_q
  );

  tag_filter u_tagf (
    .clk, .rst_n, .ch(ch_q), .valid(valid_q), .push, .pop, .tag
  );

  tag_stack #(.DEPTH(STACK_DEPTH)) u_stack (
    .clk, .rst_n, .push, .pop, .tag_in(tag), .tos, .empty(stack_empty),
    .depth(stack_depth), .overflow(stack_overflow), .underflow(stack_underflow)
  );

  xpath_group #(
    .N_NODES(N_STK_NODES), .N_PROF(N_STK_PROF),
    .NODES(STK_NODES), .LEAF(STK_LEAF), .WITH_STACK(1'b1)
  ) u_stk (
    .clk, .rst_n, .dec, .valid(valid_q), .tos, .stack_empty,
    .prof_match(stk_match), .node_active()
  );

  xpath_group #(
    .N_NODES(N_NOS_NODES), .N_PROF(N_NOS_PROF),
    .NODES(NOS_NODES), .LEAF(NOS_LEAF), .WITH_STACK(1'b0)
  ) u_nos (
    .clk, .rst_n, .dec, .valid(valid_q), .tos, .stack_empty,
    .prof_match(nos_match), .node_active()
  );

  prio_encoder #(.N(N_STK_PROF), .W(STK_W)) u_stk_enc (
    .clk, .rst_n, .req(stk_match), .idx(stk_idx), .valid(stk_valid), .multi(stk_multi)
  );

  prio_encoder #(.N(N_NOS_PROF), .W(NOS_W)) u_nos_enc (
    .clk, .rst_n, .req(nos_match), .idx(nos_idx), .valid(nos_valid), .multi(nos_multi)
  );

endmodule
