// tag_stack: the XML tag stack, holding the path of currently open elements.
//
// push stores a tag code on top, pop removes the top. The top of stack (tos)
// is kept in a register so every parent-child check reads it directly; the
// entries below it live in a memory array written as a single-port RAM with
// a registered read, the shape of an FPGA block RAM. The read port keeps the
// entry under the top ready in below_q: after any push or pop it is valid
// again two clocks later, and tags are at least four characters apart, so
// pushes and pops never come faster than that (an assertion checks a gap of
// at least two clocks).
//
// Overflow: a push onto a full stack (DEPTH entries) is not stored; it sets
// the sticky overflow flag and is counted, and the matching pops uncount it,
// so the stack is back in step once the document climbs out of the excess
// depth. While in excess, tos still shows the deepest stored tag.
// Underflow: a pop of an empty stack sets the sticky underflow flag and is
// otherwise ignored. Both flags clear only at reset.
//
// Interface: push/pop/tag_in from the tag filter, taken at the clock edge;
// tos, empty and depth are registered. An empty stack shows tos = NO_TAG.
//
// A single stack per document stream, in block RAM, pushed by open tags and
// popped by close tags, is the paper's. Its depth (the paper gives none), the
// separate top-of-stack register and the overflow and underflow handling are
// this design's.
module tag_stack #(
  parameter int DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic                       pop,
  input  xf_pkg::tag_t               tag_in,
  output xf_pkg::tag_t               tos,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] depth,
  output logic                       overflow,
  output logic                       underflow
);
  import xf_pkg::*;

  localparam int SP_W = $clog2(DEPTH + 1);
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  tag_t            mem [DEPTH];
  tag_t            below_q;
  logic [SP_W-1:0] sp_q;        // stored entries, the top included
  logic [15:0]     excess_q;    // pushes dropped on a full stack
  logic [AW-1:0]   rd_addr, wr_addr;

  // Entries under the top sit at mem[0 .. sp-2]; the one directly below
  // the top is mem[sp-2].
  assign rd_addr = (sp_q >= SP_W'(2)) ? AW'(sp_q - SP_W'(2)) : '0;
  assign wr_addr = AW'(sp_q - SP_W'(1));

  always_ff @(posedge clk) begin
    if (push && !pop && sp_q != '0 && sp_q != SP_W'(DEPTH) && excess_q == '0)
      mem[wr_addr] <= tos;
    below_q <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tos       <= NO_TAG;
      sp_q      <= '0;
      excess_q  <= '0;
      overflow  <= 1'b0;
      underflow <= 1'b0;
    end else if (push && !pop) begin
      if (sp_q == SP_W'(DEPTH) || excess_q != '0) begin
        overflow <= 1'b1;
        if (excess_q != '1) excess_q <= excess_q + 16'd1;
      end else begin
        tos  <= tag_in;
        sp_q <= sp_q + SP_W'(1);
      end
    end else if (pop && !push) begin
      if (excess_q != '0) begin
        excess_q <= excess_q - 16'd1;
      end else if (sp_q == '0) begin
        underflow <= 1'b1;
      end else begin
        tos  <= (sp_q >= SP_W'(2)) ? below_q : NO_TAG;
        sp_q <= sp_q - SP_W'(1);
      end
    end
  end

  assign empty = (sp_q == '0);
  assign depth = sp_q;

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
                             !(push && pop));
  a_spacing: assert property (@(posedge clk) disable iff (!rst_n)
                              (push || pop) |=> !(push || pop));

endmodule
