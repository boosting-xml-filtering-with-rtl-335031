// tag_filter: extracts open and close tags from the character stream.
//
// A small state machine follows the characters of one tag: '<', an optional
// '/', the two dictionary symbols and '>'. In the clock where the closing '>'
// of a well-formed tag arrives it raises push (open tag) or pop (close tag)
// for one clock, with the tag's code on tag. Anything that is not a
// two-symbol tag (text, longer names, "<?...?>" headers, comments) is passed
// over; a '<' anywhere restarts the machine.
//
// Interface: ch/valid are the registered character and strobe that come out
// of the character decoder, so push/pop appear in the same clock as the tag
// parsers' match outputs for the same '>'. push, pop and tag are
// combinational from that stage; the stack takes them on the next edge.
//
// That open tags push and close tags pop is the paper's; the state machine,
// and ignoring what is not a two-symbol tag, are this design's.
module tag_filter (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [7:0]   ch,
  input  logic         valid,
  output logic         push,
  output logic         pop,
  output xf_pkg::tag_t tag
);
  import xf_pkg::*;

  typedef enum logic [2:0] {
    S_IDLE,     // outside a tag
    S_LT,       // seen '<'
    S_SLASH,    // seen "</"
    S_SYM0,     // seen the first symbol
    S_SYM1      // seen both symbols, '>' expected
  } state_e;

  state_e     state_q;
  logic       close_q;
  logic [7:0] sym0_q, sym1_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      close_q <= 1'b0;
      sym0_q  <= '0;
      sym1_q  <= '0;
    end else if (valid) begin
      if (ch == CH_LT) begin
        state_q <= S_LT;
        close_q <= 1'b0;
      end else begin
        unique case (state_q)
          S_IDLE:  state_q <= S_IDLE;
          S_LT: begin
            if (ch == CH_SLASH) begin
              state_q <= S_SLASH;
              close_q <= 1'b1;
            end else if (ch == CH_GT) begin
              state_q <= S_IDLE;
            end else begin
              sym0_q  <= ch;
              state_q <= S_SYM0;
            end
          end
          S_SLASH: begin
            if (ch == CH_GT || ch == CH_SLASH) begin
              state_q <= S_IDLE;
            end else begin
              sym0_q  <= ch;
              state_q <= S_SYM0;
            end
          end
          S_SYM0: begin
            if (ch == CH_GT || ch == CH_SLASH) begin
              state_q <= S_IDLE;
            end else begin
              sym1_q  <= ch;
              state_q <= S_SYM1;
            end
          end
          S_SYM1:  state_q <= S_IDLE;   // '>' emits; anything else aborts
          default: state_q <= S_IDLE;
        endcase
      end
    end
  end

  logic done;
  assign done = valid && state_q == S_SYM1 && ch == CH_GT;
  assign push = done && !close_q;
  assign pop  = done &&  close_q;
  assign tag  = {sym0_q, sym1_q};

endmodule
