// char_decoder: the ASCII pre-decoder.
//
// Each valid 8-bit character is decoded into 256 one-hot lines, registered:
// on the clock after character c arrives, line dec[c] is high and the other
// 255 are low. When no character arrives every line is low. All tag parsers
// then test a single line per character instead of comparing 8 bits, which
// is the area optimisation the design is built around.
//
// The registered character itself (ch_q) and the strobe (valid_q) come out
// alongside, aligned with dec, for the tag filter that extracts tag codes.
//
// Timing: one clock of latency, one character per clock.
//
// The 256-line one-hot decoding is the paper's; registering the output is
// this design's choice.
module char_decoder (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [7:0]   ch,
  input  logic         ch_valid,
  output logic [255:0] dec,
  output logic [7:0]   ch_q,
  output logic         valid_q
);

  logic [255:0] dec_d;

  always_comb begin
    dec_d = '0;
    if (ch_valid) dec_d[ch] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec     <= '0;
      ch_q    <= '0;
      valid_q <= 1'b0;
    end else begin
      dec     <= dec_d;
      ch_q    <= ch;
      valid_q <= ch_valid;
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                             valid_q |-> $onehot(dec));
  a_idle:   assert property (@(posedge clk) disable iff (!rst_n)
                             !valid_q |-> (dec == '0));

endmodule
