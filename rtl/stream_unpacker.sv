// stream_unpacker: 32-bit document words in, one 8-bit character per clock out.
//
// The filter's tag parsers consume one character per clock, while the host
// delivers the document 32 bits at a time. This block holds one word and
// hands its four bytes to the character decoder on four consecutive clocks,
// byte [7:0] first. It can take the next word in the same clock as it hands
// out the last byte of the current one, so a host that keeps in_valid high
// sustains one character per clock. NUL (0x00) bytes are treated as fill: they
// use their clock slot but are not presented as characters (ch_valid low), so
// a document whose length is not a multiple of four can be padded with them.
//
// Interface: in_valid/in_ready is a valid-ready handshake (a word moves on a
// clock edge where both are high); in_word must hold while in_valid is high
// and in_ready low. ch/ch_valid is registered and has no back-pressure.
//
// The 32-bit input width and the 8-bit character stream are the paper's; the
// byte order, the handshake and the NUL padding rule are this design's.
module stream_unpacker (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] in_word,
  input  logic        in_valid,
  output logic        in_ready,
  output logic [7:0]  ch,
  output logic        ch_valid
);

  logic [31:0] word_q;
  logic [1:0]  byte_q;     // index of the byte to hand out next
  logic        full_q;     // word_q holds bytes still to be handed out

  // Ready when empty, or when the last byte goes out this clock.
  assign in_ready = !full_q || (byte_q == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_q   <= '0;
      byte_q   <= '0;
      full_q   <= 1'b0;
      ch       <= '0;
      ch_valid <= 1'b0;
    end else begin
      if (full_q) begin
        ch       <= word_q[8*byte_q +: 8];
        ch_valid <= (word_q[8*byte_q +: 8] != 8'h00);
        byte_q   <= byte_q + 2'd1;
      end else begin
        ch_valid <= 1'b0;
      end
      if (in_valid && in_ready) begin
        word_q <= in_word;
        byte_q <= 2'd0;
        full_q <= 1'b1;
      end else if (full_q && byte_q == 2'd3) begin
        full_q <= 1'b0;
      end
    end
  end

  // A word offered but not taken must stay put.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> (in_valid && $stable(in_word));
  endproperty
  a_hold: assert property (p_hold);

endmodule
