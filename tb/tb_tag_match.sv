// tb_tag_match: an open-tag parser for <a0> and a close-tag parser for </a0>
// watch a random stream over a small alphabet ('<', '>', '/', 'a', '0', ...)
// with idle clocks and a random enable. The expected match is computed from
// the last characters of the stream: high exactly in the clock of a '>' that
// completes the tag, with the enable high.
module tb_tag_match;
  logic clk = 0, rst_n = 0;
  logic [255:0] dec;
  logic valid, en;
  logic m_open, m_close;
  int checks = 0, failures = 0;
  int n_open = 0, n_close = 0;

  always #5 clk = ~clk;

  tag_match #(.TAG("a0"), .CLOSE(1'b0)) u_open  (.clk, .rst_n, .dec, .valid, .en, .match(m_open));
  tag_match #(.TAG("a0"), .CLOSE(1'b1)) u_close (.clk, .rst_n, .dec, .valid, .en, .match(m_close));

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string alpha = "<>/a0b1 ";
    string hist = "";
    string pend = "";
    bit e_open, e_close;
    byte c;
    dec = '0; valid = 0; en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      valid = ($urandom_range(4, 0) != 0);
      en    = ($urandom_range(5, 0) != 0);
      // bias towards whole (possibly broken) tags
      if (pend.len() == 0 && $urandom_range(5, 0) == 0)
        case ($urandom_range(3, 0))
          0: pend = "<a0>";
          1: pend = "</a0>";
          2: pend = "<a1>";
          default: pend = "</a";
        endcase
      if (valid && pend.len() > 0) begin
        c = pend[0];
        pend = pend.substr(1, pend.len()-1);
      end else c = alpha[$urandom_range(alpha.len()-1, 0)];
      dec = valid ? (256'(1) << c) : '0;
      if (valid) hist = {hist, string'(c)};
      if (hist.len() > 5) hist = hist.substr(hist.len()-5, hist.len()-1);
      e_open  = valid && en && hist.len() >= 4 && hist.substr(hist.len()-4, hist.len()-1) == "<a0>";
      e_close = valid && en && hist.len() >= 5 && hist == "</a0>";
      #1;
      checks += 2;
      if (m_open  != e_open)  begin failures++; $display("FAIL open at %0d (%s)", i, hist); end
      if (m_close != e_close) begin failures++; $display("FAIL close at %0d (%s)", i, hist); end
      n_open += int'(e_open);
      n_close += int'(e_close);
    end
    checks++;
    if (n_open < 10 || n_close < 10) begin
      failures++; $display("FAIL too few tags seen: %0d open %0d close", n_open, n_close);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
