// tb_stream_unpacker: random words, some with NUL padding bytes, offered with
// random gaps; every non-NUL byte must come out once, in order, byte [7:0]
// first. A second phase offers words back to back and checks the rate: one
// word per four clocks, a character on every clock, and the first character
// two clocks after the word is offered.
module tb_stream_unpacker;
  logic clk = 0, rst_n = 0;
  logic [31:0] in_word;
  logic in_valid, in_ready;
  logic [7:0] ch;
  logic ch_valid;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  stream_unpacker dut (.*);

  byte unsigned exp_q [$];
  int cyc = 0;
  int first_out = -1;
  int phase2_chars = 0;
  bit phase2 = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (phase2 && ch_valid) begin
    phase2_chars++;
    if (first_out < 0) first_out = cyc;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Output monitor.
  always @(posedge clk) if (rst_n && ch_valid) begin
    if (exp_q.size() == 0) check(0, "unexpected character");
    else begin
      byte unsigned e;
      e = exp_q.pop_front();
      check(ch == e, $sformatf("char %02x, expected %02x", ch, e));
    end
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int accepted, t0, first;
    phase2 = 0;
    in_valid = 0; in_word = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Phase 1: random words and gaps.
    for (int w = 0; w < 300; w++) begin
      logic [31:0] word;
      for (int b = 0; b < 4; b++) begin
        byte unsigned v;
        v = ($urandom_range(5, 0) == 0) ? 8'h00 : 8'($urandom_range(255, 1));
        word[8*b +: 8] = v;
      end
      @(negedge clk);
      while ($urandom_range(2, 0) == 0) begin
        in_valid = 0; @(negedge clk);
      end
      in_valid = 1; in_word = word;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      for (int b = 0; b < 4; b++) if (word[8*b +: 8] != 0) exp_q.push_back(word[8*b +: 8]);
      #1;
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    check(exp_q.size() == 0, "characters left undelivered");

    // Phase 2: back to back, no NULs.
    accepted = 0; first = -1;
    @(negedge clk);
    t0 = cyc;
    phase2 = 1;
    in_valid = 1;
    for (int w = 0; w < 50; w++) begin
      in_word = {8'h44, 8'h33, 8'h22, 8'h11} + 32'(w);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      for (int b = 0; b < 4; b++) exp_q.push_back(in_word[8*b +: 8]);
      accepted++;
      @(negedge clk);
    end
    in_valid = 0;
    check(cyc - t0 >= 4*50 - 4 && cyc - t0 <= 4*50 + 4,
          $sformatf("50 words took %0d clocks, expected about 200", cyc - t0));
    repeat (8) @(posedge clk);
    check(exp_q.size() == 0, "back-to-back characters left undelivered");
    check(phase2_chars == 200, $sformatf("%0d characters in phase 2", phase2_chars));
    // offered before edge t0+1, taken there, first byte out at edge t0+2
    check(first_out == t0 + 2, $sformatf("first character at clock %0d, offered at %0d", first_out, t0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
