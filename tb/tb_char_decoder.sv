// tb_char_decoder: every one of the 256 characters, in random order and with
// idle clocks between, must light exactly its own line one clock later;
// idle clocks must light none.
module tb_char_decoder;
  logic clk = 0, rst_n = 0;
  logic [7:0] ch, ch_q;
  logic ch_valid, valid_q;
  logic [255:0] dec;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  char_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [256];
    ch = 0; ch_valid = 0;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 256; k++) begin
      bit v;
      logic [7:0] c;
      v = ($urandom_range(3, 0) != 0);
      c = 8'(order[k]);
      @(negedge clk);
      ch = c; ch_valid = v;
      @(posedge clk); #1;
      checks++;
      if (v) begin
        if (!(valid_q && ch_q == c && dec == (256'(1) << c))) begin
          failures++; $display("FAIL char %02x", c);
        end
      end else if (!(valid_q == 0 && dec == '0)) begin
        failures++; $display("FAIL idle clock lit a line");
      end
      if (!v) k--;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
