// tb_prio_encoder: random request vectors for a 12-input encoder (the size of
// the stack-free group); one clock later idx must be the lowest requesting
// input, valid must say whether any requested and multi whether more than one.
module tb_prio_encoder;
  logic clk = 0, rst_n = 0;
  logic [11:0] req;
  logic [3:0] idx;
  logic valid, multi;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  prio_encoder #(.N(12)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo, cnt;
    logic [3:0] last;
    req = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    last = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      case ($urandom_range(3, 0))
        0: req = '0;
        1: req = 12'(1) << $urandom_range(11, 0);
        default: req = 12'($urandom());
      endcase
      lo = -1; cnt = 0;
      for (int b = 0; b < 12; b++) if (req[b]) begin cnt++; if (lo < 0) lo = b; end
      @(posedge clk); #1;
      checks += 3;
      if (valid != (cnt > 0)) begin failures++; $display("FAIL valid"); end
      if (multi != (cnt > 1)) begin failures++; $display("FAIL multi"); end
      if (cnt > 0) last = 4'(lo);
      if (idx != last) begin failures++; $display("FAIL idx %0d expected %0d", idx, last); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
