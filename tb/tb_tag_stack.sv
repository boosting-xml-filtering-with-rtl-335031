// tb_tag_stack: random pushes and pops, at least two clocks apart, on an
// 8-entry stack, against a queue model that also counts the pushes dropped
// on a full stack. Checks tos, empty, depth and the sticky overflow and
// underflow flags after every operation; the walk is biased so that the
// stack fills, overflows, drains and finally underflows.
module tb_tag_stack;
  import xf_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, overflow, underflow;
  tag_t tag_in, tos;
  logic [$clog2(D+1)-1:0] depth;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tag_stack #(.DEPTH(D)) dut (.*);

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tag_t model [$];
    int excess = 0;
    bit e_ovf = 0, e_udf = 0;
    int n_ovf_ops = 0;
    push = 0; pop = 0; tag_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      bit do_push;
      int bias;
      @(negedge clk);
      bias = (i / 300) % 2 ? 30 : 70;       // phases that mostly grow or shrink
      do_push = ($urandom_range(99, 0) < bias);
      if (i >= 2900) do_push = 0;           // drain and underflow at the end
      push = do_push; pop = !do_push;
      tag_in = tag_t'($urandom_range(16'hFFFF, 1));
      if (do_push) begin
        if (model.size() == D || excess > 0) begin excess++; e_ovf = 1; n_ovf_ops++; end
        else model.push_back(tag_in);
      end else begin
        if (excess > 0) excess--;
        else if (model.size() == 0) e_udf = 1;
        else void'(model.pop_back());
      end
      @(negedge clk);
      push = 0; pop = 0;
      repeat ($urandom_range(2, 0)) @(negedge clk);
      checks += 5;
      if (empty != (model.size() == 0)) begin failures++; $display("FAIL empty at %0d", i); end
      if (int'(depth) != model.size()) begin failures++; $display("FAIL depth %0d vs %0d", depth, model.size()); end
      if (tos != (model.size() ? model[$] : NO_TAG)) begin
        failures++; $display("FAIL tos %h at %0d", tos, i);
      end
      if (overflow != e_ovf)  begin failures++; $display("FAIL overflow flag"); end
      if (underflow != e_udf) begin failures++; $display("FAIL underflow flag"); end
    end
    checks++;
    if (!e_ovf || !e_udf) begin failures++; $display("FAIL overflow/underflow never exercised"); end
    $display("overflowed pushes: %0d", n_ovf_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
