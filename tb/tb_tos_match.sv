// tb_tos_match: random and corner top-of-stack values against a parent-tag
// checker and a root-step checker.
module tb_tos_match;
  import xf_pkg::*;
  tag_t tos;
  logic empty, hit_p, hit_r;
  int checks = 0, failures = 0;

  tos_match #(.TAG("a0"), .ROOT_STEP(1'b0)) u_p (.tos, .stack_empty(empty), .hit(hit_p));
  tos_match #(.TAG("a0"), .ROOT_STEP(1'b1)) u_r (.tos, .stack_empty(empty), .hit(hit_r));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      case (i % 4)
        0: tos = "a0";
        1: tos = "a1";
        2: tos = "b0";
        default: tos = tag_t'($urandom());
      endcase
      empty = (i % 7 == 0);
      if (empty) tos = NO_TAG;
      #1;
      checks += 2;
      if (hit_p != (!empty && tos == 16'h6130)) begin failures++; $display("FAIL parent %h", tos); end
      if (hit_r != empty) begin failures++; $display("FAIL root"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
