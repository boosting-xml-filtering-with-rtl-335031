// tb_xpath_node: three steps for tag b0 -- a parent-child step under a0, an
// ancestor-descendant step, and a parent-child first step -- watch a random
// stream of <b0>, </b0> and other tags while the previous-step flag, the top
// of stack and the empty flag change at random. A model computes, per clock,
// hit (the tag completes, the previous step is active and, for "/", the top
// of stack is a0 or the stack is empty for a first step) and the active flag
// (set by hit, cleared by </b0>).
module tb_xpath_node;
  import xf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [255:0] dec;
  logic valid, par_active, stack_empty;
  tag_t tos;
  logic hit_c, act_c, hit_d, act_d, hit_r, act_r;
  int checks = 0, failures = 0;
  int n_hit_c = 0, n_rej_c = 0, n_hit_d = 0, n_clear = 0;

  always #5 clk = ~clk;

  xpath_node #(.TAG("b0"), .PARENT_TAG("a0"), .AXIS(AXIS_CHILD), .ROOT_STEP(1'b0)) u_c (
    .clk, .rst_n, .dec, .valid, .par_active, .tos, .stack_empty, .hit(hit_c), .active(act_c));
  xpath_node #(.TAG("b0"), .PARENT_TAG("a0"), .AXIS(AXIS_DESC), .ROOT_STEP(1'b0)) u_d (
    .clk, .rst_n, .dec, .valid, .par_active, .tos, .stack_empty, .hit(hit_d), .active(act_d));
  xpath_node #(.TAG("b0"), .PARENT_TAG(NO_TAG), .AXIS(AXIS_CHILD), .ROOT_STEP(1'b1)) u_r (
    .clk, .rst_n, .dec, .valid, .par_active, .tos, .stack_empty, .hit(hit_r), .active(act_r));

  initial begin
    #800000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string hist = "", pend = "", alpha = "<>/ab01 ";
    bit m_act_c = 0, m_act_d = 0, m_act_r = 0;
    bit open_b0, close_b0, e_hc, e_hd, e_hr;
    byte c;
    dec = '0; valid = 0; par_active = 0; stack_empty = 1; tos = NO_TAG;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      valid = ($urandom_range(5, 0) != 0);
      if (pend.len() == 0) begin
        case ($urandom_range(5, 0))
          0, 1: pend = "<b0>";
          2:    pend = "</b0>";
          3:    pend = "<a0>";
          4:    pend = "</a0> ";
          default: pend = "x";
        endcase
        // context changes only between tags
        par_active  = ($urandom_range(3, 0) != 0);
        stack_empty = ($urandom_range(4, 0) == 0);
        tos = stack_empty ? NO_TAG : (($urandom_range(1, 0) != 0) ? tag_t'("a0") : tag_t'("c0"));
      end
      if (valid) begin
        c = pend[0];
        pend = pend.substr(1, pend.len()-1);
        if (c == "x") c = alpha[$urandom_range(alpha.len()-1, 0)];
      end else c = 0;
      dec = valid ? (256'(1) << c) : '0;
      if (valid) hist = {hist, string'(c)};
      if (hist.len() > 5) hist = hist.substr(hist.len()-5, hist.len()-1);
      open_b0  = valid && hist.len() >= 4 && hist.substr(hist.len()-4, hist.len()-1) == "<b0>";
      close_b0 = valid && hist == "</b0>";
      e_hc = open_b0 && par_active && !stack_empty && tos == tag_t'("a0");
      e_hd = open_b0 && par_active;
      e_hr = open_b0 && stack_empty;
      #1;
      checks += 6;
      if (hit_c != e_hc) begin failures++; $display("FAIL child hit at %0d", i); end
      if (hit_d != e_hd) begin failures++; $display("FAIL desc hit at %0d", i); end
      if (hit_r != e_hr) begin failures++; $display("FAIL root hit at %0d", i); end
      if (act_c != m_act_c) begin failures++; $display("FAIL child active at %0d", i); end
      if (act_d != m_act_d) begin failures++; $display("FAIL desc active at %0d", i); end
      if (act_r != m_act_r) begin failures++; $display("FAIL root active at %0d", i); end
      n_hit_c += int'(e_hc); n_hit_d += int'(e_hd);
      n_rej_c += int'(open_b0 && par_active && !e_hc);
      n_clear += int'(close_b0 && m_act_d);
      if (close_b0 && m_act_c) m_act_c = 0; else if (e_hc) m_act_c = 1;
      if (close_b0 && m_act_d) m_act_d = 0; else if (e_hd) m_act_d = 1;
      if (close_b0 && m_act_r) m_act_r = 0; else if (e_hr) m_act_r = 1;
    end
    checks++;
    if (n_hit_c == 0 || n_rej_c == 0 || n_hit_d == 0 || n_clear == 0) begin
      failures++; $display("FAIL a case never happened");
    end
    $display("child hits %0d, child rejects %0d, desc hits %0d, clears %0d", n_hit_c, n_rej_c, n_hit_d, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
