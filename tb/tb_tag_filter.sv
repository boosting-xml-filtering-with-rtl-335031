// tb_tag_filter: random character streams with whole and broken tags, text,
// long names and idle clocks. Expected push/pop are computed from the last
// characters: "<xy>" pushes xy and "</xy>" pops it, where x and y are not
// '<', '>' or '/'; nothing else may push or pop.
module tb_tag_filter;
  import xf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] ch;
  logic valid, push, pop;
  tag_t tag;
  int checks = 0, failures = 0, n_push = 0, n_pop = 0;

  always #5 clk = ~clk;
  tag_filter dut (.*);

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit sym(byte c);
    return c != "<" && c != ">" && c != "/";
  endfunction

  initial begin
    string alpha = "<>/ab01 xyz";
    string hist = "", pend = "";
    bit e_push, e_pop;
    tag_t e_tag;
    byte c;
    int L;
    ch = 0; valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      valid = ($urandom_range(4, 0) != 0);
      if (pend.len() == 0 && $urandom_range(4, 0) == 0)
        case ($urandom_range(5, 0))
          0: pend = "<a0>";
          1: pend = "</b1>";
          2: pend = "<xyz>";
          3: pend = "</ab";
          4: pend = "<?a0?>";
          default: pend = "<z9>";
        endcase
      if (valid && pend.len() > 0) begin
        c = pend[0];
        pend = pend.substr(1, pend.len()-1);
      end else c = alpha[$urandom_range(alpha.len()-1, 0)];
      ch = c;
      if (valid) hist = {hist, string'(c)};
      if (hist.len() > 5) hist = hist.substr(hist.len()-5, hist.len()-1);
      L = hist.len();
      e_push = valid && L >= 4 && hist[L-4] == "<" && sym(hist[L-3]) && sym(hist[L-2]) && hist[L-1] == ">";
      e_pop  = valid && L >= 5 && hist[L-5] == "<" && hist[L-4] == "/" && sym(hist[L-3])
               && sym(hist[L-2]) && hist[L-1] == ">";
      e_tag  = {hist[L-3], hist[L-2]};
      #1;
      checks += 2;
      if (push != e_push || pop != e_pop) begin
        failures++; $display("FAIL push/pop %b%b expected %b%b (%s)", push, pop, e_push, e_pop, hist);
      end
      if ((e_push || e_pop) && tag != e_tag) begin
        failures++; $display("FAIL tag %h expected %h", tag, e_tag);
      end
      n_push += int'(e_push); n_pop += int'(e_pop);
    end
    checks++;
    if (n_push < 20 || n_pop < 20) begin failures++; $display("FAIL too few tags"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
