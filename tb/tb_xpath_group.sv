// tb_xpath_group: both default profile groups (4 profiles with parent-child
// steps, 12 without) read random well-formed documents. The testbench keeps
// its own stack of open tags, feeds its top to the stack group one clock
// after each tag as the real stack would, and checks every clock that
// prof_match equals the plain XPath meaning of each profile over the path of
// open elements (xf_tb_pkg::prof_matches). Every profile must match at least
// once, and some open tags must satisfy a profile's "//" reading but not its
// "/" reading, so the parent-child check is seen to reject.
module tb_xpath_group;
  import xf_pkg::*;
  import xf_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [255:0] dec;
  logic valid, stack_empty;
  tag_t tos;
  logic [N_STK_PROF-1:0] m_stk;
  logic [N_NOS_PROF-1:0] m_nos;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xpath_group #(.N_NODES(N_STK_NODES), .N_PROF(N_STK_PROF), .NODES(STK_NODES),
                .LEAF(STK_LEAF), .WITH_STACK(1'b1)) u_stk (
    .clk, .rst_n, .dec, .valid, .tos, .stack_empty, .prof_match(m_stk), .node_active());
  xpath_group #(.N_NODES(N_NOS_NODES), .N_PROF(N_NOS_PROF), .NODES(NOS_NODES),
                .LEAF(NOS_LEAF), .WITH_STACK(1'b0)) u_nos (
    .clk, .rst_n, .dec, .valid, .tos, .stack_empty, .prof_match(m_nos), .node_active());

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // A profile's steps with every "/" read as "//".
  function automatic bit desc_reading(node_idx_t leaf, tq_t path);
    node_t relaxed [];
    relaxed = new [N_STK_NODES];
    foreach (relaxed[i]) begin
      relaxed[i] = STK_NODES[i];
      relaxed[i].axis = AXIS_DESC;
    end
    return prof_matches(relaxed, leaf, path);
  endfunction

  initial begin
    bq_t doc;
    tq_t path;
    node_t stk_tab [], nos_tab [];
    int hits_stk [N_STK_PROF], hits_nos [N_NOS_PROF];
    int rejects = 0;
    byte unsigned hist [$];
    stk_tab = new [N_STK_NODES];
    nos_tab = new [N_NOS_NODES];
    foreach (stk_tab[i]) stk_tab[i] = STK_NODES[i];
    foreach (nos_tab[i]) nos_tab[i] = NOS_NODES[i];
    foreach (hits_stk[i]) hits_stk[i] = 0;
    foreach (hits_nos[i]) hits_nos[i] = 0;
    dec = '0; valid = 0; tos = NO_TAG; stack_empty = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 150; d++) begin
      doc.delete();
      gen_doc(doc, 7, 3);
      foreach (doc[i]) begin
        bit is_open, is_close;
        tag_t t;
        logic [N_STK_PROF-1:0] e_stk;
        logic [N_NOS_PROF-1:0] e_nos;
        tq_t p2;
        int L;
        @(negedge clk);
        tos = path.size() ? path[$] : NO_TAG;
        stack_empty = (path.size() == 0);
        valid = 1;
        dec = 256'(1) << doc[i];
        hist.push_back(doc[i]);
        if (hist.size() > 5) void'(hist.pop_front());
        L = hist.size();
        is_open  = L >= 4 && hist[L-1] == ">" && hist[L-4] == "<" && hist[L-3] != "/";
        is_close = L >= 5 && hist[L-1] == ">" && hist[L-5] == "<" && hist[L-4] == "/";
        t = {hist[L-3], hist[L-2]};
        e_stk = '0; e_nos = '0;
        if (is_open) begin
          p2 = path;
          p2.push_back(t);
          for (int p = 0; p < N_STK_PROF; p++) begin
            e_stk[p] = prof_matches(stk_tab, STK_LEAF[p], p2);
            if (!e_stk[p] && desc_reading(STK_LEAF[p], p2)) rejects++;
          end
          for (int p = 0; p < N_NOS_PROF; p++) e_nos[p] = prof_matches(nos_tab, NOS_LEAF[p], p2);
        end
        #1;
        checks += 2;
        if (m_stk != e_stk) begin failures++; $display("FAIL stack group %b expected %b", m_stk, e_stk); end
        if (m_nos != e_nos) begin failures++; $display("FAIL free group %b expected %b", m_nos, e_nos); end
        foreach (hits_stk[p]) hits_stk[p] += int'(e_stk[p]);
        foreach (hits_nos[p]) hits_nos[p] += int'(e_nos[p]);
        if (is_open) path.push_back(t);
        if (is_close) void'(path.pop_back());
        // random idle clock
        if ($urandom_range(7, 0) == 0) begin
          @(negedge clk); valid = 0; dec = '0;
        end
      end
    end
    foreach (hits_stk[p]) begin
      checks++;
      if (hits_stk[p] == 0) begin failures++; $display("FAIL stack profile %0d never matched", p); end
    end
    foreach (hits_nos[p]) begin
      checks++;
      if (hits_nos[p] == 0) begin failures++; $display("FAIL free profile %0d never matched", p); end
    end
    checks++;
    if (rejects == 0) begin failures++; $display("FAIL no parent-child rejection seen"); end
    $display("stack profile hits %p, free profile hits %p, child rejections %0d", hits_stk, hits_nos, rejects);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
