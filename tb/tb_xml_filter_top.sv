// tb_xml_filter_top: the whole filter, at its default parameters, end to end.
//
// Random well-formed documents are packed four characters per 32-bit word
// (first character in bits [7:0], the last word padded with NUL bytes) and
// offered on the input handshake, sometimes back to back, sometimes with
// random gaps. For every character that leaves the unpacker the testbench
// updates its own model of the open-element path and works out, with the
// plain XPath reading of each profile, which profiles match; two clocks later
// each priority encoder must show the lowest matching profile, valid and
// multi. After the random documents come a document nested deeper than the
// stack (overflow), more random documents (the stack must be back in step),
// and a stray close tag (underflow).
//
// Every mechanism is counted and must occur: stalls (clocks with no word
// offered), NUL padding, pushes,
// pops, matches in each group, simultaneous matches (multi), parent-child
// rejections, stack overflow and underflow. In the back-to-back phase one
// character must leave the unpacker on every clock.
module tb_xml_filter_top;
  import xf_pkg::*;
  import xf_tb_pkg::*;
  localparam int STK_W = $clog2(N_STK_PROF);
  localparam int NOS_W = $clog2(N_NOS_PROF);

  logic clk = 0, rst_n = 0;
  logic [31:0] in_word;
  logic in_valid, in_ready;
  logic [STK_W-1:0] stk_idx;
  logic stk_valid, stk_multi;
  logic [NOS_W-1:0] nos_idx;
  logic nos_valid, nos_multi;
  logic stack_overflow, stack_underflow;
  logic [$clog2(64+1)-1:0] stack_depth;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xml_filter_top dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #60000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model on the unpacker output ----------------
  int cyc = 0;

  node_t stk_tab [], nos_tab [];
  tq_t path;
  byte unsigned hist [$];
  // expected encoder outputs, by clock
  typedef struct { int at; bit sv; int si; bit sm; bit nv; int ni; bit nm; } exp_t;
  exp_t expq [$];
  int n_push = 0, n_pop = 0, n_stk = 0, n_nos = 0, n_multi = 0, n_reject = 0;
  int n_stall = 0, n_nul = 0, n_overflow_push = 0;
  bit counting_rate = 0;
  int rate_first = -1, rate_last = -1, rate_chars = 0;

  function automatic bit desc_reading(node_idx_t leaf, tq_t p);
    node_t relaxed [];
    relaxed = new [N_STK_NODES];
    foreach (relaxed[i]) begin relaxed[i] = STK_NODES[i]; relaxed[i].axis = AXIS_DESC; end
    return prof_matches(relaxed, leaf, p);
  endfunction

  // Sampled at the falling edge: the character the unpacker presents in this
  // clock, and the encoder outputs for the character presented two clocks
  // earlier.
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (expq.size() > 0 && expq[0].at == cyc) begin
      exp_t e;
      e = expq.pop_front();
      check(stk_valid == e.sv, $sformatf("stk_valid at %0d", cyc));
      check(nos_valid == e.nv, $sformatf("nos_valid at %0d", cyc));
      if (e.sv) check(int'(stk_idx) == e.si && stk_multi == e.sm,
                      $sformatf("stack group idx %0d/%b, expected %0d/%b", stk_idx, stk_multi, e.si, e.sm));
      if (e.nv) check(int'(nos_idx) == e.ni && nos_multi == e.nm,
                      $sformatf("free group idx %0d/%b, expected %0d/%b", nos_idx, nos_multi, e.ni, e.nm));
    end else begin
      check(!stk_valid && !nos_valid, $sformatf("unexpected match output at %0d", cyc));
    end
    if (counting_rate && dut.ch_valid) begin
      if (rate_first < 0) rate_first = cyc;
      rate_last = cyc;
      rate_chars++;
    end
    if (dut.ch_valid) begin
      int L, cs, cn, ls, ln;
      bit is_open, is_close;
      tag_t t;
      exp_t e;
      hist.push_back(dut.ch);
      if (hist.size() > 5) void'(hist.pop_front());
      L = hist.size();
      is_open  = L >= 4 && hist[L-1] == ">" && hist[L-4] == "<" && hist[L-3] != "/";
      is_close = L >= 5 && hist[L-1] == ">" && hist[L-5] == "<" && hist[L-4] == "/";
      t = {hist[L-3], hist[L-2]};
      if (is_open) begin
        tq_t p2;
        p2 = path;
        p2.push_back(t);
        cs = 0; cn = 0; ls = -1; ln = -1;
        for (int p = 0; p < N_STK_PROF; p++)
          if (prof_matches(stk_tab, STK_LEAF[p], p2)) begin cs++; if (ls < 0) ls = p; end
          else if (desc_reading(STK_LEAF[p], p2)) n_reject++;
        for (int p = 0; p < N_NOS_PROF; p++)
          if (prof_matches(nos_tab, NOS_LEAF[p], p2)) begin cn++; if (ln < 0) ln = p; end
        if (cs > 0 || cn > 0) begin
          e.at = cyc + 2;
          e.sv = cs > 0; e.si = ls; e.sm = cs > 1;
          e.nv = cn > 0; e.ni = ln; e.nm = cn > 1;
          expq.push_back(e);
        end
        n_stk += int'(cs > 0); n_nos += int'(cn > 0);
        n_multi += int'(cs > 1) + int'(cn > 1);
        n_push++;
        if (path.size() >= 64) n_overflow_push++;
        path.push_back(t);
      end
      if (is_close) begin
        n_pop++;
        if (path.size() > 0) void'(path.pop_back());
      end
    end
  end

  // ---------------- stimulus ----------------
  task automatic send(bq_t doc, bit gaps);
    while (doc.size() % 4 != 0) begin doc.push_back(8'h00); n_nul++; end
    for (int w = 0; w < doc.size() / 4; w++) begin
      @(negedge clk);
      while (gaps && $urandom_range(3, 0) == 0) begin
        in_valid = 0; n_stall++; @(negedge clk);
      end
      in_valid = 1;
      in_word = {doc[4*w+3], doc[4*w+2], doc[4*w+1], doc[4*w]};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    // let the last word drain through the pipeline
    repeat (8) @(negedge clk);
  endtask

  initial begin
    bq_t doc;
    stk_tab = new [N_STK_NODES];
    nos_tab = new [N_NOS_NODES];
    foreach (stk_tab[i]) stk_tab[i] = STK_NODES[i];
    foreach (nos_tab[i]) nos_tab[i] = NOS_NODES[i];
    in_valid = 0; in_word = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // Random documents, random gaps.
    for (int d = 0; d < 60; d++) begin
      doc.delete(); gen_doc(doc, 7, 3);
      send(doc, 1);
    end
    // Back to back, measuring the rate.
    doc.delete();
    for (int d = 0; d < 30; d++) gen_doc(doc, 7, 3);
    while (doc.size() % 4 != 0) doc.push_back(" ");
    @(negedge clk);
    counting_rate = 1;
    send(doc, 0);
    counting_rate = 0;
    check(rate_chars == doc.size(), $sformatf("back-to-back: %0d characters, expected %0d",
                                              rate_chars, doc.size()));
    check(rate_last - rate_first + 1 == doc.size(),
          $sformatf("back-to-back: %0d characters took %0d clocks", rate_chars, rate_last - rate_first + 1));
    check(!stack_overflow && !stack_underflow && stack_depth == 0, "stack state after clean documents");

    // A document nested deeper than the stack.
    doc.delete();
    for (int k = 0; k < 70; k++) put_tag(doc, "z9", 0);
    for (int k = 0; k < 70; k++) put_tag(doc, "z9", 1);
    send(doc, 1);
    check(stack_overflow && stack_depth == 0, "overflow flagged and stack back to empty");

    // The stack must be in step again.
    for (int d = 0; d < 30; d++) begin
      doc.delete(); gen_doc(doc, 7, 3);
      send(doc, 1);
    end

    // A stray close tag.
    doc.delete(); put_tag(doc, "z9", 1);
    send(doc, 0);
    repeat (6) @(posedge clk);
    check(stack_underflow, "underflow flagged");
    check(expq.size() == 0, "expected matches left over");

    check(n_stall > 0, "no stall happened");
    check(n_nul > 0, "no NUL padding happened");
    check(n_push > 0 && n_pop > 0, "no push or pop happened");
    check(n_stk > 0 && n_nos > 0, "a group never matched");
    check(n_multi > 0, "no simultaneous matches happened");
    check(n_reject > 0, "no parent-child rejection happened");
    check(n_overflow_push > 0, "no overflow happened");
    $display("stalls %0d, NUL bytes %0d, pushes %0d, pops %0d, stack-group matches %0d, free-group matches %0d",
             n_stall, n_nul, n_push, n_pop, n_stk, n_nos);
    $display("multi %0d, parent-child rejections %0d, overflowed pushes %0d, rate %0d chars / %0d clocks",
             n_multi, n_reject, n_overflow_push, rate_chars, rate_last - rate_first + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
