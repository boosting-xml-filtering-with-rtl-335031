// tb_workload: the filter at the largest profile count of the evaluation,
// 1024 path profiles of 6 tags each, split like the sixteen-profile example
// organisation (a quarter with parent-child steps: 256 with the stack, 768
// without).
//
// The profiles are computed at elaboration as common-prefix tries. Level k
// of a path uses tag letter 'a'+k and a digit that picks the branch, so
// profile p of a group is the path whose digits are the base-b digits of p.
//   stack group:      branching 1,4,4,4,4,1 -> 256 profiles, 597 steps,
//                     "/" on levels 1, 3 and 5, "//" elsewhere
//   stack-free group: branching 3,4,4,4,4,1 -> 768 profiles, 1791 steps
// Random documents follow the same letters level by level, with unrelated
// elements (tags z0..z9) mixed in so that "//" steps skip levels and "/"
// steps are rejected. Each clock, both encoders are compared with the plain
// XPath reading of all 1024 profiles over the path of open elements.
module tb_workload;
  import xf_pkg::*;
  import xf_tb_pkg::*;

  localparam int LEVELS = 6;
  typedef int br_t [LEVELS];
  localparam br_t BR_S = '{1, 4, 4, 4, 4, 1};
  localparam br_t BR_F = '{3, 4, 4, 4, 4, 1};

  function automatic int level_count(br_t br, int k);
    int c = 1;
    for (int i = 0; i <= k; i++) c *= br[i];
    return c;
  endfunction
  function automatic int total_nodes(br_t br);
    int t = 0;
    for (int k = 0; k < LEVELS; k++) t += level_count(br, k);
    return t;
  endfunction
  function automatic int level_offset(br_t br, int k);
    int o = 0;
    for (int i = 0; i < k; i++) o += level_count(br, i);
    return o;
  endfunction

  localparam int NS = total_nodes(BR_S);
  localparam int NF = total_nodes(BR_F);
  localparam int PS = level_count(BR_S, LEVELS-1);
  localparam int PF = level_count(BR_F, LEVELS-1);

  // Tables are built as arrays of plain vectors, which are assignment
  // compatible with arrays of the packed node_t.
  typedef logic [$bits(node_t)-1:0] raw_t;
  typedef raw_t      ns_t [NS];
  typedef raw_t      nf_t [NF];
  typedef node_idx_t ls_t [PS];
  typedef node_idx_t lf_t [PF];

  function automatic raw_t mk_node(br_t br, int k, int i, bit child_axis);
    tag_t      tag;
    node_idx_t parent;
    logic      axis;
    tag    = {8'(8'h61 + k), 8'(8'h30 + (i % br[k]))};
    parent = (k == 0) ? ROOT : node_idx_t'(level_offset(br, k-1) + i / br[k]);
    axis   = child_axis && (k % 2 == 1);
    return {tag, parent, axis};
  endfunction
  function automatic ns_t gen_s();
    ns_t t;
    for (int k = 0; k < LEVELS; k++)
      for (int i = 0; i < level_count(BR_S, k); i++)
        t[level_offset(BR_S, k) + i] = mk_node(BR_S, k, i, 1'b1);
    return t;
  endfunction
  function automatic nf_t gen_f();
    nf_t t;
    for (int k = 0; k < LEVELS; k++)
      for (int i = 0; i < level_count(BR_F, k); i++)
        t[level_offset(BR_F, k) + i] = mk_node(BR_F, k, i, 1'b0);
    return t;
  endfunction
  function automatic ls_t gen_ls();
    ls_t l;
    for (int p = 0; p < PS; p++) l[p] = node_idx_t'(level_offset(BR_S, LEVELS-1) + p);
    return l;
  endfunction
  function automatic lf_t gen_lf();
    lf_t l;
    for (int p = 0; p < PF; p++) l[p] = node_idx_t'(level_offset(BR_F, LEVELS-1) + p);
    return l;
  endfunction

  localparam ns_t S_NODES = gen_s();
  localparam nf_t F_NODES = gen_f();
  localparam ls_t S_LEAF  = gen_ls();
  localparam lf_t F_LEAF  = gen_lf();
  localparam int SW = $clog2(PS);
  localparam int FW = $clog2(PF);

  logic clk = 0, rst_n = 0;
  logic [31:0] in_word;
  logic in_valid, in_ready;
  logic [SW-1:0] stk_idx;
  logic [FW-1:0] nos_idx;
  logic stk_valid, stk_multi, nos_valid, nos_multi;
  logic stack_overflow, stack_underflow;
  logic [6:0] stack_depth;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xml_filter_top #(
    .N_STK_NODES(NS), .N_STK_PROF(PS), .STK_NODES(S_NODES), .STK_LEAF(S_LEAF),
    .N_NOS_NODES(NF), .N_NOS_PROF(PF), .NOS_NODES(F_NODES), .NOS_LEAF(F_LEAF)
  ) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Document: element at structural level k uses letter 'a'+k; z-tags are
  // unrelated elements that do not advance the level.
  function automatic void gen_wl(ref bq_t q, input tq_t path, input int level);
    int kids;
    if (path.size() >= 10) return;
    kids = $urandom_range(3, 1);
    for (int c = 0; c < kids; c++) begin
      tag_t t;
      tq_t p;
      int nl;
      if (level < LEVELS && $urandom_range(3, 0) != 0) begin
        t = {8'("a" + level), 8'("0" + $urandom_range(3, 0))};
        nl = level + 1;
      end else begin
        t = {8'("z"), 8'("0" + $urandom_range(9, 0))};
        nl = level;
        if (on_path(path, t)) continue;
      end
      p = path;
      p.push_back(t);
      put_tag(q, t, 0);
      put_text(q, 2);
      if (nl <= LEVELS) gen_wl(q, p, nl);
      put_tag(q, t, 1);
    end
  endfunction

  node_t s_tab [], f_tab [];
  tq_t path;
  byte unsigned hist [$];
  typedef struct { int at; bit sv; int si; bit sm; bit nv; int ni; bit nm; } exp_t;
  exp_t expq [$];
  int cyc = 0;
  int n_s = 0, n_f = 0, n_reject = 0;

  // The stack group's profiles with every "/" read as "//".
  node_t s_relaxed [];

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (expq.size() > 0 && expq[0].at == cyc) begin
      exp_t e;
      e = expq.pop_front();
      check(stk_valid == e.sv && nos_valid == e.nv, $sformatf("valid bits at %0d", cyc));
      if (e.sv) check(int'(stk_idx) == e.si && stk_multi == e.sm,
                      $sformatf("stack group %0d, expected %0d", stk_idx, e.si));
      if (e.nv) check(int'(nos_idx) == e.ni && nos_multi == e.nm,
                      $sformatf("free group %0d, expected %0d", nos_idx, e.ni));
    end else begin
      check(!stk_valid && !nos_valid, $sformatf("unexpected match output at %0d", cyc));
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
        // Only a tag of the last level can end a profile.
        if (t[15:8] == 8'("a" + LEVELS - 1)) begin
          for (int p = 0; p < PS; p++)
            if (prof_matches(s_tab, S_LEAF[p], p2)) begin cs++; if (ls < 0) ls = p; end
            else if (prof_matches(s_relaxed, S_LEAF[p], p2)) n_reject++;
          for (int p = 0; p < PF; p++)
            if (prof_matches(f_tab, F_LEAF[p], p2)) begin cn++; if (ln < 0) ln = p; end
        end
        if (cs > 0 || cn > 0) begin
          e.at = cyc + 2;
          e.sv = cs > 0; e.si = ls; e.sm = cs > 1;
          e.nv = cn > 0; e.ni = ln; e.nm = cn > 1;
          expq.push_back(e);
        end
        n_s += int'(cs > 0); n_f += int'(cn > 0);
        path.push_back(t);
      end
      if (is_close && path.size() > 0) void'(path.pop_back());
    end
  end

  initial begin
    bq_t doc;
    tq_t empty_path;
    s_tab = new [NS];
    f_tab = new [NF];
    s_relaxed = new [NS];
    foreach (s_tab[i]) begin
      s_tab[i] = S_NODES[i];
      s_relaxed[i] = S_NODES[i];
      s_relaxed[i].axis = AXIS_DESC;
    end
    foreach (f_tab[i]) f_tab[i] = F_NODES[i];
    in_valid = 0; in_word = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 25; d++) begin
      doc.delete();
      gen_wl(doc, empty_path, 0);
      while (doc.size() % 4 != 0) doc.push_back(8'h00);
      for (int w = 0; w < doc.size() / 4; w++) begin
        @(negedge clk);
        in_valid = 1;
        in_word = {doc[4*w+3], doc[4*w+2], doc[4*w+1], doc[4*w]};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (8) @(negedge clk);
    check(expq.size() == 0, "expected matches left over");
    check(n_s > 0 && n_f > 0, "a group never matched");
    check(n_reject > 0, "no parent-child rejection happened");
    check(!stack_overflow && !stack_underflow, "stack flags");
    $display("profiles %0d + %0d, steps %0d + %0d; stack-group matches %0d, free-group matches %0d, rejections %0d",
             PS, PF, NS, NF, n_s, n_f, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
