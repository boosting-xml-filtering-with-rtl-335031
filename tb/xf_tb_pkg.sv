// xf_tb_pkg: document generator and reference model shared by the
// testbenches of the XPath group and of the whole filter.
//
// gen_doc builds a random, well-formed document of two-symbol tags with text
// between them. No tag repeats along any root-to-leaf path, so the plain
// XPath meaning of a profile (an embedding of its steps into the path of open
// elements, "/" on consecutive levels, "//" on any later level) is exactly
// what the hardware computes. To reach the long profiles, children are often
// drawn from the tags that follow the current tag in the profile tables.
//
// prof_matches(table, leaf, path) is that XPath meaning, computed by dynamic
// programming over the path, independently of the hardware's step states.
package xf_tb_pkg;
  import xf_pkg::*;

  typedef byte unsigned bq_t [$];
  typedef tag_t tq_t [$];

  localparam int N_ALPHA = 18;
  function automatic tag_t alpha(int i);
    tag_t a [N_ALPHA] = '{"a0","b0","c0","d0","e0","b1","c1","a1","d1","e1",
                         "c2","d2","e2","f0","f1","f2","f3","x0"};
    return a[i];
  endfunction

  function automatic bit on_path(tq_t path, tag_t t);
    foreach (path[i]) if (path[i] == t) return 1;
    return 0;
  endfunction

  // Tags that follow tag t somewhere in the two profile tables.
  function automatic tq_t successors(tag_t t);
    tq_t s;
    for (int n = 0; n < N_STK_NODES; n++)
      if (STK_NODES[n].parent != ROOT && STK_NODES[STK_NODES[n].parent].tag == t)
        s.push_back(STK_NODES[n].tag);
    for (int n = 0; n < N_NOS_NODES; n++)
      if (NOS_NODES[n].parent != ROOT && NOS_NODES[NOS_NODES[n].parent].tag == t)
        s.push_back(NOS_NODES[n].tag);
    return s;
  endfunction

  function automatic void put_text(ref bq_t q, input int maxlen);
    string chars = "abcdefgh0123456789 _XYZ";
    int n = $urandom_range(maxlen, 0);
    for (int i = 0; i < n; i++) q.push_back(chars[$urandom_range(chars.len()-1, 0)]);
  endfunction

  function automatic void put_tag(ref bq_t q, input tag_t t, input bit close);
    q.push_back("<");
    if (close) q.push_back("/");
    q.push_back(t[15:8]);
    q.push_back(t[7:0]);
    q.push_back(">");
  endfunction

  function automatic tag_t pick_child(tq_t path);
    tq_t s;
    tag_t t;
    if (path.size() > 0) s = successors(path[path.size()-1]);
    for (int tries = 0; tries < 20; tries++) begin
      if (s.size() > 0 && $urandom_range(2, 0) != 0) t = s[$urandom_range(s.size()-1, 0)];
      else t = alpha($urandom_range(N_ALPHA-1, 0));
      if (!on_path(path, t)) return t;
    end
    return "x0";
  endfunction

  // One element with tag t and a random subtree under it.
  function automatic void gen_elem(ref bq_t q, input tq_t path, input tag_t t,
                                   input int max_depth, input int max_kids);
    tq_t p = path;
    int kids;
    p.push_back(t);
    put_tag(q, t, 0);
    put_text(q, 3);
    kids = (p.size() >= max_depth) ? 0 : $urandom_range(max_kids, 0);
    for (int k = 0; k < kids; k++) begin
      gen_elem(q, p, pick_child(p), max_depth, max_kids);
      put_text(q, 2);
    end
    put_tag(q, t, 1);
  endfunction

  function automatic void gen_doc(ref bq_t q, input int max_depth, input int max_kids);
    tq_t empty_path;
    gen_elem(q, empty_path, pick_child(empty_path), max_depth, max_kids);
  endfunction

  // Steps of the profile ending at node 'leaf', first step first.
  function automatic bit prof_matches(node_t nodes [], node_idx_t leaf, tq_t path);
    node_t steps [$];
    int n = int'(leaf);
    int k, m;
    bit can [$][$];
    while (1) begin
      steps.push_front(nodes[n]);
      if (nodes[n].parent == ROOT) break;
      n = int'(nodes[n].parent);
    end
    k = steps.size();
    m = path.size();
    if (m == 0) return 0;
    for (int i = 0; i < k; i++) begin
      bit row [$];
      for (int j = 0; j < m; j++) begin
        bit ok = (path[j] == steps[i].tag);
        if (ok) begin
          if (i == 0) begin
            if (steps[i].axis == AXIS_CHILD) ok = (j == 0);
          end else if (steps[i].axis == AXIS_CHILD) begin
            ok = (j > 0) && can[i-1][j-1];
          end else begin
            bit any = 0;
            for (int jj = 0; jj < j; jj++) any |= can[i-1][jj];
            ok = any;
          end
        end
        row.push_back(ok);
      end
      can.push_back(row);
    end
    return can[k-1][m-1];
  endfunction

endpackage
