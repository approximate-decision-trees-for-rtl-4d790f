// tb_dt_ref_pkg -- reference model of the approximate decision tree for the
// testbenches.
//
// Written independently of the RTL: thresholds are worked out in real
// arithmetic (C + m/2^B, rounded to nearest with halves up, clamped to
// 0..2^B-1), features are scaled by integer division, and the tree is walked
// node by node from the root, the way software evaluates a trained tree,
// instead of the RTL's parallel AND-OR form.
package tb_dt_ref_pkg;
  import dt_pkg::*;

  typedef logic [DEF_N_FEAT-1:0][FEAT_W-1:0] fvec_t;

  // Approximate integer threshold at precision b for original threshold c_q
  // (Q0.16) and margin m.
  function automatic int ref_thr(input int unsigned c_q, input int b, input int m);
    real v;
    int  r;
    int  bb;
    bb = (b < int'(MIN_PREC)) ? int'(MIN_PREC) : (b > int'(MAX_PREC)) ? int'(MAX_PREC) : b;
    v  = real'(c_q) / 65536.0 + real'(m) / real'(2 ** bb);
    r  = int'($floor(v * real'(2 ** bb) + 0.5));
    if (r < 0) r = 0;
    if (r > 2 ** bb - 1) r = 2 ** bb - 1;
    return r;
  endfunction

  // Outcome of node n on vector f; exact = 1 evaluates the unapproximated
  // 8-bit comparator instead (threshold round(C * 256), no margin).
  function automatic bit ref_node(input fvec_t f, input int n, input bit exact);
    int b, m, x;
    b = exact ? 8 : int'(DEF_NODES[n].prec);
    m = exact ? 0 : DEF_NODES[n].margin;
    x = int'(f[DEF_NODES[n].feat]) / (2 ** (8 - b));
    return x > ref_thr(DEF_NODES[n].c_q16, b, m);
  endfunction

  // Leaf reached by walking the tree from the root.
  function automatic int ref_leaf(input fvec_t f, input bit exact);
    int code;
    code = 0;
    while (code >= 0) begin
      if (ref_node(f, code, exact)) code = DEF_NODES[code].right;
      else                          code = DEF_NODES[code].left;
    end
    return -1 - code;
  endfunction

  function automatic int ref_class(input fvec_t f, input bit exact);
    return int'(DEF_LEAF_CLASS[ref_leaf(f, exact)]);
  endfunction

  // A random vector, with a chance of pushing one feature next to the
  // approximate threshold of a random node so that boundaries get exercised.
  function automatic fvec_t gen_vec();
    fvec_t f;
    int n, b, t, x;
    for (int i = 0; i < int'(DEF_N_FEAT); i++) f[i] = 8'($urandom_range(0, 255));
    if ($urandom_range(0, 1) == 1) begin
      n = $urandom_range(0, int'(DEF_N_COMP) - 1);
      b = int'(DEF_NODES[n].prec);
      t = ref_thr(DEF_NODES[n].c_q16, b, DEF_NODES[n].margin);
      x = (t + $urandom_range(0, 2) - 1) * (2 ** (8 - b)) + $urandom_range(0, 2 ** (8 - b) - 1);
      if (x < 0) x = 0;
      if (x > 255) x = 255;
      f[DEF_NODES[n].feat] = 8'(x);
    end
    return f;
  endfunction

endpackage
