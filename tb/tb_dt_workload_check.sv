// tb_dt_workload_check -- builds a random tree of a given size, instantiates
// the approximate tree with it and checks it against a node-by-node walk.
//
// The paper's trained trees are not published, so a tree of the same number
// of comparators, features and classes is generated at elaboration from SEED
// with a linear congruential generator: a random binary shape in pre-order,
// random features, Q0.16 thresholds inside the range the ancestors leave
// open, precision genes 2..8, margin genes
// -5..+5 and leaf labels. N_VEC random vectors are then classified; every
// second one is steered down a random path that the approximate thresholds
// leave feasible. Reduced precision and margins can close a path of the exact
// tree, so not every leaf need be reachable; the count of leaves reached is
// printed for information. the comparator
// outputs, the hit leaf and the class are compared with a behavioural walk
// from the root using the real-arithmetic threshold reference.
// The parent reads checks and failures when done is set.
module tb_dt_workload_check
  import dt_pkg::*;
  import tb_dt_ref_pkg::ref_thr;
#(
  parameter string       NAME    = "tree",
  parameter int unsigned N_COMP  = 10,
  parameter int unsigned N_FEAT  = 7,
  parameter int unsigned N_CLASS = 3,
  parameter int unsigned SEED    = 1,
  parameter int          N_VEC   = 4000
) ();

  localparam int unsigned N_LEAF = N_COMP + 1;
  localparam int unsigned CLS_W  = (N_CLASS > 1) ? $clog2(N_CLASS) : 1;

  typedef node_t [0:N_COMP-1] nodes_t;
  typedef int unsigned labels_t [N_LEAF];

  // Next state of the generator; the random value drawn is state >> 8.
  function automatic int unsigned lcg(input int unsigned s);
    return s * 32'd1664525 + 32'd1013904223;
  endfunction

  // Random pre-order tree: node i with subtree size sz[i] (internal nodes)
  // splits sz[i]-1 nodes between its left child i+1 and right child i+1+l.
  // As in a trained tree, a node's threshold lies inside the interval its
  // ancestors leave open for its feature, so every exact path is feasible.
  function automatic nodes_t gen_nodes();
    nodes_t      t;
    int          sz [N_COMP];
    int          par [N_COMP];
    bit          rgt [N_COMP];
    int          cq  [N_COMP];
    int          fe  [N_COMP];
    int          leaf_no, l, r, lc, rc, lo, hi, a;
    int unsigned s, b;
    int          m;
    s       = SEED;
    leaf_no = 0;
    foreach (sz[i]) begin sz[i] = 0; par[i] = -1; rgt[i] = 1'b0; cq[i] = 0; fe[i] = 0; end
    sz[0] = N_COMP;
    for (int i = 0; i < int'(N_COMP); i++) begin
      s = lcg(s); l = int'((s >> 8) % unsigned'(sz[i]));
      r = sz[i] - 1 - l;
      s = lcg(s); fe[i] = int'((s >> 8) % N_FEAT);
      // interval left open by the ancestors for this feature
      lo = 0;
      hi = 65535;
      a  = i;
      while (par[a] >= 0) begin
        if (fe[par[a]] == fe[i]) begin
          if (rgt[a]) begin if (cq[par[a]] + 1 > lo) lo = cq[par[a]] + 1; end
          else        begin if (cq[par[a]]     < hi) hi = cq[par[a]];     end
        end
        a = par[a];
      end
      if (hi < lo) hi = lo;
      s = lcg(s); cq[i] = lo + int'((s >> 8) % unsigned'(hi - lo + 1));
      s = lcg(s); b = MIN_PREC + (s >> 8) % (MAX_PREC - MIN_PREC + 1);
      s = lcg(s); m = int'((s >> 8) % 11) - 5;
      if (l > 0) begin lc = i + 1;       sz[i+1]   = l; par[i+1]   = i; rgt[i+1]   = 1'b0; end
      else       begin lc = -1 - leaf_no; leaf_no++;    end
      if (r > 0) begin rc = i + 1 + l;  sz[i+1+l] = r; par[i+1+l] = i; rgt[i+1+l] = 1'b1; end
      else       begin rc = -1 - leaf_no; leaf_no++;   end
      t[i] = '{feat: fe[i], c_q16: cq[i], prec: b, margin: m, left: lc, right: rc};
    end
    return t;
  endfunction

  function automatic labels_t gen_labels();
    labels_t     c;
    int unsigned s;
    s = SEED ^ 32'h5a5a_1234;
    for (int i = 0; i < int'(N_LEAF); i++) begin
      s = lcg(s);
      c[i] = (i < int'(N_CLASS)) ? i : (s >> 8) % N_CLASS;  // every class used
    end
    return c;
  endfunction

  localparam nodes_t  NODES  = gen_nodes();
  localparam labels_t LABELS = gen_labels();

  logic [N_FEAT-1:0][FEAT_W-1:0] features;
  logic [N_COMP-1:0]             cmp_gt;
  logic [N_LEAF-1:0]             leaf_hit;
  logic [N_CLASS-1:0]            class_onehot;
  logic [CLS_W-1:0]              class_idx;

  int checks = 0, failures = 0;
  bit done = 1'b0;

  approx_dt #(
    .N_COMP     (N_COMP),
    .N_FEAT     (N_FEAT),
    .N_CLASS    (N_CLASS),
    .NODES      (NODES),
    .LEAF_CLASS (LABELS)
  ) dut (
    .features     (features),
    .cmp_gt       (cmp_gt),
    .leaf_hit     (leaf_hit),
    .class_onehot (class_onehot),
    .class_idx    (class_idx)
  );

  function automatic bit walk_node(input int n);
    int b, x;
    b = int'(NODES[n].prec);
    x = int'(features[NODES[n].feat]) / (2 ** (8 - b));
    return x > ref_thr(NODES[n].c_q16, b, NODES[n].margin);
  endfunction

  function automatic int walk_leaf();
    int code;
    code = 0;
    while (code >= 0) code = walk_node(code) ? NODES[code].right : NODES[code].left;
    return -1 - code;
  endfunction

  task automatic fail(input string what);
    failures++;
    if (failures <= 5) $display("FAIL %s: %s", NAME, what);
  endtask

  initial begin
    int lf, n, f, b, t, lo, bad, leaves_seen;
    bit go_r;
    bit seen [N_LEAF];
    int flo [N_FEAT];
    int fhi [N_FEAT];
    foreach (seen[i]) seen[i] = 1'b0;
    for (int v = 0; v < N_VEC; v++) begin
      for (int i = 0; i < int'(N_FEAT); i++) features[i] = 8'($urandom_range(0, 255));
      // steer down a random feasible path: keep for every feature the range
      // of values still consistent with the branches taken so far, pick a
      // branch the range allows at each node, then draw the features from
      // their final ranges
      if (v % 2 == 1) begin
        foreach (flo[i]) begin flo[i] = 0; fhi[i] = 255; end
        n = 0;
        while (n >= 0) begin
          f  = int'(NODES[n].feat);
          b  = int'(NODES[n].prec);
          t  = ref_thr(NODES[n].c_q16, b, NODES[n].margin);
          lo = (t + 1) * (2 ** (8 - b));            // smallest value that is "greater"
          go_r = (fhi[f] >= lo) && (flo[f] > lo - 1 || $urandom_range(0, 1) == 1);
          if (go_r) begin if (lo > flo[f]) flo[f] = lo;       n = NODES[n].right; end
          else      begin if (lo - 1 < fhi[f]) fhi[f] = lo - 1; n = NODES[n].left;  end
        end
        for (int i = 0; i < int'(N_FEAT); i++) features[i] = 8'($urandom_range(flo[i], fhi[i]));
      end
      #1;
      bad = 0;
      for (int k = 0; k < int'(N_COMP); k++) if (cmp_gt[k] !== walk_node(k)) bad++;
      checks++;
      if (bad != 0) fail($sformatf("%0d comparator outputs differ", bad));
      lf = walk_leaf();
      seen[lf] = 1'b1;
      checks++;
      if (leaf_hit !== (N_LEAF'(1) << lf)) fail($sformatf("leaf_hit wrong, expected leaf %0d", lf));
      checks++;
      if (int'(class_idx) != int'(LABELS[lf]) || class_onehot !== (N_CLASS'(1) << LABELS[lf]))
        fail($sformatf("class %0d, expected %0d", class_idx, LABELS[lf]));
    end
    leaves_seen = 0;
    foreach (seen[i]) if (seen[i]) leaves_seen++;
    $display("  %-13s %4d comparators %4d features %3d classes: %0d vectors, %0d of %0d leaves reached",
             NAME, N_COMP, N_FEAT, N_CLASS, N_VEC, leaves_seen, N_LEAF);
    done = 1'b1;
  end

endmodule
