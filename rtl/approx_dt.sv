// approx_dt -- fully parallel approximate bespoke decision tree.
//
// What it does: classifies one feature vector with a trained decision tree
// whose thresholds are wired in as constants. All N_COMP comparators work at
// the same time; there is no traversal from node to node. A leaf is reached
// when every comparator on its path from the root gave the outcome that leads
// to it, so each leaf is one AND of comparator outputs (some inverted). The
// leaves are mutually exclusive, exactly one is hit, and the class is the OR of
// the labels of the hit leaf.
//
// How it is built: per node one threshold_conv, fed only by the node's
// constants (original threshold, precision gene, margin gene), produces the
// approximate integer threshold, and one dt_comparator of the node's own
// precision compares the selected feature with it. Constant propagation in
// synthesis turns the pair into a bespoke comparator. Each node carries a
// "reach" term: its parent's reach ANDed with the parent's comparator outcome
// (inverted for a left child). A leaf's hit is the reach of its parent ANDed
// the same way, so it is the AND of all comparator outcomes on its root path;
// synthesis flattens the chain. The parent of every node and leaf is found
// from the node table at elaboration, which also checks the table (pre-order,
// each node and leaf referenced once, legal genes and labels).
//
// Follows the paper: fully parallel bespoke tree, comparators of the form
// "feature > threshold", per-comparator precision 2..8 bits and threshold
// substitution within +/-5 LSBs, 8-bit normalized inputs, one tree per
// dataset. This design's choices: the "greater" outcome takes the right child
// (the usual convention of trained trees, where the left child holds
// feature <= threshold); the class comes out both as a binary index and one-hot;
// the default tree is an illustrative tree the size of the paper's Seeds tree
// (10 comparators), since the paper publishes no trained tree.
//
// Interface and timing: purely combinational. features[i] is feature i as an
// unsigned FEAT_W-bit fraction. NODES is indexed 0..N_COMP-1 from the left,
// so a '{...} list starts with the root. cmp_gt, leaf_hit, class_onehot and class_idx
// follow the inputs after the comparator and AND-OR delay.
module approx_dt
  import dt_pkg::*;
#(
  parameter int unsigned N_COMP                 = DEF_N_COMP,
  parameter int unsigned N_FEAT                 = DEF_N_FEAT,
  parameter int unsigned N_CLASS                = DEF_N_CLASS,
  parameter node_t [0:N_COMP-1] NODES          = DEF_NODES,
  parameter int unsigned LEAF_CLASS [N_COMP+1]  = DEF_LEAF_CLASS,
  localparam int unsigned N_LEAF                = N_COMP + 1,
  localparam int unsigned CLS_W                 = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic [N_FEAT-1:0][FEAT_W-1:0] features,
  output logic [N_COMP-1:0]             cmp_gt,
  output logic [N_LEAF-1:0]             leaf_hit,
  output logic [N_CLASS-1:0]            class_onehot,
  output logic [CLS_W-1:0]              class_idx
);

  // ---------------------------------------------------------------------
  // Elaboration-time analysis of the node table
  // ---------------------------------------------------------------------

  // Nodes and leaves share one index space: node n is n, leaf k is N_COMP+k.
  localparam int unsigned N_SLOT = 2 * N_COMP + 1;
  typedef int slot_tab_t [N_SLOT];

  function automatic int slot(input int code);
    return (code >= 0) ? code : int'(N_COMP) - 1 - code;
  endfunction

  // Parent node of every node and leaf (-1 for the root and for anything no
  // node names); one pass over the table.
  function automatic slot_tab_t parents();
    slot_tab_t p;
    foreach (p[i]) p[i] = -1;
    for (int n = 0; n < int'(N_COMP); n++) begin
      if (slot(NODES[n].left)  >= 0 && slot(NODES[n].left)  < int'(N_SLOT)) p[slot(NODES[n].left)]  = n;
      if (slot(NODES[n].right) >= 0 && slot(NODES[n].right) < int'(N_SLOT)) p[slot(NODES[n].right)] = n;
    end
    return p;
  endfunction

  // How many times each node and leaf is named as a child; each node but
  // the root and each leaf must be named exactly once.
  function automatic slot_tab_t refcounts();
    slot_tab_t r;
    foreach (r[i]) r[i] = 0;
    for (int n = 0; n < int'(N_COMP); n++) begin
      if (slot(NODES[n].left)  >= 0 && slot(NODES[n].left)  < int'(N_SLOT)) r[slot(NODES[n].left)]++;
      if (slot(NODES[n].right) >= 0 && slot(NODES[n].right) < int'(N_SLOT)) r[slot(NODES[n].right)]++;
    end
    return r;
  endfunction

  localparam slot_tab_t PARENT = parents();
  localparam slot_tab_t REFS   = refcounts();

  // ---------------------------------------------------------------------
  // Comparators with their approximate, hardwired thresholds
  // ---------------------------------------------------------------------
  for (genvar n = 0; n < N_COMP; n++) begin : g_node
    localparam int unsigned PREC = NODES[n].prec;

    if (NODES[n].feat >= N_FEAT) begin : g_chk_feat
      $error("approx_dt: node %0d uses a feature index out of range", n);
    end
    if (PREC < MIN_PREC || PREC > MAX_PREC) begin : g_chk_prec
      $error("approx_dt: node %0d has a precision outside 2..8", n);
    end
    if (NODES[n].margin < -MARGIN_MAX || NODES[n].margin > MARGIN_MAX) begin : g_chk_margin
      $error("approx_dt: node %0d has a margin outside +/-5", n);
    end
    if (NODES[n].left  >= 0 && NODES[n].left  <= n ||
        NODES[n].right >= 0 && NODES[n].right <= n) begin : g_chk_order
      $error("approx_dt: node %0d has a child that does not follow it (pre-order needed)", n);
    end
    if (n > 0 && REFS[n] != 1) begin : g_chk_node_ref
      $error("approx_dt: node %0d is not referenced exactly once", n);
    end

    // reach: every comparator from the root down to this node chose the
    // branch that leads here
    logic reach;
    if (n == 0) begin : g_root
      assign reach = 1'b1;
    end else begin : g_inner
      localparam int  P    = PARENT[n];
      localparam bit  SIDE = (NODES[P].right == n);
      assign reach = g_node[P].reach & (SIDE ? cmp_gt[P] : ~cmp_gt[P]);
    end

    logic [C_FRAC-1:0] thr_fixed;
    logic [FEAT_W-1:0] thr_int;

    threshold_conv u_conv (
      .c_q       (C_FRAC'(NODES[n].c_q16)),
      .prec      (PREC_W'(PREC)),
      .margin    (MARGIN_W'(NODES[n].margin)),
      .thr_fixed (thr_fixed),
      .thr_int   (thr_int)
    );

    dt_comparator #(
      .FEAT_W (FEAT_W),
      .PREC   (PREC)
    ) u_cmp (
      .feature   (features[NODES[n].feat]),
      .threshold (thr_int[PREC-1:0]),
      .gt        (cmp_gt[n])
    );
  end : g_node

  // ---------------------------------------------------------------------
  // Leaves: reach of the parent and the parent's outcome
  // ---------------------------------------------------------------------
  for (genvar l = 0; l < N_LEAF; l++) begin : g_leaf
    localparam int P    = PARENT[N_COMP + l];
    localparam bit SIDE = (NODES[P].right == -1 - l);

    if (REFS[N_COMP + l] != 1) begin : g_chk_leaf_ref
      $error("approx_dt: leaf %0d is not referenced exactly once", l);
    end
    if (LEAF_CLASS[l] >= N_CLASS) begin : g_chk_label
      $error("approx_dt: leaf %0d has a class label out of range", l);
    end

    assign leaf_hit[l] = g_node[P].reach & (SIDE ? cmp_gt[P] : ~cmp_gt[P]);
  end : g_leaf

  // ---------------------------------------------------------------------
  // Class: OR of the labels of the hit leaf
  // ---------------------------------------------------------------------
  always_comb begin
    class_onehot = '0;
    class_idx    = '0;
    for (int l = 0; l < N_LEAF; l++) begin
      class_onehot[LEAF_CLASS[l]] = class_onehot[LEAF_CLASS[l]] | leaf_hit[l];
      class_idx                   = class_idx | ({CLS_W{leaf_hit[l]}} & CLS_W'(LEAF_CLASS[l]));
    end
  end

endmodule
