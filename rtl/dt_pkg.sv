// dt_pkg -- types and constants shared by the approximate bespoke decision tree.
//
// A bespoke decision tree is a classifier whose trained parameters are wired
// into the circuit as constants. Every internal node is one comparator
// "feature > threshold"; every leaf carries a class label. The approximate
// tree gives each comparator two extra knobs ("genes"):
//   * prec   -- the precision B (2..8 bits) at which both the input feature and
//               the threshold are compared;
//   * margin -- a signed offset m (|m| <= 5) in units of one LSB at precision B
//               that moves the threshold towards a cheaper constant.
// Inputs are normalized features in [0,1) as 8-bit unsigned fractions, as in
// the 8-bit baseline tree. Original (trained) thresholds are carried as Q0.16
// unsigned fractions; a trained model gives them in floating point, and 16
// fractional bits stand in for that here (this design's choice).
//
// A tree is described by an array of node_t in pre-order (every child has a
// larger index than its parent, node 0 is the root) and by an array of leaf
// class labels. A child reference is a node index when >= 0, and leaf number
// (-1 - code) when negative. The default tree below has the size of the
// paper's smallest workload (Seeds: 10 comparators, 7 features, 3 classes);
// its thresholds and genes are illustrative, not trained values.
package dt_pkg;

  localparam int unsigned FEAT_W     = 8;   // baseline input and threshold width
  localparam int unsigned MIN_PREC   = 2;   // smallest per-comparator precision
  localparam int unsigned MAX_PREC   = 8;   // largest per-comparator precision
  localparam int          MARGIN_MAX = 5;   // threshold substitution range +/-m
  localparam int unsigned C_FRAC     = 16;  // fractional bits of an original threshold
  localparam int unsigned PREC_W     = 4;   // width of a precision gene
  localparam int unsigned MARGIN_W   = 4;   // width of a signed margin gene

  // One internal node (comparator) of the tree.
  typedef struct packed {
    int unsigned feat;      // index of the feature it compares
    int unsigned c_q16;     // original threshold, Q0.16
    int unsigned prec;      // precision gene B
    int          margin;    // margin gene m, LSBs at precision B
    int          left;      // child taken when feature <= threshold
    int          right;     // child taken when feature >  threshold
  } node_t;

  // Builds one node_t; keeps the node table below readable.
  function automatic node_t node(input int unsigned feat, input int unsigned c_q16,
                                 input int unsigned prec, input int margin,
                                 input int left, input int right);
    node_t nd;
    nd.feat   = feat;
    nd.c_q16  = c_q16;
    nd.prec   = prec;
    nd.margin = margin;
    nd.left   = left;
    nd.right  = right;
    return nd;
  endfunction

  // Default tree: 10 comparators, 11 leaves, 7 features, 3 classes.
  localparam int unsigned DEF_N_COMP  = 10;
  localparam int unsigned DEF_N_FEAT  = 7;
  localparam int unsigned DEF_N_CLASS = 3;

  localparam node_t [0:DEF_N_COMP-1] DEF_NODES = '{
    //    feat  c_q16   prec margin left      right
    node(   0,    27525,  6,    1,    1,        5),  // n0: f0 > 0.42
    node(   2,    19661,  4,    0,    2,        3),  // n1: f2 > 0.30
    node(   4,    36045,  3,   -1,   -1,       -2),  // n2: f4 > 0.55 -> L0 / L1
    node(   1,    39977,  5,    2,    4,       -3),  // n3: f1 > 0.61 -> n4 / L2
    node(   6,    11796,  2,    0,   -4,       -5),  // n4: f6 > 0.18 -> L3 / L4
    node(   3,    47841,  8,   -3,    6,        8),  // n5: f3 > 0.73
    node(   5,    16384,  5,    5,   -6,        7),  // n6: f5 > 0.25 -> L5 / n7
    node(   0,    43254,  7,   -2,   -7,       -8),  // n7: f0 > 0.66 -> L6 / L7
    node(   2,    55050,  3,   -1,   -9,        9),  // n8: f2 > 0.84 -> L8 / n9
    node(   6,    30802,  6,   -5,  -10,      -11)   // n9: f6 > 0.47 -> L9 / L10
  };

  localparam int unsigned DEF_LEAF_CLASS [DEF_N_COMP+1] =
    '{0, 2, 1, 0, 1, 1, 1, 2, 2, 0, 2};

endpackage
