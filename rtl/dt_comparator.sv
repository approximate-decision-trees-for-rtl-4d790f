// dt_comparator -- one bespoke comparator node of the decision tree.
//
// Computes gt = (feature at precision PREC) > threshold. The input feature is
// an FEAT_W-bit unsigned fraction; precision scaling keeps its PREC most
// significant bits, so the comparison runs on PREC bits on both sides. The
// threshold is an input port so that one module serves every node; in the
// tree it is driven by constants, and synthesis then reduces the comparator
// to the handful of gates its particular threshold needs (the "bespoke"
// comparator, whose area depends strongly on the threshold value).
//
// Follows the paper: a node tests "feature > threshold", per-comparator
// precision of 2 to 8 bits applied to both the feature and the threshold,
// 8-bit inputs. This design's choice: the feature is reduced by dropping its
// low bits (truncation), which costs no logic.
//
// Interface and timing: purely combinational, no clock.
module dt_comparator #(
  parameter int unsigned FEAT_W = dt_pkg::FEAT_W,
  parameter int unsigned PREC   = dt_pkg::FEAT_W
) (
  input  logic [FEAT_W-1:0] feature,
  input  logic [PREC-1:0]   threshold,
  output logic              gt
);

  if (PREC < 1 || PREC > FEAT_W) begin : g_bad_prec
    $error("dt_comparator: PREC must lie in 1..FEAT_W");
  end

  assign gt = feature[FEAT_W-1 -: PREC] > threshold;

endmodule
