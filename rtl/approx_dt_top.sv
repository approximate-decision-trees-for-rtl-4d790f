// approx_dt_top -- clocked approximate bespoke decision-tree classifier.
//
// What it does: one classification per clock. A feature vector presented with
// in_valid is classified by the fully parallel tree (approx_dt) in the same
// cycle, and the predicted class is registered at the next rising edge.
//
// How it works: the tree is combinational, so the only state is the output
// register (class index, one-hot class, valid flag). The tree is checked on
// every clock with in_valid high: exactly one leaf must be hit.
//
// Follows the paper: the classifier is a bespoke, fully parallel tree, and
// the circuits were synthesized against a relaxed clock of 50 ms, which makes
// it a clocked circuit. This design's choices: where the register sits (at the
// output only), the valid flag, and the active-low synchronous reset that
// clears the outputs.
//
// Interface and timing: features[i] is feature i, an unsigned FEAT_W-bit
// fraction of its normalized range [0,1). Latency is one clock from in_valid
// to out_valid; throughput one vector per clock. The tree parameters pass
// straight to approx_dt.
module approx_dt_top
  import dt_pkg::*;
#(
  parameter int unsigned N_COMP                 = DEF_N_COMP,
  parameter int unsigned N_FEAT                 = DEF_N_FEAT,
  parameter int unsigned N_CLASS                = DEF_N_CLASS,
  parameter node_t [0:N_COMP-1] NODES          = DEF_NODES,
  parameter int unsigned LEAF_CLASS [N_COMP+1]  = DEF_LEAF_CLASS,
  localparam int unsigned CLS_W                 = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N_FEAT-1:0][FEAT_W-1:0] features,
  output logic                          out_valid,
  output logic [CLS_W-1:0]              class_idx,
  output logic [N_CLASS-1:0]            class_onehot
);

  logic [N_COMP-1:0]  cmp_gt;
  logic [N_COMP:0]    leaf_hit;
  logic [N_CLASS-1:0] onehot_d;
  logic [CLS_W-1:0]   idx_d;

  approx_dt #(
    .N_COMP     (N_COMP),
    .N_FEAT     (N_FEAT),
    .N_CLASS    (N_CLASS),
    .NODES      (NODES),
    .LEAF_CLASS (LEAF_CLASS)
  ) u_tree (
    .features     (features),
    .cmp_gt       (cmp_gt),
    .leaf_hit     (leaf_hit),
    .class_onehot (onehot_d),
    .class_idx    (idx_d)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      class_idx    <= '0;
      class_onehot <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        class_idx    <= idx_d;
        class_onehot <= onehot_d;
      end
    end
  end

  // The leaves of a decision tree partition the input space.
  a_one_leaf : assert property (@(posedge clk) disable iff (!rst_n)
                                in_valid |-> $onehot(leaf_hit))
    else $error("approx_dt_top: %0d leaves hit at once", $countones(leaf_hit));

endmodule
