// tb_approx_dt -- checks the combinational approximate tree at its default
// (10-comparator) configuration.
//
// Random vectors, half of them with one feature placed next to a node's
// approximate threshold, are applied. Each comparator output, the hit leaf
// and the class (index and one-hot) are compared with the reference model,
// which walks the tree from the root. Every leaf must be reached at least
// once.
module tb_approx_dt;
  import dt_pkg::*;
  import tb_dt_ref_pkg::*;

  localparam int N_VEC = 20000;

  fvec_t                   features;
  logic [DEF_N_COMP-1:0]   cmp_gt;
  logic [DEF_N_COMP:0]     leaf_hit;
  logic [DEF_N_CLASS-1:0]  class_onehot;
  logic [1:0]              class_idx;
  int checks = 0, failures = 0;
  int leaf_seen [DEF_N_COMP+1];

  approx_dt dut (.features(features), .cmp_gt(cmp_gt), .leaf_hit(leaf_hit),
                 .class_onehot(class_onehot), .class_idx(class_idx));

  task automatic fail(input string what);
    failures++;
    if (failures <= 10) $display("FAIL %s features=%h", what, features);
  endtask

  initial begin
    int lf, cl;
    foreach (leaf_seen[i]) leaf_seen[i] = 0;
    for (int v = 0; v < N_VEC; v++) begin
      features = gen_vec();
      #1;
      for (int n = 0; n < int'(DEF_N_COMP); n++) begin
        checks++;
        if (cmp_gt[n] !== ref_node(features, n, 1'b0)) fail($sformatf("comparator %0d", n));
      end
      lf = ref_leaf(features, 1'b0);
      cl = ref_class(features, 1'b0);
      leaf_seen[lf]++;
      checks++;
      if (leaf_hit !== (11'(1) << lf)) fail($sformatf("leaf_hit %b, expected leaf %0d", leaf_hit, lf));
      checks++;
      if (int'(class_idx) != cl) fail($sformatf("class_idx %0d, expected %0d", class_idx, cl));
      checks++;
      if (class_onehot !== (3'(1) << cl)) fail($sformatf("class_onehot %b, expected class %0d", class_onehot, cl));
    end
    foreach (leaf_seen[i]) begin
      checks++;
      if (leaf_seen[i] == 0) fail($sformatf("leaf %0d never reached", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
