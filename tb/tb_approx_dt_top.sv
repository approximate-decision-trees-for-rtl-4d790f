// tb_approx_dt_top -- end-to-end test of the clocked classifier at its
// default parameters.
//
// A stream of feature vectors is offered with in_valid high on about three
// clocks in four. Each result must appear exactly one clock later with
// out_valid, and match the reference model's class; on clocks without
// in_valid the outputs must hold. A reset in the middle of the stream must
// clear the outputs. The test also counts how often each mechanism of the
// design took effect and fails if one never did:
//   * every leaf reached;
//   * every class predicted;
//   * a comparator whose approximate threshold (reduced precision plus margin)
//     decided differently from the exact 8-bit comparator;
//   * a vector whose predicted class differs from the exact tree's class;
//   * idle clocks (outputs held) and a reset during operation.
module tb_approx_dt_top;
  import dt_pkg::*;
  import tb_dt_ref_pkg::*;

  localparam int N_CYC = 30000;

  logic                   clk = 1'b0;
  logic                   rst_n;
  logic                   in_valid;
  fvec_t                  features;
  logic                   out_valid;
  logic [1:0]             class_idx;
  logic [DEF_N_CLASS-1:0] class_onehot;

  int checks = 0, failures = 0;
  int leaf_seen  [DEF_N_COMP+1];
  int class_seen [DEF_N_CLASS];
  int node_flips = 0, class_flips = 0, idle_cycles = 0, resets = 0, results = 0;

  approx_dt_top dut (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (in_valid),
    .features     (features),
    .out_valid    (out_valid),
    .class_idx    (class_idx),
    .class_onehot (class_onehot)
  );

  always #5 clk = ~clk;

  task automatic fail(input string what);
    failures++;
    if (failures <= 10) $display("FAIL @%0t %s", $time, what);
  endtask

  task automatic need(input string what, input int count);
    checks++;
    if (count == 0) fail($sformatf("mechanism never exercised: %s", what));
    else $display("  %-40s %0d", what, count);
  endtask

  initial begin
    int  exp_cls, held_cls, lf, cl_exact;
    bit  prev_valid;
    foreach (leaf_seen[i])  leaf_seen[i]  = 0;
    foreach (class_seen[i]) class_seen[i] = 0;

    rst_n    = 1'b0;
    in_valid = 1'b1;
    features = gen_vec();
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0 || class_idx !== '0 || class_onehot !== '0) fail("outputs not cleared by reset");
    @(negedge clk);
    rst_n      = 1'b1;
    prev_valid = 1'b0;
    held_cls   = 0;
    exp_cls    = 0;

    for (int c = 0; c < N_CYC; c++) begin
      // drive a new vector between clock edges
      in_valid = ($urandom_range(0, 3) != 0);
      features = gen_vec();
      if (in_valid) begin
        exp_cls  = ref_class(features, 1'b0);
        lf       = ref_leaf(features, 1'b0);
        cl_exact = ref_class(features, 1'b1);
        for (int n = 0; n < int'(DEF_N_COMP); n++)
          if (ref_node(features, n, 1'b0) != ref_node(features, n, 1'b1)) node_flips++;
        if (cl_exact != exp_cls) class_flips++;
      end
      @(posedge clk);
      #1;
      // one clock after the edge that sampled the vector
      checks++;
      if (out_valid !== in_valid) fail($sformatf("out_valid %0b one clock after in_valid %0b", out_valid, in_valid));
      if (in_valid) begin
        checks++;
        if (int'(class_idx) != exp_cls || class_onehot !== (3'(1) << exp_cls))
          fail($sformatf("class %0d/%b, expected %0d", class_idx, class_onehot, exp_cls));
        else begin
          leaf_seen[lf]++;
          class_seen[exp_cls]++;
          results++;
        end
        held_cls = exp_cls;
      end else begin
        idle_cycles++;
        checks++;
        if (int'(class_idx) != held_cls) fail($sformatf("class %0d not held at %0d while idle", class_idx, held_cls));
      end
      prev_valid = in_valid;

      // a reset in the middle of the stream
      if (c == N_CYC / 2) begin
        @(negedge clk);
        rst_n = 1'b0;
        @(posedge clk);
        #1;
        checks++;
        if (out_valid !== 1'b0 || class_idx !== '0 || class_onehot !== '0) fail("outputs not cleared by reset");
        else resets++;
        held_cls = 0;
        @(negedge clk);
        rst_n = 1'b1;
      end else begin
        @(negedge clk);
      end
    end

    $display("mechanism counts:");
    foreach (leaf_seen[i])  need($sformatf("leaf %0d reached", i), leaf_seen[i]);
    foreach (class_seen[i]) need($sformatf("class %0d predicted", i), class_seen[i]);
    need("comparisons changed by approximation", node_flips);
    need("classes changed by approximation", class_flips);
    need("idle clocks with outputs held", idle_cycles);
    need("resets during operation", resets);
    $display("classified %0d vectors", results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (N_CYC * 2 + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
