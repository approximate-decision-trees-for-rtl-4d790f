// tb_dt_comparator -- exhaustive check of the bespoke comparator.
//
// Three instances, at precisions 2, 5 and 8 bits, see every 8-bit feature
// against every threshold their precision allows. The expected outcome is
// floor(feature / 2^(8-B)) > threshold, worked out with integer division.
module tb_dt_comparator;

  logic [7:0] feature;
  logic [1:0] thr2;
  logic [4:0] thr5;
  logic [7:0] thr8;
  logic       gt2, gt5, gt8;
  int checks = 0, failures = 0;

  dt_comparator #(.FEAT_W(8), .PREC(2)) u_p2 (.feature(feature), .threshold(thr2), .gt(gt2));
  dt_comparator #(.FEAT_W(8), .PREC(5)) u_p5 (.feature(feature), .threshold(thr5), .gt(gt5));
  dt_comparator #(.FEAT_W(8), .PREC(8)) u_p8 (.feature(feature), .threshold(thr8), .gt(gt8));

  task automatic check(input string name, input logic got, input bit exp, input int f, input int t);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s feature=%0d threshold=%0d got=%0b expected=%0b", name, f, t, got, exp);
    end
  endtask

  initial begin
    for (int f = 0; f < 256; f++) begin
      for (int t = 0; t < 256; t++) begin
        feature = 8'(f);
        thr2    = 2'(t % 4);
        thr5    = 5'(t % 32);
        thr8    = 8'(t);
        #1;
        if (t < 4)  check("prec2", gt2, (f / 64) > t, f, t);
        if (t < 32) check("prec5", gt5, (f / 8)  > t, f, t);
        check("prec8", gt8, f > t, f, t);
      end
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
