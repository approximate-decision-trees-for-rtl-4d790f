// tb_dt_workloads -- the approximate tree at the sizes of the ten evaluated
// datasets.
//
// For each dataset, a random tree with that dataset's number of comparators
// (27 to 280), features and classes is elaborated and checked by
// tb_dt_workload_check. The comparator counts are those of the exact trees;
// the feature and class counts are those of the public datasets. The trees
// themselves are random, since the trained ones are not available, so this
// shows that the RTL elaborates and classifies correctly at these sizes, not
// the accuracy of any trained model.
module tb_dt_workloads;

  tb_dt_workload_check #(.NAME("Arrhythmia"),   .N_COMP(54),  .N_FEAT(279), .N_CLASS(16), .SEED(11)) u_arrhythmia ();
  tb_dt_workload_check #(.NAME("Balance"),      .N_COMP(102), .N_FEAT(4),   .N_CLASS(3),  .SEED(12)) u_balance ();
  tb_dt_workload_check #(.NAME("Cardio"),       .N_COMP(79),  .N_FEAT(21),  .N_CLASS(3),  .SEED(13)) u_cardio ();
  tb_dt_workload_check #(.NAME("HAR"),          .N_COMP(178), .N_FEAT(561), .N_CLASS(6),  .SEED(14)) u_har ();
  tb_dt_workload_check #(.NAME("Mammographic"), .N_COMP(150), .N_FEAT(5),   .N_CLASS(2),  .SEED(15)) u_mammographic ();
  tb_dt_workload_check #(.NAME("PenDigits"),    .N_COMP(243), .N_FEAT(16),  .N_CLASS(10), .SEED(16)) u_pendigits ();
  tb_dt_workload_check #(.NAME("RedWine"),      .N_COMP(259), .N_FEAT(11),  .N_CLASS(6),  .SEED(17)) u_redwine ();
  tb_dt_workload_check #(.NAME("Seeds"),        .N_COMP(10),  .N_FEAT(7),   .N_CLASS(3),  .SEED(18)) u_seeds ();
  tb_dt_workload_check #(.NAME("Vertebral"),    .N_COMP(27),  .N_FEAT(6),   .N_CLASS(3),  .SEED(19)) u_vertebral ();
  tb_dt_workload_check #(.NAME("WhiteWine"),    .N_COMP(280), .N_FEAT(11),  .N_CLASS(7),  .SEED(20)) u_whitewine ();

  initial begin
    int checks, failures;
    wait (u_arrhythmia.done && u_balance.done && u_cardio.done && u_har.done &&
          u_mammographic.done && u_pendigits.done && u_redwine.done && u_seeds.done &&
          u_vertebral.done && u_whitewine.done);
    checks = u_arrhythmia.checks + u_balance.checks + u_cardio.checks + u_har.checks +
             u_mammographic.checks + u_pendigits.checks + u_redwine.checks + u_seeds.checks +
             u_vertebral.checks + u_whitewine.checks;
    failures = u_arrhythmia.failures + u_balance.failures + u_cardio.failures + u_har.failures +
               u_mammographic.failures + u_pendigits.failures + u_redwine.failures + u_seeds.failures +
               u_vertebral.failures + u_whitewine.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

endmodule
