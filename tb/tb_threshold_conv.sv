// tb_threshold_conv -- checks the threshold precision conversion.
//
// Every precision gene 0..15 (2..8 are the legal ones, the rest must clamp)
// and every margin -8..7 meets directed thresholds (0, the top of the range,
// exact halves) and random ones. The expected integer threshold comes from
// the real-arithmetic reference (C + m/2^B rounded, clamped); the expected
// fixed-point threshold is that integer times 2^(16-B).
module tb_threshold_conv;
  import tb_dt_ref_pkg::*;

  logic [15:0]       c_q;
  logic [3:0]        prec;
  logic signed [3:0] margin;
  logic [15:0]       thr_fixed;
  logic [7:0]        thr_int;
  int checks = 0, failures = 0;

  threshold_conv dut (.c_q(c_q), .prec(prec), .margin(margin),
                      .thr_fixed(thr_fixed), .thr_int(thr_int));

  task automatic run(input int unsigned c, input int b, input int m);
    int exp_i, bb;
    c_q    = 16'(c);
    prec   = 4'(b);
    margin = 4'(m);
    #1;
    bb    = (b < 2) ? 2 : (b > 8) ? 8 : b;
    exp_i = ref_thr(c, b, m);
    checks++;
    if (int'(thr_int) != exp_i || int'(thr_fixed) != exp_i * (2 ** (16 - bb))) begin
      failures++;
      if (failures <= 10)
        $display("FAIL c=%0d B=%0d m=%0d: int %0d fixed %0d, expected %0d / %0d",
                 c, b, m, thr_int, thr_fixed, exp_i, exp_i * (2 ** (16 - bb)));
    end
  endtask

  initial begin
    for (int b = 0; b < 16; b++) begin
      for (int m = -8; m < 8; m++) begin
        run(0, b, m);
        run(65535, b, m);
        run(32768, b, m);
        if (b >= 2 && b <= 8) begin
          // exactly half an LSB above a grid point: must round up
          run((3 * (2 ** (16 - b)) + 2 ** (15 - b)) % 65536, b, m);
          // just below that half point: must round down
          run((3 * (2 ** (16 - b)) + 2 ** (15 - b) - 1) % 65536, b, m);
        end
        for (int k = 0; k < 40; k++) run($urandom_range(0, 65535), b, m);
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
