// threshold_conv -- threshold precision conversion for one comparator.
//
// Turns an original threshold C and the comparator's two genes into its
// approximate threshold:
//   1. substitution: C is moved by the margin m, counted in LSBs of the
//      comparator's precision B (C + m * 2^-B);
//   2. precision scaling: the sum is rounded to B fractional bits, which is
//      the fixed-point threshold used when judging accuracy;
//   3. the fixed-point value shifted left by B is the integer threshold that a
//      B-bit comparator is wired with.
// The three steps, their order and the two outputs follow the conversion
// block of the framework (adder, round(), left shift). Because m is a whole
// number of LSBs, step 1 then 2 equals rounding C to B bits and adding m to
// the integer, which is how the text describes it (precision scaling first,
// then replacing the integer).
// This design's own choices: C arrives as an unsigned Q0.C_FRAC fraction in
// place of a floating-point number; rounding is to nearest with halves going
// up; a result outside 0 .. 2^B-1 is clamped to that range; a precision gene
// outside 2..8 is clamped to that range.
//
// Interface: all combinational. c_q is the original threshold (Q0.C_FRAC),
// prec the precision gene B, margin the signed margin gene m. thr_fixed is
// the approximate threshold as a Q0.C_FRAC fraction (its low C_FRAC-B bits
// zero) and thr_int the same value as a B-bit integer, zero-extended to
// FEAT_W bits. Inside the tree every input is a constant, so synthesis folds
// the whole block into the comparator's hardwired threshold.
module threshold_conv
  import dt_pkg::*;
#(
  parameter int unsigned C_FRAC_W = dt_pkg::C_FRAC,
  parameter int unsigned OUT_W    = dt_pkg::FEAT_W
) (
  input  logic [C_FRAC_W-1:0]        c_q,
  input  logic [PREC_W-1:0]          prec,
  input  logic signed [MARGIN_W-1:0] margin,
  output logic [C_FRAC_W-1:0]        thr_fixed,
  output logic [OUT_W-1:0]           thr_int
);

  localparam int unsigned SUM_W = C_FRAC_W + 8;  // room for sign and overflow

  logic [PREC_W-1:0]        b;       // precision after clamping
  logic [PREC_W:0]          sh;      // C_FRAC - B: bits dropped by rounding
  logic signed [SUM_W-1:0]  sum;     // C + m * 2^(C_FRAC-B)
  logic signed [SUM_W-1:0]  rnd;     // sum rounded to B fractional bits, as integer
  logic signed [SUM_W-1:0]  max_int; // 2^B - 1
  logic [OUT_W-1:0]         t;

  always_comb begin
    b = prec;
    if (prec < PREC_W'(MIN_PREC)) b = PREC_W'(MIN_PREC);
    if (prec > PREC_W'(MAX_PREC)) b = PREC_W'(MAX_PREC);
    sh  = (PREC_W+1)'(C_FRAC_W) - (PREC_W+1)'(b);

    // 1. substitution by m LSBs of precision B
    sum = $signed({8'd0, c_q}) + ($signed(SUM_W'(margin)) <<< sh);
    // 2. round to nearest at B fractional bits (half up)
    rnd = (sum + (SUM_W'(1) <<< (sh - 1))) >>> sh;
    max_int = (SUM_W'(1) <<< b) - SUM_W'(1);
    if (rnd < 0)            t = '0;
    else if (rnd > max_int) t = OUT_W'(max_int);
    else                    t = OUT_W'(rnd);

    thr_int   = t;
    // fixed-point view of the same value
    thr_fixed = C_FRAC_W'({t, {C_FRAC_W{1'b0}}} >> b);
  end

endmodule
