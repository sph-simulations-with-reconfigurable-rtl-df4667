// tb_fp_arith: self-checking testbench of the FP25 operators in sph_pkg.
//
// The operators are combinational functions, so this testbench calls them
// directly, with no clock. For random operands spread over many binades it
// checks the results against double-precision `real` arithmetic on the decoded
// operands:
//   - fp_mul: relative error at most 2^-15 (the operators truncate);
//   - fp_add, fp_sub: error at most 2^-15 of the larger operand, including
//     cancellation;
//   - fp_div: relative error at most 2^-14;
//   - fp_half: exact;
//   - fp_from_fix32 and fp_to_fix64: agree with the fixed-point value within
//     one unit of the coarser format.
// It also checks zero operands, x - x = 0, saturation to the largest
// magnitude on overflow, flush to zero on underflow, and fp_nonpos. A watchdog
// is kept for uniformity even though nothing here waits.
module tb_fp_arith;
  import sph_pkg::*;
  import sph_ref_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random FP25 value with exponent in [127 - span, 127 + span].
  function automatic fp_t rnd(int span);
    fp_t r;
    r.s = 1'($urandom);
    r.e = 8'(127 - span + int'($urandom % (2 * span + 1)));
    r.f = 16'($urandom);
    return r;
  endfunction

  function automatic real big(real a, real b);
    return (rabs(a) > rabs(b)) ? rabs(a) : rabs(b);
  endfunction

  initial begin
    fp_t a, b, r;
    real ra, rb, rr, want;
    logic signed [31:0] x;
    logic signed [63:0] y;
    localparam real U15 = 1.0 / 32768.0;
    #1;

    for (int t = 0; t < 3000; t++) begin
      a = rnd(20);
      b = rnd(20);
      ra = fp2r(a);
      rb = fp2r(b);

      r = fp_mul(a, b);
      want = ra * rb;
      check(rabs(fp2r(r) - want) <= U15 * rabs(want), $sformatf("mul %g * %g = %g", ra, rb, fp2r(r)));

      r = fp_add(a, b);
      want = ra + rb;
      check(rabs(fp2r(r) - want) <= U15 * big(ra, rb), $sformatf("add %g + %g = %g", ra, rb, fp2r(r)));

      r = fp_sub(a, b);
      want = ra - rb;
      check(rabs(fp2r(r) - want) <= U15 * big(ra, rb), $sformatf("sub %g - %g = %g", ra, rb, fp2r(r)));

      r = fp_div(a, b);
      want = ra / rb;
      check(rabs(fp2r(r) - want) <= 2.0 * U15 * rabs(want), $sformatf("div %g / %g = %g", ra, rb, fp2r(r)));

      r = fp_half(a);
      check(fp2r(r) == 0.5 * ra, "half");

      check(fp_nonpos(a) == (ra <= 0.0), "nonpos");
    end

    // operands close to each other: cancellation
    for (int t = 0; t < 1000; t++) begin
      a = rnd(5);
      b = a;
      b.f = a.f ^ 16'($urandom % 256);
      ra = fp2r(a);
      rb = fp2r(b);
      r = fp_sub(a, b);
      check(fp2r(r) == ra - rb, $sformatf("exact cancellation %g - %g = %g", ra, rb, fp2r(r)));
    end

    // fixed-point conversions
    for (int t = 0; t < 1000; t++) begin
      x = $signed($urandom);
      if (t < 200) x = x >>> (t % 31);
      r = fp_from_fix32(x, KFRAC);
      want = real'(x) / real'(1 << KFRAC);
      check(rabs(fp2r(r) - want) <= U15 * rabs(want), "from_fix32");
      a = rnd(30);
      y = fp_to_fix64(a, ACC_FRAC);
      ra = fp2r(a);
      check(rabs(fix2r(y) - ra) <= 1.0 / 4294967296.0, $sformatf("to_fix64 %g -> %g", ra, fix2r(y)));
    end

    // special cases
    a = rnd(10);
    check(fp_is_zero(fp_mul(a, FP_ZERO)), "x * 0 = 0");
    check(fp_add(a, FP_ZERO) == a, "x + 0 = x");
    check(fp_add(FP_ZERO, a) == a, "0 + x = x");
    check(fp_is_zero(fp_sub(a, a)), "x - x = 0");
    check(fp_mul(FP_MAX, FP_TWO) == FP_MAX, "overflow saturates");
    check(fp_mul(fp_neg(FP_MAX), FP_TWO) == fp_neg(FP_MAX), "negative overflow saturates");
    b = '{s: 1'b0, e: 8'd1, f: 16'd0};
    check(fp_is_zero(fp_mul(b, b)), "underflow flushes to zero");
    check(fp_is_zero(fp_half(b)), "half of the smallest value is zero");
    check(fp_nonpos(FP_ZERO) && !fp_nonpos(FP_ONE) && fp_nonpos(fp_neg(FP_ONE)), "nonpos cases");
    check(fp_to_ufix32(fp_neg(FP_ONE), KFRAC) == 0, "unsigned conversion clamps negatives");
    check(fp_to_ufix32(FP_MAX, KFRAC) == 32'hFFFF_FFFF, "unsigned conversion saturates");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
