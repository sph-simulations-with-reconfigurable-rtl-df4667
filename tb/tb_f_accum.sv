// tb_f_accum: self-checking testbench of the fixed-point f-register.
//
// Sums random positive and negative floating-point terms and checks the
// 64-bit sum bit-exactly against the same sum built from the terms' real
// values scaled by 2^32 (exact for the exponent range used). Also checks that
// clear zeroes the register, that a term arriving with clear restarts the sum
// from that term, that idle cycles add nothing, and the one-clock update.
module tb_f_accum;
  import sph_pkg::*;
  import sph_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    clear = 1'b0, add_valid = 1'b0;
  fp_t                     term = FP_ZERO;
  logic signed [ACC_W-1:0] sum;

  f_accum dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fp_t rnd_term();
    fp_t t;
    t.s = 1'($urandom);
    t.e = 8'(127 - 10 + $urandom % 20);
    t.f = 16'($urandom);
    return t;
  endfunction

  longint expect_sum;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(sum == 0, "reset value");
    for (int run = 0; run < 4; run++) begin
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      check(sum == 0, "clear");
      expect_sum = 0;
      for (int i = 0; i < 200; i++) begin
        add_valid = ($urandom % 4) != 0;
        term = rnd_term();
        if (add_valid) expect_sum += longint'(fp2r(term) * 4294967296.0);
        @(negedge clk);
        check(sum == expect_sum, $sformatf("run %0d step %0d sum=%0d expected %0d", run, i, sum, expect_sum));
      end
      add_valid = 1'b0;
    end
    // clear together with a term restarts from that term
    clear = 1'b1; add_valid = 1'b1; term = FP_ONE;
    @(negedge clk);
    clear = 1'b0; add_valid = 1'b0;
    check(sum == 64'sd1 <<< 32, "clear with term");
    // zero term adds nothing
    add_valid = 1'b1; term = FP_ZERO;
    @(negedge clk);
    add_valid = 1'b0;
    check(sum == 64'sd1 <<< 32, "zero term");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
