// tb_ctrl_unit: self-checking testbench of the control unit.
//
// For several run lengths (0, 1, 7, 100 and more than DEPTH) it checks that a
// start gives exactly one acc_clear clock, then the j-indexes 0..n-1 on
// consecutive clocks with no gap (one j-particle per clock), that busy covers
// the run, that done rises exactly 2 + n + DRAIN clock edges after the start
// edge and stays high, and that a start while busy is ignored.
module tb_ctrl_unit;
  localparam int DEPTH = 64, DRAIN = 5, AW = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          start = 1'b0;
  logic [AW:0]   nj = '0;
  logic [AW-1:0] jaddr;
  logic          jaddr_valid, acc_clear, busy, done;

  ctrl_unit #(.DEPTH(DEPTH), .DRAIN(DRAIN)) dut (.*);

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

  task automatic run(int n, bit restart);
    int cyc, nclr, naddr, expect_n, t_done;
    bit gap_seen;
    expect_n = (n > DEPTH) ? DEPTH : n;
    @(negedge clk);
    nj = (AW+1)'(n);
    start = 1'b1;
    @(negedge clk);          // start sampled at this edge (cycle 0)
    start = 1'b0;
    cyc = 1; nclr = 0; naddr = 0; t_done = -1;
    while (t_done < 0 && cyc < 400) begin
      if (acc_clear) begin
        nclr++;
        check(cyc == 1, "acc_clear in the first clock");
      end
      if (jaddr_valid) begin
        check(int'(jaddr) == naddr, $sformatf("address %0d expected %0d", jaddr, naddr));
        check(cyc == 2 + naddr, "addresses on consecutive clocks");
        naddr++;
      end
      check(busy || done, "busy during run");
      if (restart && cyc == 3) begin
        start = 1'b1; nj = 1;
      end else start = 1'b0;
      @(negedge clk);
      cyc++;
      if (done) t_done = cyc;
    end
    check(nclr == 1, "one clear pulse");
    check(naddr == expect_n, $sformatf("%0d addresses, expected %0d", naddr, expect_n));
    check(t_done == 2 + expect_n + DRAIN,
          $sformatf("done after %0d edges, expected %0d", t_done, 2 + expect_n + DRAIN));
    check(!busy, "idle at done");
    repeat (3) @(negedge clk);
    check(done && !busy && !jaddr_valid, "done holds");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !done, "reset state");
    run(0, 0);
    run(1, 0);
    run(7, 1);
    run(100, 0);
    run(DEPTH, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
