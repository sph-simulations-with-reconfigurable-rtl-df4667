// tb_jmem: self-checking testbench of the j-particle memory.
//
// Fills every bank of a reduced-depth memory through the two-word write port,
// then reads the particles back in order and in random order, checking each
// read one clock after its address (the registered read) against a copy kept
// by the testbench. Also rewrites one bank of one particle and checks that the
// other banks of that particle are untouched.
module tb_jmem;
  import sph_pkg::*;

  localparam int DEPTH = 64, NPAIR = 6, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               we = 1'b0;
  logic [3:0]         wpair = '0;
  logic [AW-1:0]      waddr = '0, raddr = '0;
  fp_t  [1:0]         wdata = '0;
  fp_t  [2*NPAIR-1:0] rdata;

  jmem #(.DEPTH(DEPTH), .NPAIR(NPAIR)) dut (.*);

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

  logic [FP_W-1:0] model [DEPTH][2*NPAIR];

  task automatic rd(int a);
    @(negedge clk);
    raddr = AW'(a);
    @(negedge clk);
    for (int k = 0; k < 2 * NPAIR; k++)
      check(rdata[k] == model[a][k], $sformatf("addr %0d word %0d", a, k));
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int p = 0; p < NPAIR; p++) begin
        @(negedge clk);
        we = 1'b1; wpair = 4'(p); waddr = AW'(a);
        wdata[0] = fp_t'($urandom); wdata[1] = fp_t'($urandom);
        model[a][2*p] = wdata[0]; model[a][2*p+1] = wdata[1];
      end
    @(negedge clk);
    we = 1'b0;
    for (int a = 0; a < DEPTH; a++) rd(a);
    for (int i = 0; i < 50; i++) rd($urandom % DEPTH);
    @(negedge clk);
    we = 1'b1; wpair = 4'd2; waddr = AW'(5); wdata = '0;
    model[5][4] = '0; model[5][5] = '0;
    @(negedge clk);
    we = 1'b0;
    rd(5);
    // streaming reads: a new address every clock
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      raddr = AW'(a);
      if (a > 0) for (int k = 0; k < 2 * NPAIR; k++)
        check(rdata[k] == model[a-1][k], $sformatf("stream addr %0d", a - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
