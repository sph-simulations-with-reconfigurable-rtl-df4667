// tb_sph_kernel: self-checking testbench of the fixed-point kernel unit.
//
// Feeds q^2 values one per clock (a sweep over 0..5 plus random values) and
// compares w(q), g(q) and the in-range flag, two clocks later, with the
// spline evaluated in double precision. Tolerance: 2e-5 absolute (the unit
// keeps 22 fraction bits). The latency of exactly two clocks is checked by
// matching every output against the input sent two clocks earlier.
module tb_sph_kernel;
  import sph_pkg::*;
  import sph_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid = 1'b0;
  logic [31:0]        q2 = '0;
  logic               out_valid;
  logic signed [31:0] w, g;
  logic               in_range;

  sph_kernel dut (.*);

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

  localparam int N = 600;
  logic [31:0] sent [N];
  int nsent = 0, nrecv = 0, n_in = 0, n_out = 0, n_outer = 0;

  // Scoreboard: compare each output with the input sent two edges earlier.
  logic [31:0] d1, d2;
  logic        v1, v2;
  always @(posedge clk) begin
    d2 <= d1; v2 <= v1;
    d1 <= q2; v1 <= in_valid && rst_n;
  end

  always @(negedge clk) if (rst_n) begin
    real qq, q, ew, eg;
    check(out_valid == v2, "out_valid timing");
    if (out_valid && v2) begin
      qq = real'(d2) / 4194304.0;
      q  = $sqrt(qq);
      ew = ref_w(q);
      eg = ref_g(q);
      if (qq < 4.0 - 1.0e-5 || qq >= 4.0) begin
        check(in_range == (qq < 4.0), $sformatf("in_range q2=%g", qq));
        check(rabs(real'(w) / 4194304.0 - ew) < 2.0e-5,
              $sformatf("w q2=%g hw=%g ref=%g", qq, real'(w) / 4194304.0, ew));
        check(rabs(real'(g) / 4194304.0 - eg) < 2.0e-5,
              $sformatf("g q2=%g hw=%g ref=%g", qq, real'(g) / 4194304.0, eg));
      end
      if (qq < 1.0) n_in++;
      else if (qq < 4.0) n_outer++;
      else n_out++;
      nrecv++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = ((i % 7) != 3);  // a few idle cycles
      if (i < 400) q2 = 32'($rtoi(real'(i) / 80.0 * 4194304.0));
      else q2 = $urandom % (32'd5 << 22);
      if (i == 401) q2 = 32'd4 << 22;
      if (i == 402) q2 = (32'd4 << 22) - 1;
      if (i == 403) q2 = '1;
      if (in_valid) nsent++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    check(nrecv == nsent, $sformatf("sent %0d received %0d", nsent, nrecv));
    check(n_in > 0 && n_outer > 0 && n_out > 0, "all three kernel branches used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
