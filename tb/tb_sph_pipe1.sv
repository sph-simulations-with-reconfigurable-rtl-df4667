// tb_sph_pipe1: self-checking testbench of the first-stage pipeline.
//
// Loads random i-particles, clears the f-registers and streams random
// j-particles at one per clock (the pipeline has no back-pressure). The six
// sums are compared with a double-precision model of the same equations, with
// a tolerance of 1e-3 of the summed magnitude bounds; the neighbour count must
// match exactly except for particles within 0.05% of q = 2. The latency from
// j_valid to the f-register (P1_LAT clock edges) is checked on a single
// self-interaction, and the unused f-registers must read zero.
module tb_sph_pipe1;
  import sph_pkg::*;
  import sph_ref_pkg::*;

  localparam int NJ = 48;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    ireg_we = 1'b0, acc_clear = 1'b0, j_valid = 1'b0;
  logic [2:0]              ireg_pair = '0, freg_sel = '0;
  fp_t  [1:0]              ireg_wdata = '0;
  fp_t  [P1_JW-1:0]        j_data = '0;
  logic signed [ACC_W-1:0] freg_data;

  sph_pipe1 dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom % 1000000) / 1000000.0;
  endfunction

  real ip[7];
  real jp[NJ][8];

  task automatic load_i();
    for (int p = 0; p < 4; p++) begin
      @(negedge clk);
      ireg_we = 1'b1;
      ireg_pair = 3'(p);
      ireg_wdata[0] = fp_t'(r2fp(ip[2 * p]));
      ireg_wdata[1] = (2 * p + 1 < 7) ? fp_t'(r2fp(ip[2 * p + 1])) : FP_ZERO;
    end
    @(negedge clk);
    ireg_we = 1'b0;
  endtask

  task automatic clear_acc();
    @(negedge clk);
    acc_clear = 1'b1;
    @(negedge clk);
    acc_clear = 1'b0;
  endtask

  task automatic put_j(int n);
    j_valid = 1'b1;
    for (int k = 0; k < 8; k++) j_data[k] = fp_t'(r2fp(jp[n][k]));
  endtask

  task automatic run_and_check(int nj, string tag);
    real t[6], b[6], s[6], bs[6], hw, tol;
    bit near2;
    int nnear;
    for (int k = 0; k < 6; k++) begin s[k] = 0.0; bs[k] = 0.0; end
    nnear = 0;
    for (int n = 0; n < nj; n++) begin
      ref_pipe1(ip, jp[n], t, b, near2);
      for (int k = 0; k < 6; k++) begin s[k] += t[k]; bs[k] += b[k]; end
      if (near2) nnear++;
    end
    clear_acc();
    for (int n = 0; n < nj; n++) begin
      @(negedge clk);
      put_j(n);
    end
    @(negedge clk);
    j_valid = 1'b0;
    repeat (P1_LAT) @(negedge clk);
    for (int k = 0; k < NFREG; k++) begin
      freg_sel = 3'(k);
      #1;
      hw = fix2r(freg_data);
      if (k < 5) begin
        tol = 1.0e-3 * bs[k] + 1.0e-6;
        check(rabs(hw - s[k]) <= tol,
              $sformatf("%s f%0d hw=%g ref=%g tol=%g", tag, k, hw, s[k], tol));
      end else if (k == 5) begin
        check(rabs(hw - s[k]) <= real'(nnear) + 1.0e-6,
              $sformatf("%s neighbours hw=%g ref=%g", tag, hw, s[k]));
      end else begin
        check(freg_data == 0, $sformatf("%s f%0d not zero", tag, k));
      end
    end
  endtask

  int lat;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Latency: one self-interaction (r = 0, q = 0, W = 1/(pi h^3)).
    for (int k = 0; k < 7; k++) ip[k] = q25(urand(0.5, 1.0));
    for (int k = 0; k < 7; k++) jp[0][k] = ip[k];
    jp[0][7] = 1.0;
    load_i();
    clear_acc();
    freg_sel = 3'd0;
    @(negedge clk);
    put_j(0);
    @(negedge clk);
    j_valid = 1'b0;
    lat = 1;
    while (freg_data == 0 && lat < 40) begin
      @(negedge clk);
      lat++;
    end
    check(lat == P1_LAT, $sformatf("latency %0d, expected %0d", lat, P1_LAT));
    check(rabs(fix2r(freg_data) - 1.0 / (PI * ip[6] ** 3)) <= 1.0e-3 / (PI * ip[6] ** 3),
          "self-interaction density");

    // Random runs: particles in a box of side 2 around the i-particle.
    for (int run = 0; run < 4; run++) begin
      for (int k = 0; k < 3; k++) ip[k] = q25(urand(-0.5, 0.5));
      for (int k = 3; k < 6; k++) ip[k] = q25(urand(-1.0, 1.0));
      ip[6] = q25(urand(0.3, 0.7));
      for (int n = 0; n < NJ; n++) begin
        for (int k = 0; k < 3; k++) jp[n][k] = q25(ip[k] + urand(-1.2, 1.2));
        for (int k = 3; k < 6; k++) jp[n][k] = q25(urand(-1.0, 1.0));
        jp[n][6] = q25(urand(0.3, 0.7));
        jp[n][7] = q25(urand(0.5, 1.5));
      end
      if (run == 3) for (int k = 0; k < 7; k++) jp[0][k] = ip[k];  // include self
      load_i();
      run_and_check(NJ, $sformatf("run%0d", run));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
