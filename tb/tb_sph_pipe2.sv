// tb_sph_pipe2: self-checking testbench of the second-stage pipeline.
//
// Loads random i-particles, clears the f-registers and streams random
// j-particles at one per clock (the pipeline has no back-pressure). The four
// sums (dv/dt, du/dt) are compared with a double-precision model of the same
// equations with a tolerance of 1e-3 of the summed magnitude bounds. Both
// branches of the artificial viscosity (approaching and receding pairs) must
// occur, and a run with alpha = beta = 0 must differ from one with the default
// coefficients. The latency from j_valid to the f-register (P2_LAT clock edges)
// is checked on one pair, and the unused f-registers must read zero.
module tb_sph_pipe2;
  import sph_pkg::*;
  import sph_ref_pkg::*;

  localparam int NJ = 48;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    ireg_we = 1'b0, acc_clear = 1'b0, j_valid = 1'b0;
  logic [2:0]              ireg_pair = '0, freg_sel = '0;
  fp_t  [1:0]              ireg_wdata = '0;
  fp_t  [P2_JW-1:0]        j_data = '0;
  logic signed [ACC_W-1:0] freg_data;
  fp_t                     alpha = FP_ONE, beta = FP_TWO;
  real                     ra = 1.0, rb = 2.0;
  int                      n_visc = 0, n_novisc = 0;

  sph_pipe2 dut (.*);

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

  real ip[11];
  real jp[NJ][12];

  task automatic load_i();
    for (int p = 0; p < 6; p++) begin
      @(negedge clk);
      ireg_we = 1'b1;
      ireg_pair = 3'(p);
      ireg_wdata[0] = fp_t'(r2fp(ip[2 * p]));
      ireg_wdata[1] = (2 * p + 1 < 11) ? fp_t'(r2fp(ip[2 * p + 1])) : FP_ZERO;
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
    for (int k = 0; k < 12; k++) j_data[k] = fp_t'(r2fp(jp[n][k]));
  endtask

  task automatic run_and_check(int nj, string tag, output real hw0);
    real t[4], b[4], s[4], bs[4], hw, tol;
    bit visc, near2;
    for (int k = 0; k < 4; k++) begin s[k] = 0.0; bs[k] = 0.0; end
    for (int n = 0; n < nj; n++) begin
      ref_pipe2(ip, jp[n], ra, rb, t, b, visc, near2);
      for (int k = 0; k < 4; k++) begin s[k] += t[k]; bs[k] += b[k]; end
      if (visc) n_visc++;
      else n_novisc++;
    end
    clear_acc();
    for (int n = 0; n < nj; n++) begin
      @(negedge clk);
      put_j(n);
    end
    @(negedge clk);
    j_valid = 1'b0;
    repeat (P2_LAT) @(negedge clk);
    hw0 = 0.0;
    for (int k = 0; k < NFREG; k++) begin
      freg_sel = 3'(k);
      #1;
      hw = fix2r(freg_data);
      if (k == 0) hw0 = hw;
      if (k < 4) begin
        tol = 1.0e-3 * bs[k] + 1.0e-6;
        check(rabs(hw - s[k]) <= tol,
              $sformatf("%s f%0d hw=%g ref=%g tol=%g", tag, k, hw, s[k], tol));
      end else begin
        check(freg_data == 0, $sformatf("%s f%0d not zero", tag, k));
      end
    end
  endtask

  task automatic random_particles();
    for (int k = 0; k < 3; k++) ip[k] = q25(urand(-0.5, 0.5));
    for (int k = 3; k < 6; k++) ip[k] = q25(urand(-1.0, 1.0));
    ip[6]  = q25(urand(0.3, 0.7));
    ip[7]  = q25(urand(0.5, 2.0));
    ip[8]  = q25(urand(0.5, 1.5));
    ip[9]  = q25(urand(0.1, 1.0));
    ip[10] = q25(urand(0.0, 1.0));
    for (int n = 0; n < NJ; n++) begin
      for (int k = 0; k < 3; k++) jp[n][k] = q25(ip[k] + urand(-1.2, 1.2));
      for (int k = 3; k < 6; k++) jp[n][k] = q25(urand(-1.0, 1.0));
      jp[n][6]  = q25(urand(0.3, 0.7));
      jp[n][7]  = q25(urand(0.5, 2.0));
      jp[n][8]  = q25(urand(0.5, 1.5));
      jp[n][9]  = q25(urand(0.1, 1.0));
      jp[n][10] = q25(urand(0.0, 1.0));
      jp[n][11] = q25(urand(0.5, 1.5));
    end
  endtask

  int lat;
  real hw_a, hw_b;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Latency: one pair at a small distance.
    random_particles();
    for (int k = 0; k < 12; k++) jp[0][k] = (k < 11) ? ip[k] : 1.0;
    jp[0][0] = q25(ip[0] + 0.1);
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
    check(lat == P2_LAT, $sformatf("latency %0d, expected %0d", lat, P2_LAT));

    for (int run = 0; run < 4; run++) begin
      random_particles();
      load_i();
      run_and_check(NJ, $sformatf("run%0d", run), hw_a);
    end

    // Same particles without viscosity: the result must change.
    alpha = FP_ZERO; beta = FP_ZERO; ra = 0.0; rb = 0.0;
    run_and_check(NJ, "noviscosity", hw_b);
    check(rabs(hw_a - hw_b) > 1.0e-6, "viscosity coefficients have no effect");
    check(n_visc > 0 && n_novisc > 0,
          $sformatf("viscosity branches: active %0d, inactive %0d", n_visc, n_novisc));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
