// tb_progrape3_board: end-to-end testbench of the board at its default
// parameters (four processor chips, two pipelines each, chips 0-1 first
// stage, chips 2-3 second stage, 8192-entry j-memories).
//
// It plays the host of a direct-summation SPH step on NJ particles:
//   1. broadcast first-stage j-data to chips 0-1 and second-stage j-data to
//      chips 2-3 (one write reaches two chips), set NJ on all chips;
//   2. for each batch of 4 i-particles per stage: load one i-particle into each
//      pipeline, broadcast START, wait for host_done, have the interface
//      collect all f-registers, read them from the f-buffer;
//   3. compare every result with a double-precision model (tolerance 1e-3 of
//      the summed magnitude bounds; neighbour counts exact except pairs at
//      q = 2 within 0.05%).
// The i-particles are taken from the j-particles, so each includes its
// self-interaction. Also checked: the start-to-done time of 3 + NJ + P2_LAT+1
// clocks (one j-particle per clock), the collection time of
// NFREG*(2 + 8) bus clocks plus the pipeline of the read path, and a direct
// single-chip read of STATUS. Counted mechanisms, each of which must occur:
// broadcast writes, runs of both stages, collections, kernel inner/outer/
// outside branches, viscosity active/inactive, self-interactions.
module tb_progrape3_board;
  import sph_pkg::*;
  import sph_ref_pkg::*;

  localparam int NJ     = 64;
  localparam int NCHIP  = 4;
  localparam int NPIPE  = 2;
  localparam int NP     = NCHIP * NPIPE;
  localparam int NBATCH = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               host_we = 1'b0, host_re = 1'b0;
  logic [HOST_AW-1:0] host_addr = '0;
  logic [63:0]        host_wdata = '0;
  logic [63:0]        host_rdata;
  logic               host_rvalid, host_busy, host_done;

  progrape3_board dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host port tasks
  task automatic hwrite(logic [3:0] mask, logic [19:0] a, logic [63:0] d);
    @(negedge clk);
    host_we = 1'b1;
    host_addr = {mask, a};
    host_wdata = d;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic hread(logic [3:0] mask, logic [19:0] a, output logic [63:0] d);
    int n;
    @(negedge clk);
    host_re = 1'b1;
    host_addr = {mask, a};
    @(negedge clk);
    host_re = 1'b0;
    n = 0;
    while (!host_rvalid && n < 10) begin
      @(negedge clk);
      n++;
    end
    check(host_rvalid, "read answered");
    d = host_rdata;
  endtask

  function automatic logic [63:0] two(real a, real b);
    return {7'd0, r2fp(b), 7'd0, r2fp(a)};
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom % 1000000) / 1000000.0;
  endfunction

  // ---------------- particles
  real p1 [NJ][8];   // x y z vx vy vz h m
  real p2 [NJ][12];  // x y z vx vy vz h rho c A f m
  int  n_bcast = 0, n_run1 = 0, n_run2 = 0, n_coll = 0;
  int  n_inner = 0, n_outer = 0, n_outside = 0, n_visc = 0, n_novisc = 0, n_self = 0;

  task automatic make_particles();
    for (int n = 0; n < NJ; n++) begin
      for (int k = 0; k < 3; k++) p1[n][k] = q25(urand(0.0, 1.6));
      for (int k = 3; k < 6; k++) p1[n][k] = q25(urand(-1.0, 1.0));
      p1[n][6] = q25(urand(0.3, 0.5));
      p1[n][7] = q25(urand(0.5, 1.5) / NJ);
      for (int k = 0; k < 7; k++) p2[n][k] = p1[n][k];
      p2[n][7]  = q25(urand(0.5, 2.0));
      p2[n][8]  = q25(urand(0.5, 1.5));
      p2[n][9]  = q25(urand(0.1, 1.0));
      p2[n][10] = q25(urand(0.0, 1.0));
      p2[n][11] = p1[n][7];
    end
  endtask

  task automatic load_j();
    for (int n = 0; n < NJ; n++) begin
      for (int p = 0; p < 4; p++) begin
        hwrite(4'b0011, {RG_JMEM, 1'b0, 4'(p), 13'(n)}, two(p1[n][2*p], p1[n][2*p+1]));
        n_bcast++;
      end
      for (int p = 0; p < 6; p++) begin
        hwrite(4'b1100, {RG_JMEM, 1'b0, 4'(p), 13'(n)}, two(p2[n][2*p], p2[n][2*p+1]));
        n_bcast++;
      end
    end
    hwrite(4'b1111, {RG_CTRL, 14'd0, CR_NJ}, 64'(NJ));
    hwrite(4'b1100, {RG_CTRL, 14'd0, CR_ALPHA}, 64'(r2fp(1.0)));
    hwrite(4'b1100, {RG_CTRL, 14'd0, CR_BETA}, 64'(r2fp(2.0)));
  endtask

  // i-particle index for stage s, pipeline slot g (0..3), batch b
  function automatic int ipart(int b, int g);
    return b * 4 + g;
  endfunction

  task automatic load_i(int b);
    for (int g = 0; g < 4; g++) begin
      int c1, c2, pp, n;
      n  = ipart(b, g);
      c1 = g / NPIPE;          // stage-1 chips 0, 1
      c2 = 2 + g / NPIPE;      // stage-2 chips 2, 3
      pp = g % NPIPE;
      for (int p = 0; p < 4; p++)
        hwrite(4'(1 << c1), {RG_IREG, 10'd0, 4'(pp), 4'(p)},
               two(p1[n][2*p], (2*p+1 < 7) ? p1[n][2*p+1] : 0.0));
      for (int p = 0; p < 6; p++)
        hwrite(4'(1 << c2), {RG_IREG, 10'd0, 4'(pp), 4'(p)},
               two(p2[n][2*p], (2*p+1 < 11) ? p2[n][2*p+1] : 0.0));
    end
  endtask

  task automatic check_batch(int b);
    logic [63:0] d;
    real ii1[7], ii2[11], jj1[8], jj2[12], t1[6], b1[6], t2[4], b2[4];
    real s1[6], bs1[6], s2[4], bs2[4], hw, tol, q;
    bit near2, visc;
    int nnear;
    for (int g = 0; g < 4; g++) begin
      int n;
      n = ipart(b, g);
      for (int k = 0; k < 7; k++) ii1[k] = p1[n][k];
      for (int k = 0; k < 11; k++) ii2[k] = p2[n][k];
      for (int k = 0; k < 6; k++) begin s1[k] = 0.0; bs1[k] = 0.0; end
      for (int k = 0; k < 4; k++) begin s2[k] = 0.0; bs2[k] = 0.0; end
      nnear = 0;
      for (int m = 0; m < NJ; m++) begin
        for (int k = 0; k < 8; k++) jj1[k] = p1[m][k];
        for (int k = 0; k < 12; k++) jj2[k] = p2[m][k];
        ref_pipe1(ii1, jj1, t1, b1, near2);
        ref_pipe2(ii2, jj2, 1.0, 2.0, t2, b2, visc, near2);
        for (int k = 0; k < 6; k++) begin s1[k] += t1[k]; bs1[k] += b1[k]; end
        for (int k = 0; k < 4; k++) begin s2[k] += t2[k]; bs2[k] += b2[k]; end
        if (near2) nnear++;
        q = 0.0;
        for (int k = 0; k < 3; k++) q += (ii1[k] - jj1[k]) ** 2;
        q = $sqrt(q) / (0.5 * (ii1[6] + jj1[6]));
        if (m == n) n_self++;
        if (q < 1.0) n_inner++;
        else if (q < 2.0) n_outer++;
        else n_outside++;
        if (visc) n_visc++;
        else n_novisc++;
      end
      // stage-1 pipeline g is global pipeline g; stage-2 pipeline g is 4 + g
      for (int k = 0; k < NFREG; k++) begin
        hread(4'b0000, 20'h80000 | 20'(g * NFREG + k), d);
        hw = fix2r(d);
        if (k < 5) begin
          tol = 1.0e-3 * bs1[k] + 1.0e-6;
          check(rabs(hw - s1[k]) <= tol,
                $sformatf("batch %0d i %0d stage1 f%0d hw=%g ref=%g", b, n, k, hw, s1[k]));
        end else if (k == 5)
          check(rabs(hw - s1[k]) <= real'(nnear) + 1.0e-6,
                $sformatf("batch %0d i %0d neighbours hw=%g ref=%g", b, n, hw, s1[k]));
        else check(d == 0, "unused f-register");
      end
      for (int k = 0; k < NFREG; k++) begin
        hread(4'b0000, 20'h80000 | 20'((4 + g) * NFREG + k), d);
        hw = fix2r(d);
        if (k < 4) begin
          tol = 1.0e-3 * bs2[k] + 1.0e-6;
          check(rabs(hw - s2[k]) <= tol,
                $sformatf("batch %0d i %0d stage2 f%0d hw=%g ref=%g", b, n, k, hw, s2[k]));
        end else check(d == 0, "unused f-register");
      end
    end
  endtask

  initial begin
    logic [63:0] d;
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    make_particles();
    load_j();
    for (int b = 0; b < NBATCH; b++) begin
      load_i(b);
      // start all four chips with one broadcast write
      @(negedge clk);
      host_we = 1'b1;
      host_addr = {4'b1111, RG_CTRL, 14'd0, CR_START};
      @(negedge clk);
      host_we = 1'b0;
      cyc = 1;
      while (host_done && cyc < 4) begin @(negedge clk); cyc++; end
      check(!host_done, "chips busy after start");
      while (!host_done && cyc < 100000) begin @(negedge clk); cyc++; end
      check(cyc == 3 + NJ + P2_LAT + 1,
            $sformatf("start to done %0d clocks, expected %0d", cyc, 3 + NJ + P2_LAT + 1));
      n_run1++;
      n_run2++;
      hread(4'b0001, {RG_CTRL, 14'd0, CR_STATUS}, d);
      check(d[1:0] == 2'b01, "chip 0 status done");
      // collect f-data
      hwrite(4'b0000, 20'd0, 64'd1);
      cyc = 1;
      while (host_busy && cyc < 10000) begin @(negedge clk); cyc++; end
      check(cyc >= NFREG * (2 + NP) && cyc <= NFREG * (2 + NP) + 3,
            $sformatf("collection took %0d clocks, model %0d", cyc, NFREG * (2 + NP)));
      n_coll++;
      check_batch(b);
    end
    $display("mechanisms: broadcast %0d, stage-1 runs %0d, stage-2 runs %0d, collections %0d",
             n_bcast, n_run1, n_run2, n_coll);
    $display("pairs: inner %0d, outer %0d, outside %0d, viscous %0d, non-viscous %0d, self %0d",
             n_inner, n_outer, n_outside, n_visc, n_novisc, n_self);
    check(n_bcast > 0, "broadcast writes happened");
    check(n_run1 > 0 && n_run2 > 0, "both stages ran");
    check(n_coll > 0, "collection happened");
    check(n_inner > 0 && n_outer > 0 && n_outside > 0, "all kernel branches");
    check(n_visc > 0 && n_novisc > 0, "both viscosity branches");
    check(n_self > 0, "self-interactions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
