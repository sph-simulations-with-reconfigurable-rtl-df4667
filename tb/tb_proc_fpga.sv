// tb_proc_fpga: self-checking testbench of one processor FPGA in each of its
// two configurations.
//
// A first-stage and a second-stage chip (two pipelines each, 64-entry
// j-memory to keep the run short) share one local bus with separate chip
// selects, and their read data are ORed as on the board. The testbench acts
// as the bus master:
//   - NJ and ALPHA/BETA writes, NJ read-back, STATUS before and after a run;
//   - j-data and i-data loads, START, busy for exactly 2 + nj + LAT + 1 clocks;
//   - every f-register of every pipeline, read directly and through FSEL,
//     compared with a double-precision model (tolerance 1e-3 of the summed
//     magnitude bounds; neighbour count exact away from q = 2);
//   - an idle chip drives zero read data; nj above the memory size is clipped.
module tb_proc_fpga;
  import sph_pkg::*;
  import sph_ref_pkg::*;

  localparam int JDEPTH = 64;
  localparam int NPIPE  = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              lb_we = 1'b0, lb_re = 1'b0;
  logic [1:0]        cs = '0;
  logic [LB_AW-1:0]  lb_addr = '0;
  logic [63:0]       lb_wdata = '0;
  logic [63:0]       rd1, rd2, rdata;
  logic              rv1, rv2, busy1, busy2, done1, done2;

  proc_fpga #(.STAGE(1), .NPIPE(NPIPE), .JDEPTH(JDEPTH)) u_s1 (
    .clk(clk), .rst_n(rst_n), .lb_cs(cs[0]), .lb_we(lb_we), .lb_re(lb_re),
    .lb_addr(lb_addr), .lb_wdata(lb_wdata), .lb_rdata(rd1), .lb_rvalid(rv1),
    .busy(busy1), .done(done1)
  );
  proc_fpga #(.STAGE(2), .NPIPE(NPIPE), .JDEPTH(JDEPTH)) u_s2 (
    .clk(clk), .rst_n(rst_n), .lb_cs(cs[1]), .lb_we(lb_we), .lb_re(lb_re),
    .lb_addr(lb_addr), .lb_wdata(lb_wdata), .lb_rdata(rd2), .lb_rvalid(rv2),
    .busy(busy2), .done(done2)
  );
  assign rdata = rd1 | rd2;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic bwrite(logic [1:0] c, logic [19:0] a, logic [63:0] d);
    @(negedge clk);
    cs = c; lb_we = 1'b1; lb_addr = a; lb_wdata = d;
    @(negedge clk);
    cs = '0; lb_we = 1'b0;
  endtask

  task automatic bread(logic [1:0] c, logic [19:0] a, output logic [63:0] d);
    @(negedge clk);
    cs = c; lb_re = 1'b1; lb_addr = a;
    @(negedge clk);
    cs = '0; lb_re = 1'b0;
    check((c == 2'b01) ? (rv1 && !rv2) : (rv2 && !rv1), "read valid from the selected chip only");
    check(((c == 2'b01) ? rd2 : rd1) == 0, "idle chip drives zero");
    d = rdata;
  endtask

  function automatic logic [63:0] two(real a, real b);
    return {7'd0, r2fp(b), 7'd0, r2fp(a)};
  endfunction

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom % 1000000) / 1000000.0;
  endfunction

  real jp [JDEPTH][12];   // x y z vx vy vz h rho c A f m
  real ip [NPIPE][11];
  real alpha, beta;

  task automatic make(int nj);
    for (int n = 0; n < nj; n++) begin
      for (int k = 0; k < 3; k++) jp[n][k] = q25(urand(0.0, 1.5));
      for (int k = 3; k < 6; k++) jp[n][k] = q25(urand(-1.0, 1.0));
      jp[n][6]  = q25(urand(0.3, 0.6));
      jp[n][7]  = q25(urand(0.5, 2.0));
      jp[n][8]  = q25(urand(0.5, 1.5));
      jp[n][9]  = q25(urand(0.1, 1.0));
      jp[n][10] = q25(urand(0.0, 1.0));
      jp[n][11] = q25(urand(0.5, 1.5));
    end
    for (int p = 0; p < NPIPE; p++)
      for (int k = 0; k < 11; k++) ip[p][k] = jp[($urandom % nj)][k];
    ip[1][0] = q25(ip[1][0] + 0.1);  // not exactly on a j-particle
  endtask

  // stage-1 j word k: x y z vx vy vz h m; stage-2: x..h rho c A f m
  function automatic real jw1(int n, int k);
    return (k == 7) ? jp[n][11] : jp[n][k];
  endfunction

  task automatic load(int nj);
    for (int n = 0; n < nj; n++) begin
      for (int p = 0; p < 4; p++)
        bwrite(2'b01, {RG_JMEM, 1'b0, 4'(p), 13'(n)}, two(jw1(n, 2*p), jw1(n, 2*p+1)));
      for (int p = 0; p < 6; p++)
        bwrite(2'b10, {RG_JMEM, 1'b0, 4'(p), 13'(n)}, two(jp[n][2*p], jp[n][2*p+1]));
    end
    for (int q = 0; q < NPIPE; q++) begin
      for (int p = 0; p < 4; p++)
        bwrite(2'b01, {RG_IREG, 10'd0, 4'(q), 4'(p)},
               two(ip[q][2*p], (2*p+1 < 7) ? ip[q][2*p+1] : 0.0));
      for (int p = 0; p < 6; p++)
        bwrite(2'b10, {RG_IREG, 10'd0, 4'(q), 4'(p)},
               two(ip[q][2*p], (2*p+1 < 11) ? ip[q][2*p+1] : 0.0));
    end
  endtask

  task automatic run(logic [1:0] c, int nj_wr, int nj_eff, int lat);
    int cyc;
    logic [63:0] d;
    bwrite(c, {RG_CTRL, 14'd0, CR_NJ}, 64'(nj_wr));
    bread(c, {RG_CTRL, 14'd0, CR_NJ}, d);
    check(d == 64'(nj_wr), "NJ read-back");
    // start: the write edge is the edge at the end of the write cycle
    @(negedge clk);
    cs = c; lb_we = 1'b1; lb_addr = {RG_CTRL, 14'd0, CR_START};
    @(negedge clk);
    cs = '0; lb_we = 1'b0;
    cyc = 1;  // edges from the start edge to the one that drops busy
    while ((c == 2'b01 ? busy1 : busy2) && cyc < 10000) begin @(negedge clk); cyc++; end
    check(cyc == 2 + nj_eff + lat + 1,
          $sformatf("busy %0d clocks, expected %0d", cyc, 2 + nj_eff + lat + 1));
    bread(c, {RG_CTRL, 14'd0, CR_STATUS}, d);
    check(d == 64'b01, "STATUS done, not busy");
  endtask

  task automatic compare(int nj, string tag);
    logic [63:0] d, e;
    real ii1[7], jj1[8], ii2[11], jj2[12], t1[6], b1[6], t2[4], b2[4];
    real s1[6], bs1[6], s2[4], bs2[4], hw;
    bit near2, visc;
    int nn;
    for (int q = 0; q < NPIPE; q++) begin
      for (int k = 0; k < 7; k++) ii1[k] = ip[q][k];
      for (int k = 0; k < 11; k++) ii2[k] = ip[q][k];
      for (int k = 0; k < 6; k++) begin s1[k] = 0.0; bs1[k] = 0.0; end
      for (int k = 0; k < 4; k++) begin s2[k] = 0.0; bs2[k] = 0.0; end
      nn = 0;
      for (int n = 0; n < nj; n++) begin
        for (int k = 0; k < 8; k++) jj1[k] = jw1(n, k);
        for (int k = 0; k < 12; k++) jj2[k] = jp[n][k];
        ref_pipe1(ii1, jj1, t1, b1, near2);
        if (near2) nn++;
        ref_pipe2(ii2, jj2, alpha, beta, t2, b2, visc, near2);
        for (int k = 0; k < 6; k++) begin s1[k] += t1[k]; bs1[k] += b1[k]; end
        for (int k = 0; k < 4; k++) begin s2[k] += t2[k]; bs2[k] += b2[k]; end
      end
      for (int k = 0; k < NFREG; k++) begin
        bread(2'b01, {RG_FREG, 9'd0, 1'b0, 4'(q), 1'b0, 3'(k)}, d);
        bwrite(2'b01, {RG_CTRL, 14'd0, CR_FSEL}, 64'(k));
        bread(2'b01, {RG_FREG, 9'd0, 1'b1, 4'(q), 4'd0}, e);
        check(d == e, $sformatf("%s stage1 FSEL read of f%0d", tag, k));
        hw = fix2r(d);
        if (k < 5)
          check(rabs(hw - s1[k]) <= 1.0e-3 * bs1[k] + 1.0e-6,
                $sformatf("%s stage1 pipe%0d f%0d hw=%g ref=%g", tag, q, k, hw, s1[k]));
        else if (k == 5)
          check(rabs(hw - s1[k]) <= real'(nn) + 1.0e-6,
                $sformatf("%s stage1 pipe%0d n hw=%g ref=%g", tag, q, hw, s1[k]));
        else check(d == 0, "unused f-register zero");
      end
      for (int k = 0; k < NFREG; k++) begin
        bread(2'b10, {RG_FREG, 9'd0, 1'b0, 4'(q), 1'b0, 3'(k)}, d);
        hw = fix2r(d);
        if (k < 4)
          check(rabs(hw - s2[k]) <= 1.0e-3 * bs2[k] + 1.0e-6,
                $sformatf("%s stage2 pipe%0d f%0d hw=%g ref=%g", tag, q, k, hw, s2[k]));
        else check(d == 0, "unused f-register zero");
      end
    end
  endtask

  initial begin
    logic [63:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    bread(2'b01, {RG_CTRL, 14'd0, CR_STATUS}, d);
    check(d == 0, "STATUS idle after reset");

    // run 1: default alpha = 1, beta = 2, 40 j-particles
    alpha = 1.0; beta = 2.0;
    make(40);
    load(40);
    run(2'b01, 40, 40, P1_LAT);
    run(2'b10, 40, 40, P2_LAT);
    compare(40, "run1");

    // run 2: alpha = 0.5, beta = 1.5, nj written larger than the memory
    alpha = 0.5; beta = 1.5;
    bwrite(2'b10, {RG_CTRL, 14'd0, CR_ALPHA}, 64'(r2fp(alpha)));
    bwrite(2'b10, {RG_CTRL, 14'd0, CR_BETA}, 64'(r2fp(beta)));
    make(JDEPTH);
    load(JDEPTH);
    run(2'b01, 100, JDEPTH, P1_LAT);
    run(2'b10, 100, JDEPTH, P2_LAT);
    compare(JDEPTH, "run2");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
