// sph_pipe1: first-stage SPH pipeline (density, velocity divergence and curl,
// neighbour count).
//
// The i-register holds one i-particle: position r_i, velocity v_i and
// smoothing length h_i. Each clock the pipeline may take one j-particle
// (r_j, v_j, h_j, m_j) and adds its contribution to six f-registers:
//   f0  rho_i            += m_j W(r_ij; h_ij)
//   f1  rho_i (div v)_i  += m_j (v_j - v_i) . grad W
//   f2..f4 rho_i (rot v)_i += m_j (v_j - v_i) x grad W   (x, y, z)
//   f5  n_i              += 1 if |r_ij| < 2 h_ij
// with r_ij = r_i - r_j, h_ij = (h_i + h_j)/2, W = w(q)/(pi h_ij^3),
// grad W = g(q)/(pi h_ij^5) r_ij and q = |r_ij|/h_ij (see sph_kernel).
// f6 and f7 stay zero. The equations, the symmetrised h_ij, the floating-point
// arithmetic with a fixed-point kernel and fixed-point sums, and the rate of
// one interaction per clock follow the design this implements. The neighbour
// estimate is a plain count of j within 2 h_ij; the pipeline depth and the
// order of operations are this design's own.
//
// Stages (one register rank each):
//   1 r_ij, v_j - v_i, h_i + h_j       5 kernel cycle 1; m/(pi h^3), m/(pi h^5)
//   2 squares, dot and cross products  6 kernel cycle 2
//   3 r^2, 1/h_ij, sums                7 W term, gradient factor
//   4 q^2, 1/h^2, 1/h^3                8 the six terms
//   9 f-registers
// A j-particle presented with j_valid at a clock edge is in the f-registers
// P1_LAT = 9 edges later. acc_clear zeroes the f-registers.
//
// i-register writes: ireg_we with ireg_pair selects words 2*pair and
// 2*pair+1 (x y | z vx | vy vz | h). f-registers are read combinationally
// through freg_sel.
module sph_pipe1
  import sph_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ireg_we,
  input  logic [2:0]              ireg_pair,
  input  fp_t  [1:0]              ireg_wdata,
  input  logic                    acc_clear,
  input  logic                    j_valid,
  input  fp_t  [P1_JW-1:0]        j_data,
  input  logic [2:0]              freg_sel,
  output logic signed [ACC_W-1:0] freg_data
);

  // ---------------- i-register
  fp_t [7:0] ireg;  // word 7 unused
  always_ff @(posedge clk) begin
    if (!rst_n) ireg <= '0;
    else if (ireg_we) begin
      ireg[{ireg_pair, 1'b0}] <= ireg_wdata[0];
      ireg[{ireg_pair, 1'b1}] <= ireg_wdata[1];
    end
  end

  logic [8:1] v;  // stage valid bits
  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[7:1], j_valid};
  end

  // ---------------- stage 1
  fp_t [2:0] dx1, dv1;
  fp_t       hs1, m1;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      dx1[k] <= fp_sub(ireg[W_X + k], j_data[W_X + k]);
      dv1[k] <= fp_sub(j_data[W_VX + k], ireg[W_VX + k]);
    end
    hs1 <= fp_add(ireg[W_H], j_data[W_H]);
    m1  <= j_data[W1_M];
  end

  // ---------------- stage 2
  fp_t [2:0] sq2, dot2, cp2, cn2;
  fp_t       h2, m2;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      sq2[k]  <= fp_mul(dx1[k], dx1[k]);
      dot2[k] <= fp_mul(dv1[k], dx1[k]);
    end
    // (dv x dx)_x = dvy dz - dvz dy, and cyclic
    cp2[0] <= fp_mul(dv1[1], dx1[2]);  cn2[0] <= fp_mul(dv1[2], dx1[1]);
    cp2[1] <= fp_mul(dv1[2], dx1[0]);  cn2[1] <= fp_mul(dv1[0], dx1[2]);
    cp2[2] <= fp_mul(dv1[0], dx1[1]);  cn2[2] <= fp_mul(dv1[1], dx1[0]);
    h2  <= fp_half(hs1);
    m2  <= m1;
  end

  // ---------------- stage 3
  fp_t       r2_3, ih3, vr3, m3;
  fp_t [2:0] cr3;
  always_ff @(posedge clk) begin
    r2_3 <= fp_add(fp_add(sq2[0], sq2[1]), sq2[2]);
    vr3  <= fp_add(fp_add(dot2[0], dot2[1]), dot2[2]);
    ih3  <= fp_div(FP_ONE, h2);
    for (int k = 0; k < 3; k++) cr3[k] <= fp_sub(cp2[k], cn2[k]);
    m3 <= m2;
  end

  // ---------------- stage 4
  fp_t       q2_4, ih2_4, ih3_4, vr4, m4;
  fp_t [2:0] cr4;
  always_ff @(posedge clk) begin
    q2_4  <= fp_mul(fp_mul(r2_3, ih3), ih3);
    ih2_4 <= fp_mul(ih3, ih3);
    ih3_4 <= fp_mul(fp_mul(ih3, ih3), ih3);
    vr4   <= vr3;
    cr4   <= cr3;
    m4    <= m3;
  end

  // ---------------- stages 5, 6: kernel
  logic               kv;
  logic signed [31:0] kw, kg;
  logic               kin;
  sph_kernel u_kernel (
    .clk(clk), .rst_n(rst_n), .in_valid(v[4]), .q2(fp_to_ufix32(q2_4, KFRAC)),
    .out_valid(kv), .w(kw), .g(kg), .in_range(kin)
  );

  fp_t       mh3_5, mh5_5, vr5, mh3_6, mh5_6, vr6;
  fp_t [2:0] cr5, cr6;
  always_ff @(posedge clk) begin
    mh3_5 <= fp_mul(fp_mul(m4, ih3_4), FP_INV_PI);
    mh5_5 <= fp_mul(fp_mul(fp_mul(m4, ih3_4), FP_INV_PI), ih2_4);
    vr5   <= vr4;
    cr5   <= cr4;
    mh3_6 <= mh3_5;
    mh5_6 <= mh5_5;
    vr6   <= vr5;
    cr6   <= cr5;
  end

  // ---------------- stage 7
  fp_t       rho7, gw7, vr7;
  fp_t [2:0] cr7;
  logic      in7;
  always_ff @(posedge clk) begin
    rho7 <= fp_mul(mh3_6, fp_from_fix32(kw, KFRAC));
    gw7  <= fp_mul(mh5_6, fp_from_fix32(kg, KFRAC));
    in7  <= kin;
    vr7  <= vr6;
    cr7  <= cr6;
  end

  // ---------------- stage 8: terms
  fp_t [NFREG-1:0] term8;
  always_ff @(posedge clk) begin
    term8[0] <= rho7;
    term8[1] <= fp_mul(gw7, vr7);
    for (int k = 0; k < 3; k++) term8[2 + k] <= fp_mul(gw7, cr7[k]);
    term8[5] <= in7 ? FP_ONE : FP_ZERO;
    term8[6] <= FP_ZERO;
    term8[7] <= FP_ZERO;
  end

  // ---------------- stage 9: f-registers
  logic signed [ACC_W-1:0] fsum [NFREG];
  for (genvar r = 0; r < NFREG; r++) begin : g_acc
    f_accum u_acc (
      .clk(clk), .rst_n(rst_n), .clear(acc_clear), .add_valid(v[8]),
      .term(term8[r]), .sum(fsum[r])
    );
  end

  assign freg_data = fsum[freg_sel];

  // The kernel's own valid must line up with stage 6.
  a_kernel_aligned: assert property (@(posedge clk) disable iff (!rst_n) kv == v[6]);

endmodule
