// sph_pipe2: second-stage SPH pipeline (pressure acceleration and rate of
// change of internal energy, with artificial viscosity).
//
// The i-register holds r_i, v_i, h_i, rho_i, c_i, A_i = P_i/rho_i^2 and the
// shear-limiter factor f_i (computed by the host from the first-stage
// results). Each clock the pipeline may take one j-particle with the same
// quantities plus m_j and adds to four f-registers
//   f0..f2  dv_i/dt += -m_j (A_i + A_j + Pi_ij) grad W        (x, y, z)
//   f3      du_i/dt +=  m_j (A_i + Pi_ij/2) (v_i - v_j) . grad W
// where, with r_ij = r_i - r_j, v_ij = v_i - v_j and averages
// x_ij = (x_i + x_j)/2 for h, c, rho and f,
//   mu_ij = h_ij (v_ij . r_ij) / (|r_ij|^2 + 0.01 h_ij^2)
//   Pi_ij = f_ij (-alpha c_ij mu_ij + beta mu_ij^2) / rho_ij  if v_ij . r_ij <= 0
//         = 0                                                  otherwise
//   m_j grad W = m_j g(q) / (pi h_ij^5) r_ij              (see sph_kernel)
// f4..f7 stay zero. These equations, the floating-point operators with a
// fixed-point kernel and fixed-point sums, and one interaction per clock
// follow the design this implements; alpha and beta arrive as inputs (run-time
// registers of the processor FPGA), and the stage split is this design's own.
//
// Stages: 1 differences and sums of pairs, 2 products and averages,
// 3 r^2, v.r, 1/h, 0.01 h^2, 4 q^2, 1/h^2, 1/h^3 and mu's numerator and
// denominator, 5 kernel cycle 1, mu, f/rho, m/(pi h^5), 6 kernel cycle 2,
// alpha c mu, beta mu^2, 7 gradient factor and viscosity numerator, 8 Pi,
// 9 the two coefficients, 10 the four terms, 11 f-registers. A j-particle
// accepted at a clock edge is in the f-registers P2_LAT = 11 edges later.
//
// i-register writes: ireg_we with ireg_pair selects words 2*pair, 2*pair+1
// (x y | z vx | vy vz | h rho | c A | f -).
module sph_pipe2
  import sph_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ireg_we,
  input  logic [2:0]              ireg_pair,
  input  fp_t  [1:0]              ireg_wdata,
  input  fp_t                     alpha,
  input  fp_t                     beta,
  input  logic                    acc_clear,
  input  logic                    j_valid,
  input  fp_t  [P2_JW-1:0]        j_data,
  input  logic [2:0]              freg_sel,
  output logic signed [ACC_W-1:0] freg_data
);

  // ---------------- i-register
  fp_t [11:0] ireg;  // word 11 unused
  always_ff @(posedge clk) begin
    if (!rst_n) ireg <= '0;
    else if (ireg_we && ireg_pair < 3'd6) begin
      ireg[{ireg_pair, 1'b0}] <= ireg_wdata[0];
      ireg[{ireg_pair, 1'b1}] <= ireg_wdata[1];
    end
  end

  logic [10:1] v;
  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[9:1], j_valid};
  end

  // ---------------- stage 1
  fp_t [2:0] dx1, dv1;
  fp_t       hs1, cs1, rs1, fs1, pa1, ai1, m1;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      dx1[k] <= fp_sub(ireg[W_X + k], j_data[W_X + k]);
      dv1[k] <= fp_sub(ireg[W_VX + k], j_data[W_VX + k]);
    end
    hs1 <= fp_add(ireg[W_H], j_data[W_H]);
    cs1 <= fp_add(ireg[W2_C], j_data[W2_C]);
    rs1 <= fp_add(ireg[W2_RHO], j_data[W2_RHO]);
    fs1 <= fp_add(ireg[W2_F], j_data[W2_F]);
    pa1 <= fp_add(ireg[W2_PR], j_data[W2_PR]);
    ai1 <= ireg[W2_PR];
    m1  <= j_data[W2_M];
  end

  // ---------------- stage 2
  fp_t [2:0] dx2, sq2, dot2;
  fp_t       h2, c2, r2, f2, pa2, ai2, m2;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      sq2[k]  <= fp_mul(dx1[k], dx1[k]);
      dot2[k] <= fp_mul(dv1[k], dx1[k]);
    end
    h2 <= fp_half(hs1);
    c2 <= fp_half(cs1);
    r2 <= fp_half(rs1);
    f2 <= fp_half(fs1);
    dx2 <= dx1; pa2 <= pa1; ai2 <= ai1; m2 <= m1;
  end

  // ---------------- stage 3
  fp_t [2:0] dx3;
  fp_t       rr3, vr3, ih3, hh3, h3, c3, rho3, f3, pa3, ai3, m3;
  always_ff @(posedge clk) begin
    rr3 <= fp_add(fp_add(sq2[0], sq2[1]), sq2[2]);
    vr3 <= fp_add(fp_add(dot2[0], dot2[1]), dot2[2]);
    ih3 <= fp_div(FP_ONE, h2);
    hh3 <= fp_mul(fp_mul(h2, h2), FP_0P01);
    h3 <= h2; c3 <= c2; rho3 <= r2; f3 <= f2;
    dx3 <= dx2; pa3 <= pa2; ai3 <= ai2; m3 <= m2;
  end

  // ---------------- stage 4
  fp_t [2:0] dx4;
  fp_t       q2_4, ih2_4, ih3_4, den4, num4, vr4, c4, rho4, f4, pa4, ai4, m4;
  always_ff @(posedge clk) begin
    q2_4  <= fp_mul(fp_mul(rr3, ih3), ih3);
    ih2_4 <= fp_mul(ih3, ih3);
    ih3_4 <= fp_mul(fp_mul(ih3, ih3), ih3);
    den4  <= fp_add(rr3, hh3);
    num4  <= fp_mul(h3, vr3);
    vr4 <= vr3; c4 <= c3; rho4 <= rho3; f4 <= f3;
    dx4 <= dx3; pa4 <= pa3; ai4 <= ai3; m4 <= m3;
  end

  // ---------------- stages 5, 6: kernel
  logic               kv;
  logic signed [31:0] kw, kg;
  logic               kin;
  sph_kernel u_kernel (
    .clk(clk), .rst_n(rst_n), .in_valid(v[4]), .q2(fp_to_ufix32(q2_4, KFRAC)),
    .out_valid(kv), .w(kw), .g(kg), .in_range(kin)
  );

  fp_t [2:0] dx5, dx6;
  fp_t       mu5, fr5, mh5_5, c5, vr5, pa5, ai5;
  fp_t       t1_6, t2_6, fr6, mh5_6, vr6, pa6, ai6;
  always_ff @(posedge clk) begin
    mu5   <= fp_div(num4, den4);
    fr5   <= fp_div(f4, rho4);
    mh5_5 <= fp_mul(fp_mul(fp_mul(m4, ih3_4), FP_INV_PI), ih2_4);
    c5 <= c4; vr5 <= vr4; dx5 <= dx4; pa5 <= pa4; ai5 <= ai4;
    t1_6  <= fp_mul(fp_mul(alpha, c5), mu5);
    t2_6  <= fp_mul(fp_mul(beta, mu5), mu5);
    fr6 <= fr5; mh5_6 <= mh5_5; vr6 <= vr5; dx6 <= dx5; pa6 <= pa5; ai6 <= ai5;
  end

  // ---------------- stage 7
  fp_t [2:0] dx7;
  fp_t       gw7, pn7, fr7, vr7, pa7, ai7;
  always_ff @(posedge clk) begin
    gw7 <= fp_mul(mh5_6, fp_from_fix32(kg, KFRAC));
    pn7 <= fp_sub(t2_6, t1_6);
    fr7 <= fr6; vr7 <= vr6; dx7 <= dx6; pa7 <= pa6; ai7 <= ai6;
  end

  // ---------------- stage 8: artificial viscosity
  fp_t [2:0] dx8;
  fp_t       pi8, gw8, vr8, pa8, ai8;
  always_ff @(posedge clk) begin
    pi8   <= fp_nonpos(vr7) ? fp_mul(pn7, fr7) : FP_ZERO;
    gw8 <= gw7; vr8 <= vr7; dx8 <= dx7; pa8 <= pa7; ai8 <= ai7;
  end

  // ---------------- stage 9: coefficients
  fp_t [2:0] dx9;
  fp_t       kv9, ku9;
  always_ff @(posedge clk) begin
    kv9 <= fp_mul(fp_add(pa8, pi8), gw8);
    ku9 <= fp_mul(fp_mul(fp_add(ai8, fp_half(pi8)), gw8), vr8);
    dx9 <= dx8;
  end

  // ---------------- stage 10: terms
  fp_t [NFREG-1:0] term10;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) term10[k] <= fp_neg(fp_mul(kv9, dx9[k]));
    term10[3] <= ku9;
    for (int k = 4; k < NFREG; k++) term10[k] <= FP_ZERO;
  end

  // ---------------- stage 11: f-registers
  logic signed [ACC_W-1:0] fsum [NFREG];
  for (genvar r = 0; r < NFREG; r++) begin : g_acc
    f_accum u_acc (
      .clk(clk), .rst_n(rst_n), .clear(acc_clear), .add_valid(v[10]),
      .term(term10[r]), .sum(fsum[r])
    );
  end

  assign freg_data = fsum[freg_sel];

  a_kernel_aligned: assert property (@(posedge clk) disable iff (!rst_n) kv == v[6]);

endmodule
