// sph_kernel: fixed-point cubic-spline kernel unit.
//
// From q^2 = |r_i - r_j|^2 / h_ij^2 it returns, two clock cycles later,
//   w(q) = 1 - 3/2 q^2 + 3/4 q^3      (0 <= q < 1)
//        = 1/4 (2 - q)^3              (1 <= q < 2)
//        = 0                          (q >= 2)
//   g(q) = (dw/dq) / q = -3 + 9/4 q   (0 <= q < 1)
//        = -3/4 (2 - q)^2 / q         (1 <= q < 2)
//        = 0                          (q >= 2)
// and the flag in_range = (q < 2). The pipelines scale these by 1/(pi h^3) and
// 1/(pi h^5): W = w/(pi h^3) and grad W = g/(pi h^5) * (r_i - r_j), so the
// gradient never divides by r and is finite at r = 0.
//
// As in the design this follows, the kernel is evaluated in fixed point, not
// floating point. All values carry KFRAC = 22 fraction bits; q^2 is unsigned,
// saturated by the caller, and w and g are signed 32-bit. q is found with a
// bit-serial integer square root unrolled into cycle 1; the polynomials and
// the one division by q are in cycle 2. The outer branch uses the cube of
// (2 - q), i.e. Monaghan's spline; the fixed-point widths, the g(q) form and
// the two-cycle timing are this design's own choices.
//
// Interface: in_valid/q2 in, out_valid/w/g/in_range out, latency 2, one result
// per clock.
module sph_kernel
  import sph_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [31:0]        q2,
  output logic               out_valid,
  output logic signed [31:0] w,
  output logic signed [31:0] g,
  output logic               in_range
);

  localparam logic [31:0] FOUR = 32'(4) << KFRAC;
  localparam logic [63:0] ONE  = 64'(1) << KFRAC;

  // Integer square root of a 46-bit radicand (23-bit root).
  function automatic logic [22:0] isqrt46(logic [45:0] x);
    logic [45:0] rem;
    logic [22:0] root;
    logic [47:0] trial;
    rem  = x;
    root = '0;
    for (int i = 22; i >= 0; i--) begin
      trial = ({25'd0, root} << (i + 1)) | (48'd1 << (2 * i));
      if ({2'b00, rem} >= trial) begin
        rem  = 46'({2'b00, rem} - trial);
        root = root | (23'd1 << i);
      end
    end
    return root;
  endfunction

  // ---------------- cycle 1: range check and q = sqrt(q^2)
  logic        v1, in1;
  logic [31:0] q2_1;
  logic [22:0] q_1;

  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
    in1  <= (q2 < FOUR);
    q2_1 <= q2;
    q_1  <= isqrt46({q2[23:0], 22'd0});
  end

  // ---------------- cycle 2: polynomials
  logic signed [63:0] q, qq, q3, t, t2, t3, wn, gn;

  always_comb begin
    q  = $signed({41'd0, q_1});
    qq = $signed({32'd0, q2_1});
    q3 = (qq * q) >>> KFRAC;
    t  = $signed(64'(2) << KFRAC) - q;
    t2 = (t * t) >>> KFRAC;
    t3 = (t2 * t) >>> KFRAC;
    if (!in1) begin
      wn = '0;
      gn = '0;
    end else if (q < $signed(ONE)) begin
      wn = $signed(ONE) - ((3 * qq) >>> 1) + ((3 * q3) >>> 2);
      gn = -$signed(64'(3) << KFRAC) + ((9 * q) >>> 2);
    end else begin
      wn = t3 >>> 2;
      gn = -((((3 * t2) >>> 2) <<< KFRAC) / q);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
    w      <= 32'(wn);
    g      <= 32'(gn);
    in_range <= in1;
  end

endmodule
