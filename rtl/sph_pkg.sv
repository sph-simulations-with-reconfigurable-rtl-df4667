// sph_pkg: number formats, arithmetic operators and address map shared by the
// SPH pipelines, the processor FPGA and the interface FPGA.
//
// Floating point ("FP25"): 1 sign bit, 8-bit exponent (bias 127) and a 16-bit
// fraction with a hidden leading one, i.e. IEEE single precision cut down to the
// 16-bit fraction and 8-bit exponent the pipelines use. An exponent of zero
// means zero; there are no denormals, infinities or NaNs. Results are truncated
// (rounded toward zero) and saturate to the largest magnitude on overflow. The
// format widths follow the accuracy study behind the design; the encoding,
// rounding and exception handling are this design's own choices.
//
// The operators are combinational functions. Each pipeline stage calls a few of
// them between two register ranks, so a stage holds one or two operators in
// series. Fixed-point helpers convert to and from the two's-complement formats
// of the kernel unit and of the force accumulators.
//
// The local-bus address map of the processor FPGA and the host address map of
// the interface FPGA are also defined here (see proc_fpga and iface_unit).
package sph_pkg;

  localparam int FP_EXP_W  = 8;
  localparam int FP_FRAC_W = 16;
  localparam int FP_W      = 1 + FP_EXP_W + FP_FRAC_W;  // 25
  localparam int FP_BIAS   = 127;

  typedef struct packed {
    logic                 s;
    logic [FP_EXP_W-1:0]  e;
    logic [FP_FRAC_W-1:0] f;
  } fp_t;

  localparam fp_t FP_ZERO    = '{s: 1'b0, e: 8'd0,   f: 16'h0000};
  localparam fp_t FP_ONE     = '{s: 1'b0, e: 8'd127, f: 16'h0000};
  localparam fp_t FP_TWO     = '{s: 1'b0, e: 8'd128, f: 16'h0000};
  localparam fp_t FP_0P01    = '{s: 1'b0, e: 8'd120, f: 16'h47AE};  // 0.01
  localparam fp_t FP_INV_PI  = '{s: 1'b0, e: 8'd125, f: 16'h45F3};  // 1/pi
  localparam fp_t FP_MAX     = '{s: 1'b0, e: 8'd254, f: 16'hFFFF};

  // Fixed-point formats.
  localparam int KFRAC   = 22;  // kernel unit: q^2, q, w(q), g(q)
  localparam int ACC_W   = 64;  // f-register width (8 bytes per result)
  localparam int ACC_FRAC = 32; // f-register binary point

  // Pipeline geometry.
  localparam int NFREG    = 8;   // f-registers per pipeline
  localparam int P1_IW    = 7;   // stage 1 i-data: x y z vx vy vz h
  localparam int P1_JW    = 8;   //        j-data: the same plus m
  localparam int P2_IW    = 11;  // stage 2 i-data: x y z vx vy vz h rho c P/rho^2 f
  localparam int P2_JW    = 12;  //        j-data: the same plus m
  localparam int P1_LAT   = 9;   // j_valid in -> f-register updated
  localparam int P2_LAT   = 11;

  // Word positions inside i/j-data.
  localparam int W_X = 0, W_Y = 1, W_Z = 2, W_VX = 3, W_VY = 4, W_VZ = 5, W_H = 6;
  localparam int W1_M = 7;
  localparam int W2_RHO = 7, W2_C = 8, W2_PR = 9, W2_F = 10, W2_M = 11;

  // ------------------------------------------------------------------
  // Processor FPGA local-bus map (20-bit word address, 64-bit data).
  //   [19:18]=00 control: [3:0] = CR_*
  //   [19:18]=01 j-data : [16:13] word pair, [12:0] j index
  //   [19:18]=10 i-data : [7:4] pipeline, [3:0] word pair
  //   [19:18]=11 f-data : [7:4] pipeline, [8]=1 use FSEL, else [2:0] register
  // Two FP25 words travel per 64-bit transfer, in bits [24:0] and [56:32].
  localparam int LB_AW = 20;
  localparam logic [1:0] RG_CTRL = 2'b00, RG_JMEM = 2'b01, RG_IREG = 2'b10, RG_FREG = 2'b11;
  localparam logic [3:0] CR_NJ = 4'd0, CR_START = 4'd1, CR_STATUS = 4'd2,
                         CR_ALPHA = 4'd3, CR_BETA = 4'd4, CR_FSEL = 4'd5;

  // Interface FPGA host map (24-bit word address):
  //   [23:20] chip mask (0 = interface registers), [19:0] local-bus address
  //   interface registers: 0 COLLECT (write), 1 STATUS (read),
  //   [19]=1 f-buffer read, [15:0] = global pipeline * NFREG + register
  localparam int HOST_AW = 24;

  // ------------------------------------------------------------------
  function automatic logic fp_is_zero(fp_t a);
    return a.e == '0;
  endfunction

  function automatic fp_t fp_neg(fp_t a);
    fp_t r;
    r = a;
    r.s = ~a.s & (a.e != '0);
    return r;
  endfunction

  // a <= 0
  function automatic logic fp_nonpos(fp_t a);
    return a.s || (a.e == '0);
  endfunction

  // Pack a biased exponent (may be out of range) and a fraction.
  function automatic fp_t fp_pack(logic s, int e, logic [FP_FRAC_W-1:0] f);
    fp_t r;
    if (e <= 0) r = FP_ZERO;
    else if (e >= 255) begin
      r = FP_MAX;
      r.s = s;
    end else begin
      r.s = s;
      r.e = e[7:0];
      r.f = f;
    end
    return r;
  endfunction

  function automatic fp_t fp_mul(fp_t a, fp_t b);
    logic [16:0] ma, mb;
    logic [33:0] p;
    int          e;
    if (a.e == '0 || b.e == '0) return FP_ZERO;
    ma = {1'b1, a.f};
    mb = {1'b1, b.f};
    p  = ma * mb;
    e  = int'(a.e) + int'(b.e) - FP_BIAS;
    if (p[33]) return fp_pack(a.s ^ b.s, e + 1, p[32:17]);
    else       return fp_pack(a.s ^ b.s, e, p[31:16]);
  endfunction

  function automatic fp_t fp_add(fp_t a, fp_t b);
    fp_t         big, sml;
    int          d, lz, e;
    logic [19:0] mbig, msml;  // 1.f followed by 3 guard bits
    logic [20:0] sum;
    logic [19:0] nrm;
    if (a.e == '0) return b;
    if (b.e == '0) return a;
    if ({a.e, a.f} >= {b.e, b.f}) begin big = a; sml = b; end
    else begin big = b; sml = a; end
    d    = int'(big.e) - int'(sml.e);
    mbig = {1'b1, big.f, 3'b000};
    msml = (d > 19) ? 20'd0 : ({1'b1, sml.f, 3'b000} >> d);
    if (big.s == sml.s) begin
      sum = {1'b0, mbig} + {1'b0, msml};
      if (sum[20]) return fp_pack(big.s, int'(big.e) + 1, sum[19:4]);
      else         return fp_pack(big.s, int'(big.e), sum[18:3]);
    end
    sum = {1'b0, mbig} - {1'b0, msml};
    if (sum == '0) return FP_ZERO;
    lz = 0;
    for (int i = 19; i >= 0; i--) begin
      if (sum[i]) break;
      lz++;
    end
    nrm = sum[19:0] << lz;
    e   = int'(big.e) - lz;
    return fp_pack(big.s, e, nrm[18:3]);
  endfunction

  function automatic fp_t fp_sub(fp_t a, fp_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp_t fp_div(fp_t a, fp_t b);
    logic [33:0] num;
    logic [33:0] q;
    int          e;
    if (a.e == '0) return FP_ZERO;
    if (b.e == '0) return fp_pack(a.s ^ b.s, 255, '1);  // x/0 saturates
    num = {1'b1, a.f, 17'd0};
    q   = num / {17'd0, 1'b1, b.f};   // in (2^16, 2^18)
    e   = int'(a.e) - int'(b.e) + FP_BIAS;
    if (q[17]) return fp_pack(a.s ^ b.s, e, q[16:1]);
    else       return fp_pack(a.s ^ b.s, e - 1, q[15:0]);
  endfunction

  // a / 2
  function automatic fp_t fp_half(fp_t a);
    fp_t r;
    r = a;
    if (a.e <= 8'd1) r = FP_ZERO;
    else r.e = a.e - 8'd1;
    return r;
  endfunction

  // Signed 32-bit fixed point with `frac` fraction bits -> FP25.
  function automatic fp_t fp_from_fix32(logic signed [31:0] x, int frac);
    logic        s;
    logic [31:0] mag, nrm;
    int          lz;
    if (x == 0) return FP_ZERO;
    s   = x[31];
    mag = s ? 32'(-x) : 32'(x);
    lz  = 0;
    for (int i = 31; i >= 0; i--) begin
      if (mag[i]) break;
      lz++;
    end
    nrm = mag << lz;
    return fp_pack(s, FP_BIAS + (31 - lz) - frac, nrm[30:15]);
  endfunction

  // FP25 -> signed 64-bit fixed point with `frac` fraction bits (saturating).
  function automatic logic signed [63:0] fp_to_fix64(fp_t a, int frac);
    logic [63:0] mag;
    int          sh;
    if (a.e == '0) return '0;
    sh = int'(a.e) - FP_BIAS - FP_FRAC_W + frac;
    if (sh > 46) mag = 64'h7FFF_FFFF_FFFF_FFFF;
    else if (sh >= 0) mag = {47'd0, 1'b1, a.f} << sh;
    else if (sh < -17) mag = '0;
    else mag = {47'd0, 1'b1, a.f} >> (-sh);
    return a.s ? -$signed(mag) : $signed(mag);
  endfunction

  // FP25 -> unsigned 32-bit fixed point with `frac` fraction bits,
  // negative values give 0 and large values saturate to all ones.
  function automatic logic [31:0] fp_to_ufix32(fp_t a, int frac);
    logic signed [63:0] v;
    v = fp_to_fix64(a, frac);
    if (v < 0) return '0;
    if (v > 64'sh0000_0000_FFFF_FFFF) return '1;
    return v[31:0];
  endfunction

  // Unpack two FP25 words from a 64-bit bus word.
  function automatic fp_t lo_word(logic [63:0] d);
    return fp_t'(d[24:0]);
  endfunction
  function automatic fp_t hi_word(logic [63:0] d);
    return fp_t'(d[56:32]);
  endfunction

endpackage
