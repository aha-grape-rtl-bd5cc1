// aha_pkg: number format, pipeline latencies and shared arithmetic for the
// SPH density pipeline.
//
// Numbers are 28-bit floating point: 1 sign bit, 7 exponent bits and 20
// mantissa bits, the split used for the FPGA implementation of the SPH loop.
// The field order, the hidden leading one, the exponent bias of 63 and the
// handling of special values are this design's own choices:
//   value = (-1)^sign * 2^(exp-63) * 1.man     for exp != 0
//   value = 0                                  for exp == 0 (man ignored)
// There are no infinities, NaNs or subnormals. Results that overflow saturate
// to the largest magnitude, results that underflow flush to zero, and all
// rounding is by truncation.
//
// The functions here are the combinational cores of the arithmetic blocks.
// The blocks split them over register stages; the density accumulator uses
// f28_uadd in one cycle because its sum feeds straight back.
package aha_pkg;

  localparam int EXP_W   = 7;
  localparam int MAN_W   = 20;
  localparam int FP_W    = 1 + EXP_W + MAN_W;   // 28
  localparam int BIAS    = 63;
  localparam int EXP_MAX = (1 << EXP_W) - 1;     // 127

  // Width of the particle tag carried through the pipeline: 2^26 (6.7e7)
  // covers the largest SPH particle counts (a few 10^7) the machine targets.
  localparam int TAG_W = 26;

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } f28_t;

  localparam f28_t F28_ZERO = '0;
  localparam f28_t F28_ONE  = '{sign: 1'b0, exp: 7'(BIAS), man: '0};

  // Register stages of each operator (none is deeper than six).
  localparam int LAT_ADD = 2;   // align | add + normalise
  localparam int LAT_MUL = 2;   // mantissa product | normalise
  localparam int LAT_LUT = 2;   // address + exponent | table read
  localparam int LAT_KER = 2;   // table address | table read
  localparam int LAT_ACC = 1;   // accumulate

  // Schedule of the pair pipeline (cycle at which each value is valid,
  // counted from the cycle a pair enters).
  localparam int T_SUB  = LAT_ADD;          // dx, dy, dz, h_i + h_j
  localparam int T_SQ   = T_SUB + LAT_MUL;  // dx^2, dy^2, dz^2
  localparam int T_S1   = T_SQ + LAT_ADD;   // dx^2 + dz^2
  localparam int T_S2   = T_S1 + LAT_ADD;   // + dy^2
  localparam int T_R    = T_S2 + LAT_LUT;   // r_ij
  localparam int T_RH   = T_SUB + LAT_LUT;  // 1/h_ij
  localparam int T_RH3  = T_RH + LAT_LUT;   // 1/h_ij^3
  localparam int T_X    = T_R + LAT_MUL;    // X = r_ij / h_ij
  localparam int T_W    = T_X + LAT_KER;    // W(X)
  localparam int T_WM   = T_W + LAT_MUL;    // m_j W(X)
  localparam int T_C    = T_WM + LAT_MUL;   // m_j W(X) / h_ij^3
  localparam int PIPE_LAT = T_C + LAT_ACC;  // density out after last pair

  // One neighbour pair (i, j) as it enters the pipeline.
  typedef struct packed {
    logic             first;   // first neighbour of particle i: start from rho0
    logic             last;    // last neighbour of particle i: emit rho_i
    logic [TAG_W-1:0] tag;     // identifies particle i at the output
    f28_t             xi, yi, zi, hi, rho0;
    f28_t             xj, yj, zj, hj, mj;
  } sph_pair_t;

  // ---------------------------------------------------------------- adder
  localparam int GRD  = 3;                 // guard bits below the mantissa
  localparam int AM_W = MAN_W + 1 + GRD;   // aligned mantissa width

  typedef struct packed {
    logic             sign;   // sign of the larger operand
    logic             sub;    // operands have opposite signs
    logic [EXP_W-1:0] exp;    // exponent of the larger operand
    logic [AM_W-1:0]  ma;     // larger mantissa, hidden one, guard bits
    logic [AM_W-1:0]  mb;     // smaller mantissa shifted to ma's exponent
  } f28_aligned_t;

  function automatic f28_t f28_neg(f28_t a);
    f28_t r = a;
    r.sign = ~a.sign;
    return r;
  endfunction

  function automatic f28_t f28_sat(logic sign);
    f28_t r;
    r.sign = sign;
    r.exp  = '1;
    r.man  = '1;
    return r;
  endfunction

  // Stage 1 of an addition: order the operands by magnitude and shift the
  // smaller one right by the exponent difference.
  function automatic f28_aligned_t f28_align(f28_t a, f28_t b);
    f28_aligned_t r;
    f28_t big, sml;
    logic [EXP_W-1:0] d;
    logic [AM_W-1:0] m;
    if ({a.exp, a.man} >= {b.exp, b.man}) begin
      big = a; sml = b;
    end else begin
      big = b; sml = a;
    end
    d      = big.exp - sml.exp;
    r.sign = big.sign;
    r.sub  = a.sign ^ b.sign;
    r.exp  = big.exp;
    r.ma   = (big.exp == '0) ? '0 : {1'b1, big.man, {GRD{1'b0}}};
    m      = (sml.exp == '0) ? '0 : {1'b1, sml.man, {GRD{1'b0}}};
    r.mb   = (int'(d) >= AM_W) ? '0 : (m >> d);
    return r;
  endfunction

  // Stage 2 of an addition: add or subtract the aligned mantissas and
  // renormalise (leading-one search, shift, exponent adjust).
  function automatic f28_t f28_addnorm(f28_aligned_t r);
    logic [AM_W:0] s, sn;
    int msb, e;
    f28_t o;
    s = r.sub ? ({1'b0, r.ma} - {1'b0, r.mb}) : ({1'b0, r.ma} + {1'b0, r.mb});
    msb = 0;
    for (int i = 0; i <= AM_W; i++)
      if (s[i]) msb = i;
    e  = int'(r.exp) + msb - (AM_W - 1);
    sn = s << (AM_W - msb);
    o.sign = r.sign;
    o.exp  = e[EXP_W-1:0];
    o.man  = sn[AM_W-1 -: MAN_W];
    if (s == '0 || e <= 0) return F28_ZERO;
    if (e > EXP_MAX) return f28_sat(r.sign);
    return o;
  endfunction

  function automatic f28_t f28_add(f28_t a, f28_t b);
    return f28_addnorm(f28_align(a, b));
  endfunction

  // Add of two magnitudes (signs are ignored). The sum lies in [1, 4) times
  // the larger operand, so normalising needs at most a one-bit right shift.
  function automatic f28_t f28_uadd(f28_t a, f28_t b);
    f28_aligned_t r;
    logic [AM_W:0] s;
    int e;
    f28_t o;
    r = f28_align({1'b0, a.exp, a.man}, {1'b0, b.exp, b.man});
    s = {1'b0, r.ma} + {1'b0, r.mb};
    o.sign = 1'b0;
    if (s[AM_W]) begin
      e     = int'(r.exp) + 1;
      o.man = s[AM_W-1 -: MAN_W];
    end else begin
      e     = int'(r.exp);
      o.man = s[AM_W-2 -: MAN_W];
    end
    o.exp = e[EXP_W-1:0];
    if (r.exp == '0) return F28_ZERO;
    if (e > EXP_MAX) return f28_sat(1'b0);
    return o;
  endfunction

  // ----------------------------------------------------------- multiplier
  typedef struct packed {
    logic                   sign;
    logic                   zero;
    logic signed [EXP_W+2:0] exp;    // biased exponent of the product
    logic [2*MAN_W+1:0]     prod;   // product of the 21-bit mantissas
  } f28_mulpart_t;

  function automatic f28_mulpart_t f28_mul_s1(f28_t a, f28_t b);
    f28_mulpart_t p;
    p.sign = a.sign ^ b.sign;
    p.zero = (a.exp == '0) || (b.exp == '0);
    p.exp  = $signed({3'b0, a.exp}) + $signed({3'b0, b.exp}) - (EXP_W+3)'(BIAS);
    p.prod = {1'b1, a.man} * {1'b1, b.man};
    return p;
  endfunction

  function automatic f28_t f28_mul_s2(f28_mulpart_t p);
    logic signed [EXP_W+2:0] e;
    f28_t o;
    o.sign = p.sign;
    if (p.prod[2*MAN_W+1]) begin
      e     = p.exp + 1;
      o.man = p.prod[2*MAN_W -: MAN_W];
    end else begin
      e     = p.exp;
      o.man = p.prod[2*MAN_W-1 -: MAN_W];
    end
    o.exp = e[EXP_W-1:0];
    if (p.zero || e <= 0) return F28_ZERO;
    if (e > (EXP_W+3)'(EXP_MAX)) return f28_sat(p.sign);
    return o;
  endfunction

  function automatic f28_t f28_mul(f28_t a, f28_t b);
    return f28_mul_s2(f28_mul_s1(a, b));
  endfunction

  // Division by two, as used for the mean smoothing length.
  function automatic f28_t f28_half(f28_t a);
    f28_t o = a;
    if (a.exp <= 7'd1) return F28_ZERO;
    o.exp = a.exp - 7'd1;
    return o;
  endfunction

  // ------------------------------------------------- table construction
  // Converts an unsigned fixed-point number with FRAC fraction bits into the
  // 28-bit format (truncating). Used at elaboration to fill look-up tables.
  function automatic f28_t fix_to_f28(logic [127:0] v, int frac);
    int msb, e;
    logic [127:0] n;
    f28_t o;
    msb = 0;
    for (int i = 0; i < 128; i++)
      if (v[i]) msb = i;
    e = msb - frac + BIAS;
    n = v << (127 - msb);
    o.sign = 1'b0;
    o.exp  = e[EXP_W-1:0];
    o.man  = n[126 -: MAN_W];
    if (v == '0 || e <= 0) return F28_ZERO;
    if (e > EXP_MAX) return f28_sat(1'b0);
    return o;
  endfunction

  // Integer square root (bit by bit), used to fill the root table.
  function automatic logic [63:0] isqrt64(logic [63:0] v);
    logic [63:0] r, b, x;
    x = v;
    r = '0;
    b = 64'd1 << 62;
    for (int i = 0; i < 32; i++) begin
      if (x >= r + b) begin
        x = x - (r + b);
        r = (r >> 1) + b;
      end else begin
        r = r >> 1;
      end
      b = b >> 2;
    end
    return r;
  endfunction

endpackage
