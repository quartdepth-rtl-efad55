// qd_fp_pkg: IEEE-754 binary32 arithmetic used by the VCU lanes.
//
// Combinational functions for add, multiply, integer <-> float conversion and
// the two special functions log2 and exp2. The paper asks for FP32 FPUs whose
// special-function unit evaluates log2 and exp by polynomial approximation in a
// few cycles; the tables and formats below are this design's own.
//
// Conventions (this design's choices): round-to-nearest-even everywhere;
// subnormal inputs and results are flushed to signed zero; overflow gives a
// signed infinity; NaN inputs are not distinguished from infinities.
//
// Special functions. The mantissa range [1,2) is split into SEG = 64 equal
// segments. Within segment i, centred at c_i = 1 + (2i+1)/128, the function is
// a cubic Taylor polynomial in d = x - c_i, evaluated in Horner form with
// 30-bit fixed-point fractions:
//   log2(x) ~ log2(c) + d/(c ln2) - d^2/(2 c^2 ln2) + d^3/(3 c^3 ln2)
//   2^f     ~ 2^c (1 + d ln2 + (d ln2)^2/2 + (d ln2)^3/6),  f in [0,1)
// The coefficient tables are computed during elaboration from series for ln
// and exp (constant functions below), so no table file is needed. The
// truncation error of the cubic is below 2^-28 over a segment, leaving the
// 30-bit fixed point and the final rounding as the main error sources.
// log2 is split into log2_fix (polynomial, first SFU cycle) and fix2fp
// (normalisation, second SFU cycle); exp2 likewise into exp2_fix and exp2_pack.
package qd_fp_pkg;

  parameter int SEG_B = 6;
  parameter int SEG   = 1 << SEG_B;
  parameter int FRAC  = 30;

  typedef logic signed [63:0] coef_tab_t [SEG*4];   // entry 4*i+k: coefficient k of segment i

  // ------------------------------------------------ elaboration-time math
  function automatic real ln_r(input real x);
    real z, zp, s;
    z  = (x - 1.0) / (x + 1.0);
    zp = z;
    s  = 0.0;
    for (int j = 0; j < 40; j++) begin
      s  = s + zp / real'(2 * j + 1);
      zp = zp * z * z;
    end
    return 2.0 * s;
  endfunction

  function automatic real exp_r(input real t);
    real term, s;
    term = 1.0;
    s    = 1.0;
    for (int k = 1; k < 30; k++) begin
      term = term * t / real'(k);
      s    = s + term;
    end
    return s;
  endfunction

  function automatic logic signed [63:0] to_fix(input real v);
    real sc;
    sc = v * 1073741824.0;  // 2^30
    if (sc >= 0.0) return 64'($rtoi(sc + 0.5));
    else           return -64'($rtoi(-sc + 0.5));
  endfunction

  function automatic coef_tab_t mk_log2_tab();
    coef_tab_t t;
    real c, l2;
    l2 = ln_r(2.0);
    for (int i = 0; i < SEG; i++) begin
      c = 1.0 + real'(2 * i + 1) / real'(2 * SEG);
      t[4*i+0] = to_fix(ln_r(c) / l2);
      t[4*i+1] = to_fix(1.0 / (c * l2));
      t[4*i+2] = to_fix(-1.0 / (2.0 * c * c * l2));
      t[4*i+3] = to_fix(1.0 / (3.0 * c * c * c * l2));
    end
    return t;
  endfunction

  function automatic coef_tab_t mk_exp2_tab();
    coef_tab_t t;
    real c, l2, p;
    l2 = ln_r(2.0);
    for (int i = 0; i < SEG; i++) begin
      c = real'(2 * i + 1) / real'(2 * SEG);
      p = exp_r(c * l2);
      t[4*i+0] = to_fix(p);
      t[4*i+1] = to_fix(p * l2);
      t[4*i+2] = to_fix(p * l2 * l2 / 2.0);
      t[4*i+3] = to_fix(p * l2 * l2 * l2 / 6.0);
    end
    return t;
  endfunction

  parameter coef_tab_t LOG2_TAB = mk_log2_tab();
  parameter coef_tab_t EXP2_TAB = mk_exp2_tab();

  // ------------------------------------------------ helpers
  function automatic logic [31:0] fabs(input logic [31:0] a);
    return {1'b0, a[30:0]};
  endfunction

  function automatic logic is_zero(input logic [31:0] a);
    return a[30:23] == 8'd0;
  endfunction

  // Round a 24-bit mantissa with guard and sticky bits, then pack.
  function automatic logic [31:0] pack(input logic s, input logic signed [11:0] e,
                                       input logic [23:0] m, input logic g, input logic st);
    logic [24:0] mr;
    logic signed [11:0] ee;
    mr = {1'b0, m} + {24'd0, g & (st | m[0])};
    ee = e;
    if (mr[24]) begin
      mr = mr >> 1;
      ee = ee + 12'sd1;
    end
    if (ee <= 12'sd0)   return {s, 31'd0};
    if (ee >= 12'sd255) return {s, 8'hFF, 23'd0};
    return {s, ee[7:0], mr[22:0]};
  endfunction

  // ------------------------------------------------ multiply
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    logic s;
    logic [47:0] p;
    logic signed [11:0] e;
    s = a[31] ^ b[31];
    if (is_zero(a) || is_zero(b)) return {s, 31'd0};
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 12'($signed({4'd0, a[30:23]})) + 12'($signed({4'd0, b[30:23]})) - 12'sd127;
    if (p[47]) return pack(s, e + 12'sd1, p[47:24], p[23], |p[22:0]);
    else       return pack(s, e, p[46:23], p[22], |p[21:0]);
  endfunction

  // ------------------------------------------------ add
  function automatic logic [31:0] fadd(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [7:0]  d;
    logic [26:0] mx, my, mask;
    logic [27:0] sum;
    logic signed [11:0] e;
    if (is_zero(a)) return is_zero(b) ? 32'd0 : b;
    if (is_zero(b)) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) my = 27'd1;
    else begin
      mask = (27'd1 << d) - 27'd1;
      my   = (my >> d) | 27'(|(my & mask));
    end
    e = 12'($signed({4'd0, x[30:23]}));
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, my};
    else                sum = {1'b0, mx} - {1'b0, my};
    if (sum == 28'd0) return 32'd0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 12'sd1;
    end else begin
      for (int i = 0; i < 26; i++) begin
        if (!sum[26]) begin
          sum = sum << 1;
          e   = e - 12'sd1;
        end
      end
    end
    return pack(x[31], e, sum[26:3], sum[2], sum[1] | sum[0]);
  endfunction

  // ------------------------------------------------ fixed point -> float
  // v is a signed fixed-point number with `frac` fractional bits.
  function automatic logic [31:0] fix2fp(input logic signed [63:0] v, input int frac);
    logic s;
    logic [63:0] u, n;
    int p;
    if (v == 64'sd0) return 32'd0;
    s = v[63];
    u = s ? 64'(-v) : 64'(v);
    p = 0;
    for (int i = 0; i < 64; i++) if (u[i]) p = i;
    n = u << (63 - p);
    return pack(s, 12'(p - frac + 127), n[63:40], n[39], |n[38:0]);
  endfunction

  function automatic logic [31:0] int2fp(input logic signed [31:0] v);
    return fix2fp(64'(v), 0);
  endfunction

  // ------------------------------------------------ float -> int, round to nearest even
  function automatic logic signed [31:0] fp2int(input logic [31:0] a);
    logic [63:0] m, ip, rem, half, u;
    int sh;
    if (is_zero(a)) return 32'sd0;
    if (a[30:23] >= 8'd158) return a[31] ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
    m  = {40'd0, 1'b1, a[22:0]};
    sh = int'(a[30:23]) - 150;
    if (sh >= 0) u = m << sh;
    else if (sh < -25) u = 64'd0;
    else begin
      ip   = m >> (-sh);
      rem  = m & ((64'd1 << (-sh)) - 64'd1);
      half = 64'd1 << (-sh - 1);
      u    = ip + 64'((rem > half) || (rem == half && ip[0]));
    end
    return a[31] ? -32'(u) : 32'(u);
  endfunction

  // ------------------------------------------------ log2, polynomial part
  // Returns log2(a) as a signed fixed-point value with FRAC fractional bits.
  // a must be positive and normal; zero gives -128.
  function automatic logic signed [63:0] log2_fix(input logic [31:0] a);
    logic [SEG_B-1:0] i;
    logic signed [63:0] d, t;
    if (is_zero(a)) return -(64'sd128 <<< FRAC);
    i = a[22:23-SEG_B];
    d = $signed({34'd0, a[22:0], 7'd0}) - $signed(64'(2 * int'(i) + 1) << (FRAC - SEG_B - 1));
    t = LOG2_TAB[4*int'(i)+3];
    t = LOG2_TAB[4*int'(i)+2] + ((t * d) >>> FRAC);
    t = LOG2_TAB[4*int'(i)+1] + ((t * d) >>> FRAC);
    t = LOG2_TAB[4*int'(i)+0] + ((t * d) >>> FRAC);
    return t + ((64'($signed({4'd0, a[30:23]})) - 64'sd127) <<< FRAC);
  endfunction

  // ------------------------------------------------ exp2, polynomial part
  // Splits y into n = floor(y) and f = y - n, returns n and 2^f (FRAC bits).
  typedef struct packed {
    logic signed [11:0] n;
    logic signed [63:0] p;
    logic [1:0]         sat;   // 01: overflow, 10: underflow
  } exp2_t;

  function automatic exp2_t exp2_fix(input logic [31:0] a);
    exp2_t r;
    logic signed [63:0] v, f, d, t;
    logic [63:0] m;
    int sh;
    logic [SEG_B-1:0] i;
    r.sat = 2'b00;
    r.n   = 12'sd0;
    r.p   = 64'sd1 <<< FRAC;
    if (is_zero(a)) return r;
    if (a[30:23] >= 8'd134) begin   // |a| >= 128
      r.sat = a[31] ? 2'b10 : 2'b01;
      return r;
    end
    m  = {40'd0, 1'b1, a[22:0]};
    sh = int'(a[30:23]) - 120;      // a * 2^30 = m * 2^(e-127-23+30)
    if (sh >= 0) v = $signed(m << sh);
    else if (sh < -30) v = 64'sd0;
    else v = $signed(m >> (-sh));
    if (a[31]) v = -v;
    r.n = 12'(v >>> FRAC);
    f   = v & ((64'sd1 <<< FRAC) - 64'sd1);
    i   = f[FRAC-1:FRAC-SEG_B];
    d   = f - $signed(64'(2 * int'(i) + 1) << (FRAC - SEG_B - 1));
    t   = EXP2_TAB[4*int'(i)+3];
    t   = EXP2_TAB[4*int'(i)+2] + ((t * d) >>> FRAC);
    t   = EXP2_TAB[4*int'(i)+1] + ((t * d) >>> FRAC);
    r.p = EXP2_TAB[4*int'(i)+0] + ((t * d) >>> FRAC);
    return r;
  endfunction

  function automatic logic [31:0] exp2_pack(input exp2_t r);
    logic [31:0] m;
    logic signed [11:0] e;
    if (r.sat == 2'b01) return {1'b0, 8'hFF, 23'd0};
    if (r.sat == 2'b10) return 32'd0;
    m = fix2fp(r.p, FRAC);          // value in [1,2], exponent 127 or 128
    e = 12'($signed({4'd0, m[30:23]})) + r.n;
    if (e <= 12'sd0)   return 32'd0;
    if (e >= 12'sd255) return {1'b0, 8'hFF, 23'd0};
    return {1'b0, e[7:0], m[22:0]};
  endfunction

endpackage
