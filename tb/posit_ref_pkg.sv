// posit_ref_pkg: reference models used by the testbenches.
//
// These are written independently of the RTL: posits are decoded and encoded
// by walking the bit string one bit at a time (regime run, exponent bits,
// fraction bits) and rounding the infinite bit string to nearest-even, and FP32
// numbers are converted through real arithmetic.  Nothing here is meant for
// synthesis.
package posit_ref_pkg;

  typedef struct {
    bit         nar;
    bit         zero;
    bit         sign;
    int         scale;
    bit [22:0]  frac;
  } ref_unp_t;

  // 2.0 ** e for integer e (exact for the ranges used).
  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // floor(a / 2^es) for signed a
  function automatic int floor_div_pow2(int a, int es);
    int p = 1 << es;
    if (a >= 0) return a / p;
    return -((-a + p - 1) / p);
  endfunction

  // ---- posit decode by walking the bits ----------------------------------
  function automatic ref_unp_t ref_posit_decode(int n, bit [31:0] bits_in, int es);
    ref_unp_t u;
    bit [31:0] mask = (n == 32) ? 32'hFFFF_FFFF : ((32'h1 << n) - 1);
    bit [31:0] bits = bits_in & mask;
    bit [31:0] mag;
    int i, run, k, e, pos;
    bit first;
    u.nar = 0; u.zero = 0; u.sign = 0; u.scale = 0; u.frac = '0;
    if (bits == 0) begin u.zero = 1; return u; end
    if (bits == (32'h1 << (n - 1))) begin u.nar = 1; u.sign = 1; return u; end
    u.sign = bits[n-1];
    mag = u.sign ? ((~bits + 1) & mask) : bits;
    i = n - 2;
    first = mag[i];
    run = 0;
    while (i >= 0 && mag[i] == first) begin run++; i--; end
    k = first ? run - 1 : -run;
    i--;                                   // terminating regime bit
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e * 2 + ((i >= 0) ? int'(mag[i]) : 0);
      i--;
    end
    pos = 22;
    while (i >= 0) begin u.frac[pos] = mag[i]; pos--; i--; end
    u.scale = k * (1 << es) + e;
    return u;
  endfunction

  // ---- posit encode by building the bit string and rounding ---------------
  function automatic bit [31:0] ref_posit_encode(int n, int es, ref_unp_t u);
    bit b [0:63];
    int len, k, e, p;
    bit [31:0] body, res, mask;
    bit guard, sticky;
    mask = (32'h1 << n) - 1;
    if (u.nar)  return 32'h1 << (n - 1);
    if (u.zero) return 0;
    p = 1 << es;
    k = floor_div_pow2(u.scale, es);
    e = u.scale - k * p;
    if (k >= n - 2) begin
      body = (32'h1 << (n - 1)) - 1;          // maxpos
    end else if (k < -(n - 2)) begin
      body = 1;                              // minpos
    end else begin
      len = 0;
      if (k >= 0) begin
        for (int j = 0; j <= k; j++) b[len++] = 1;
        b[len++] = 0;
      end else begin
        for (int j = 0; j < -k; j++) b[len++] = 0;
        b[len++] = 1;
      end
      for (int j = es - 1; j >= 0; j--) b[len++] = e[j];
      for (int j = 22; j >= 0; j--) b[len++] = u.frac[j];
      body = 0;
      for (int j = 0; j < n - 1; j++) body = (body << 1) | 32'(b[j]);
      guard = b[n-1];
      sticky = 0;
      for (int j = n; j < len; j++) sticky |= b[j];
      if (guard && (body[0] || sticky)) body = body + 1;
    end
    res = u.sign ? ((~body + 1) & mask) : body;
    return res;
  endfunction

  // ---- FP32 <-> real --------------------------------------------------------
  function automatic real fp32_to_real(bit [31:0] f);
    int ex = int'(f[30:23]);
    real m;
    if (ex == 0) m = real'(f[22:0]) * pow2(-149);
    else         m = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(ex - 127);
    return f[31] ? -m : m;
  endfunction

  // Round real x to FP32, nearest-even.  err is the exact residue of x (x+err
  // is the true value) used only to break exact ties.
  function automatic bit [31:0] real_to_fp32(real x, real err = 0.0);
    bit s = (x < 0.0);
    real a = s ? -x : x;
    int e;
    real q, m, rem;
    longint fl;
    bit up;
    if (a == 0.0) return {s, 31'b0};
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    if (e > 127) return {s, 8'hFF, 23'b0};
    q = (e < -126) ? pow2(-149) : pow2(e - 23);
    m = a / q;
    fl = longint'($floor(m));
    rem = m - real'(fl);
    if (rem > 0.5) up = 1;
    else if (rem < 0.5) up = 0;
    else if (err != 0.0) up = ((err > 0.0) != s);
    else up = fl[0];
    if (up) fl++;
    if (e < -126) return {s, 31'(fl)};
    if (fl == 64'd16777216) begin fl = 8388608; e++; end
    if (e > 127) return {s, 8'hFF, 23'b0};
    return {s, 8'(e + 127), 23'(fl)};
  endfunction

  // FP32 word -> unpacked (loop normalisation of subnormals)
  function automatic ref_unp_t ref_fp32_unpack(bit [31:0] f);
    ref_unp_t u;
    bit [23:0] m;
    int sc;
    u.nar = (f[30:23] == 8'hFF);
    u.zero = (f[30:0] == 0);
    u.sign = f[31];
    if (f[30:23] != 0) begin
      u.scale = int'(f[30:23]) - 127;
      u.frac = f[22:0];
    end else begin
      m = {1'b0, f[22:0]};
      sc = -126;
      while (!m[23] && m != 0) begin m = m << 1; sc--; end
      u.scale = sc;
      u.frac = m[22:0];
    end
    return u;
  endfunction

  // Unpacked -> FP32 as the input codec should produce it: exact when normal,
  // nearest-even subnormals, saturation above the FP32 range.
  function automatic bit [31:0] ref_unp_to_fp32(ref_unp_t u);
    real v;
    if (u.nar)  return 32'h7FC0_0000;
    if (u.zero) return 32'h0;
    if (u.scale > 127) return {u.sign, 8'hFE, 23'h7F_FFFF};
    if (u.scale < -160) return {u.sign, 31'b0};
    v = (1.0 + real'(u.frac) / 8388608.0) * pow2(u.scale);
    return {u.sign, 31'(real_to_fp32(v))};
  endfunction

  // ---- FP32 arithmetic of the original FPU (behavioural) -------------------
  // Supported: fadd/fsub/fmul/fdiv/fsqrt.s, fmin/fmax.s, feq/flt/fle.s, fsgnj*.s
  // and the four fused multiply-add forms.  Results are correctly rounded
  // (nearest-even): +,-,*,/,sqrt are computed in double and rounded once more
  // (harmless for these operations); the fused forms use an exact two-sum.
  function automatic bit is_nan32(bit [31:0] f);
    return (f[30:23] == 8'hFF) && (f[22:0] != 0);
  endfunction

  function automatic bit [31:0] fp32_execute(bit [31:0] instr, bit [31:0] a,
                                             bit [31:0] b, bit [31:0] c,
                                             output bit [4:0] flags);
    bit [6:0] opc = instr[6:0];
    bit [4:0] f5  = instr[31:27];
    bit [2:0] rm  = instr[14:12];
    real x, y, z, p, s, bb, err;
    flags = '0;
    x = fp32_to_real(a); y = fp32_to_real(b); z = fp32_to_real(c);
    if (opc != 7'h53) begin
      // fused multiply-add family
      if (is_nan32(a) || is_nan32(b) || is_nan32(c)) return 32'h7FC0_0000;
      p = x * y;
      if (opc == 7'h4B || opc == 7'h4F) p = -p;
      if (opc == 7'h47 || opc == 7'h4F) z = -z;
      s = p + z; bb = s - p; err = (p - (s - bb)) + (z - bb);
      flags[0] = (err != 0.0);
      return real_to_fp32(s, err);
    end
    case (f5)
      5'h00, 5'h01, 5'h02, 5'h03, 5'h0B: begin
        if (is_nan32(a) || (f5 != 5'h0B && is_nan32(b))) return 32'h7FC0_0000;
        case (f5)
          5'h00: return real_to_fp32(x + y);
          5'h01: return real_to_fp32(x - y);
          5'h02: return real_to_fp32(x * y);
          5'h03: begin
            if (y == 0.0) begin
              if (x == 0.0) begin flags[4] = 1; return 32'h7FC0_0000; end
              flags[3] = 1;
              return {a[31] ^ b[31], 8'hFF, 23'b0};
            end
            return real_to_fp32(x / y);
          end
          default: begin
            if (x < 0.0) begin flags[4] = 1; return 32'h7FC0_0000; end
            return real_to_fp32($sqrt(x));
          end
        endcase
      end
      5'h04: case (rm)
        3'b000:  return {b[31], a[30:0]};
        3'b001:  return {~b[31], a[30:0]};
        default: return {a[31] ^ b[31], a[30:0]};
      endcase
      5'h05: begin
        if (is_nan32(a)) return b;
        if (is_nan32(b)) return a;
        if (rm == 3'b000) return (x <= y) ? a : b;
        return (x >= y) ? a : b;
      end
      5'h14: begin
        if (is_nan32(a) || is_nan32(b)) return 0;
        case (rm)
          3'b010:  return 32'(x == y);
          3'b001:  return 32'(x < y);
          default: return 32'(x <= y);
        endcase
      end
      default: return 32'h7FC0_0000;
    endcase
  endfunction

endpackage
