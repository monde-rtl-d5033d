// tb_fp_pkg: reference number conversions for the testbenches, written
// independently of the RTL arithmetic. Integers are converted to bf16/fp32
// with round-to-nearest-even by locating the leading one and inspecting the
// dropped bits; floating-point bit patterns are turned into reals by
// evaluating (-1)^s * 2^(e-bias) * 1.f.
package tb_fp_pkg;

  // Round an integer to a float with 'mbits' fraction bits (7 for bf16,
  // 23 for fp32), round to nearest even. Returns {sign, exp, frac} packed
  // in the low 1+8+mbits bits.
  function automatic logic [31:0] int_to_float(longint v, int mbits);
    logic        s;
    longint      mag;
    int          p;
    longint      keep, rem, half;
    logic [31:0] r;
    if (v == 0) return 32'd0;
    s   = (v < 0);
    mag = s ? -v : v;
    p   = 0;
    for (int i = 0; i < 62; i++) if ((mag >> i) & 1) p = i;
    if (p <= mbits) begin
      keep = mag << (mbits - p);
    end else begin
      keep = mag >> (p - mbits);
      rem  = mag & ((64'sd1 << (p - mbits)) - 1);
      half = 64'sd1 << (p - mbits - 1);
      if (rem > half || (rem == half && (keep & 1))) keep = keep + 1;
      if (keep >> (mbits + 1)) begin
        keep = keep >> 1;
        p    = p + 1;
      end
    end
    r = 32'(s) << (8 + mbits);
    r = r | (32'(p + 127) << mbits) | 32'(keep & ((64'sd1 << mbits) - 1));
    return r;
  endfunction

  function automatic logic [15:0] int_to_bf16(longint v);
    return 16'(int_to_float(v, 7));
  endfunction

  function automatic logic [31:0] int_to_fp32(longint v);
    return int_to_float(v, 23);
  endfunction

  function automatic real pow2(int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp32_to_real(logic [31:0] f);
    real m;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    m = m * pow2(int'(f[30:23]) - 127);
    return f[31] ? -m : m;
  endfunction

  function automatic real bf16_to_real(logic [15:0] h);
    return fp32_to_real({h, 16'd0});
  endfunction

  // Random bf16 with a modest exponent range, never zero or special.
  function automatic logic [15:0] rand_bf16(int emin, int emax);
    logic [15:0] h;
    h[15]   = 1'($urandom);
    h[14:7] = 8'(127 + emin + int'($urandom % (emax - emin + 1)));
    h[6:0]  = 7'($urandom);
    return h;
  endfunction

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

endpackage
