// tb_pkg: reference models shared by the testbenches.
//
// Everything here is written from the number-format definitions, independently of the
// RTL: FP16/FP32 decoding through real arithmetic, FP4 code values from the encoding
// table, FP8 product decoding, nearest-grid quantization by exhaustive search over the
// 16 codes, and an FP16 round-to-nearest-even encoder.
package tb_pkg;

  function automatic real pow2(input int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp16_to_real(input logic [15:0] h);
    real m;
    if (h[14:10] == 0) m = real'(h[9:0]) * pow2(-24);
    else               m = (1.0 + real'(h[9:0]) / 1024.0) * pow2(int'(h[14:10]) - 15);
    return h[15] ? -m : m;
  endfunction

  function automatic real fp32_to_real(input logic [31:0] f);
    real m;
    if (f[30:23] == 0) return 0.0;
    m = (1.0 + real'(f[22:0]) / 8388608.0) * pow2(int'(f[30:23]) - 127);
    return f[31] ? -m : m;
  endfunction

  // Round a real to FP16 (normal range), nearest even.
  function automatic logic [15:0] real_to_fp16(input real v);
    real  a, m;
    int   e;
    longint q;
    logic s;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a < pow2(-14)) return {s, 15'd0};
    e = 0;
    while (a >= pow2(e + 1)) e++;
    while (a < pow2(e)) e--;
    m = a / pow2(e) * 1024.0;              // in [1024, 2048)
    q = longint'($floor(m));
    if (m - real'(q) > 0.5 || (m - real'(q) == 0.5 && q[0])) q++;
    if (q == 2048) begin q = 1024; e++; end
    return {s, 5'(e + 15), 10'(q - 1024)};
  endfunction

  // Values of FP4 codes (encoding table of the formats).
  function automatic real e2m1_val(input logic [3:0] c);
    real t [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    return c[3] ? -t[c[2:0]] : t[c[2:0]];
  endfunction

  function automatic real e1m2_val(input logic [3:0] c);
    real t [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 2.5, 3.0, 3.5};
    return c[3] ? -t[c[2:0]] : t[c[2:0]];
  endfunction

  // DFQ code value: sign set -> E1M2 negative part, clear -> E2M1 positive part.
  function automatic real dfq_val(input logic [3:0] c);
    return c[3] ? e1m2_val(c) : e2m1_val(c);
  endfunction

  // FP8 product format: S1 E3M4, bias 2, E=0 subnormal.
  function automatic real fp8_val(input logic [7:0] f);
    real m;
    if (f[6:4] == 0) m = real'(f[3:0]) / 32.0;
    else             m = (1.0 + real'(f[3:0]) / 16.0) * pow2(int'(f[6:4]) - 2);
    return f[7] ? -m : m;
  endfunction

  // Nearest code on a grid, ties toward the larger magnitude.  fmt: 0 = E2M1,
  // 1 = E1M2 restricted to non-positive values, 2 = E2M1 restricted to non-negative.
  function automatic logic [3:0] nearest_code(input real r, input int fmt);
    logic [3:0] best;
    real        bd, d, v, bv;
    best = 4'b0000; bd = 1.0e30; bv = 0.0;
    for (int c = 0; c < 16; c++) begin
      if (c == 8) continue;                               // -0 duplicate
      v = (fmt == 1) ? e1m2_val(4'(c)) : e2m1_val(4'(c));
      if (fmt == 1 && v > 0.0) continue;
      if (fmt == 2 && v < 0.0) continue;
      d = (r - v) < 0.0 ? v - r : r - v;
      if (d < bd || (d == bd && ((v < 0 ? -v : v) > (bv < 0 ? -bv : bv)))) begin
        bd = d; best = 4'(c); bv = v;
      end
    end
    return best;
  endfunction

  // Quantizer reference as the hardware scheme defines it: the scaled value r = x/s is
  // first taken to the integer grid of 2r (nearest, ties away from zero), then that
  // integer is mapped to the nearest code of the format (ties to larger magnitude).
  function automatic logic [3:0] lut_quant(input real r, input int fmt);
    real q;
    q = $floor(rabs(2.0 * r) + 0.5);
    if (r < 0.0) q = -q;
    return nearest_code(q / 2.0, fmt);
  endfunction

  // Random finite FP16 with exponent field in [emin, emax].
  function automatic logic [15:0] rand_fp16(input int emin, input int emax, input bit neg_ok);
    logic [15:0] h;
    h[15]    = neg_ok ? 1'($urandom) : 1'b0;
    h[14:10] = 5'(emin + int'($urandom % (emax - emin + 1)));
    h[9:0]   = 10'($urandom);
    return h;
  endfunction

  function automatic real rabs(input real x);
    return x < 0.0 ? -x : x;
  endfunction

endpackage
