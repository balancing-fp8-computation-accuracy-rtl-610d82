// dcim_tb_pkg: reference models shared by the testbenches of the FP8 DCIM
// macro. They are written from the arithmetic definitions (FP8 fields,
// shift-aware bitwidth formula, truncating alignment, slice fusion), not from
// the RTL structure.
package dcim_tb_pkg;

  // FP8 code -> effective exponent and signed integer mantissa (hidden bit explicit)
  function automatic void fp8_fields(input int code, input int ebits,
                                     output int e, output int m);
    int mbits, ef, fr;
    mbits = 7 - ebits;
    ef = (code >> mbits) & ((1 << ebits) - 1);
    fr = code & ((1 << mbits) - 1);
    m  = (ef != 0) ? (fr + (1 << mbits)) : fr;
    e  = (ef != 0) ? ef : 1;
    if (code[7]) m = -m;
  endfunction

  // real value of an FP8 code (no inf/NaN)
  function automatic real fp8_real(input int code, input int ebits);
    int e, m;
    fp8_fields(code, ebits, e, m);
    return real'(m) * (2.0 ** (e - ((1 << (ebits - 1)) - 1) - (7 - ebits)));
  endfunction

  // top L bits of (s >> d), s being a mw-bit two's-complement value: floor(s*2^(L-mw-d))
  function automatic longint align_ref(input int s, input int mw, input int d, input int L);
    int sh;
    sh = L - mw - d;
    if (sh >= 0) return longint'(s) * (longint'(1) << sh);
    return longint'(s) >>> (-sh);   // arithmetic: floor
  endfunction

  // bit-exact model of the predictor's fixed-point recipe (FRAC = 8)
  function automatic int mpu_ref(input int sh[64], input int k2, input int bfix);
    int sx, sw, lead, m, r, bd, b;
    sx = 0; sw = 0;
    for (int i = 0; i < 64; i++) begin
      sx += ((sh[i] * 256) >> sh[i]);
      sw += (256 >> sh[i]);
    end
    if (sw == 0) bd = 0;
    else begin
      lead = 0;
      while ((sw >> (lead + 1)) != 0) lead++;
      m = (lead >= 7) ? (sw >> (lead - 7)) : (sw << (7 - lead));
      r = ((1 << 15) + m / 2) / m;
      if (r > 255) r = 255;
      bd = (sx * r) >> (lead + 4);
    end
    b = (bd * k2 + bfix * 32 + 16) >> 5;
    if (b > 31) b = 31;
    if (b > 11) b = 11;
    if (b < 1)  b = 1;
    return b;
  endfunction

  // the same formula in real arithmetic, rounded, limited to 1..11
  function automatic int mpu_real(input int sh[64], input int k2, input int bfix);
    real sx, sw, b;
    int bi;
    sx = 0.0; sw = 0.0;
    for (int i = 0; i < 64; i++) begin
      sx += real'(sh[i]) * (2.0 ** (-sh[i]));
      sw += 2.0 ** (-sh[i]);
    end
    b  = real'(k2) / 2.0 * sx / sw + real'(bfix);
    bi = int'($floor(b + 0.5));
    if (bi > 11) bi = 11;
    if (bi < 1)  bi = 1;
    return bi;
  endfunction

  // FP32 bit pattern -> real
  function automatic real fp32_real(input logic [31:0] f);
    real v;
    int fr, ex;
    if (f[30:23] == 8'd0) return 0.0;
    fr = int'(f[22:0]);
    ex = int'(f[30:23]) - 127;
    v = (1.0 + real'(fr) / 8388608.0) * (2.0 ** ex);
    return f[31] ? -v : v;
  endfunction

  // true when an FP32 result is the truncation of `exact`
  function automatic bit fp32_close(input logic [31:0] f, input real exact);
    real got, tol;
    got = fp32_real(f);
    tol = (exact < 0 ? -exact : exact) * (2.0 ** -22);
    return (got - exact <= tol) && (exact - got <= tol);
  endfunction

endpackage
