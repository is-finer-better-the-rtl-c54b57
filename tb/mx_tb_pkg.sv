// mx_tb_pkg: reference arithmetic for the MXFP4 testbenches.
//
// Everything here works on SystemVerilog real (IEEE double) numbers and on
// plain searches over all codes of a format, independently of the RTL's
// bit-level algorithms: an FP8 or FP4 value is rounded by scanning every
// code for the nearest one (ties to the even code), an FP32 value by
// rounding the double's 52-bit mantissa to 23 bits.
package mx_tb_pkg;

  function automatic real pow2(input int n);
    real v;
    v = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) v = v * 2.0;
    else        for (int i = 0; i < -n; i++) v = v / 2.0;
    return v;
  endfunction

  function automatic real fp32_to_real(input logic [31:0] b);
    real m;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    m = m * pow2(int'(b[30:23]) - 127);
    return b[31] ? -m : m;
  endfunction

  // Round to FP32, nearest-even; subnormals flush to zero, overflow -> Inf.
  function automatic logic [31:0] real_to_fp32(input real r);
    logic [63:0] d;
    int          e;
    logic [24:0] m;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return 32'd0;
    e = int'(d[62:52]) - 1023 + 127;
    m = {2'b01, d[51:29]};
    if (d[28] && ((|d[27:0]) || d[29])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 1; end
    if (e >= 255) return {d[63], 8'hff, 23'd0};
    if (e <= 0)   return 32'd0;
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // Unsigned scale with eb exponent bits and 3 mantissa bits.
  function automatic real uscale_to_real(input logic [7:0] c, input int eb);
    int bias, e;
    int m;
    bias = (1 << (eb - 1)) - 1;
    e    = int'(c[7:3]) & ((1 << eb) - 1);
    m    = int'(c[2:0]);
    if (e == 0) return real'(m) / 8.0 * pow2(1 - bias);
    return (1.0 + real'(m) / 8.0) * pow2(e - bias);
  endfunction

  // Signed FP8 with eb exponent bits and mb mantissa bits.
  function automatic real sfp8_to_real(input logic [7:0] c, input int eb, input int mb);
    int bias, e, m;
    real v;
    bias = (1 << (eb - 1)) - 1;
    e    = int'(c[6:0]) >> mb;
    m    = int'(c[6:0]) & ((1 << mb) - 1);
    if (e == 0) v = real'(m) / real'(1 << mb) * pow2(1 - bias);
    else        v = (1.0 + real'(m) / real'(1 << mb)) * pow2(e - bias);
    return c[7] ? -v : v;
  endfunction

  function automatic real fp4_to_real(input logic [3:0] c);
    real t [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    return c[3] ? -t[c[2:0]] : t[c[2:0]];
  endfunction

  // Nearest FP8 code by search. fmt: 0 = E4M3, 1 = E5M2, 2 = UE5M3.
  // Exponent field all ones is excluded; above the range saturates.
  function automatic logic [7:0] ref_fp8(input real r, input int fmt);
    int  eb, mb, ncodes;
    real a, best, v, dd;
    logic [7:0] bc, c;
    logic       neg;
    eb  = (fmt == 0) ? 4 : 5;
    mb  = (fmt == 1) ? 2 : 3;
    neg = (r < 0.0);
    a   = neg ? -r : r;
    ncodes = ((1 << eb) - 1) << mb;        // codes below the all-ones exponent
    best = 1.0e300; bc = '0;
    for (int k = 0; k < ncodes; k++) begin
      c = 8'(k);
      if (fmt == 2) v = uscale_to_real(c, 5);
      else          v = sfp8_to_real(c, eb, mb);
      dd = (v > a) ? v - a : a - v;
      if (dd < best || (dd == best && c[0] == 1'b0)) begin
        best = dd; bc = c;
      end
    end
    if (fmt != 2 && neg) bc[7] = 1'b1;
    return bc;
  endfunction

  // Nearest FP4 E2M1 code (ties to even code), saturating at 6.
  function automatic logic [3:0] ref_fp4(input real r);
    real t [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    real a, best, dd;
    logic [2:0] bc;
    a = (r < 0.0) ? -r : r;
    best = 1.0e300; bc = '0;
    for (int k = 0; k < 8; k++) begin
      dd = (t[k] > a) ? t[k] - a : a - t[k];
      if (dd < best || (dd == best && k[0] == 1'b0)) begin
        best = dd; bc = 3'(k);
      end
    end
    return {(r < 0.0) && (bc != 3'd0), bc};
  endfunction

  // A random FP32 with unbiased exponent in [emin, emax].
  function automatic logic [31:0] rand_fp32(input int emin, input int emax);
    int e;
    e = emin + int'($urandom_range(0, emax - emin));
    return {1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction

endpackage
