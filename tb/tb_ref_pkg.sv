// tb_ref_pkg: reference arithmetic for the Flex-SFU testbenches.
//
// Element values are decoded to real numbers independently of the design:
// fixed point as two's complement integers, floating point with an explicit
// exponent/mantissa split (8-bit E4M3, 16-bit IEEE half, 32-bit IEEE single).
// The reference segment of x is the number of breakpoints strictly below x,
// found by a linear scan.
package tb_ref_pkg;
  import flex_sfu_pkg::*;

  function automatic int nelem(width_e w);
    return (w == W8) ? 4 : (w == W16) ? 2 : 1;
  endfunction

  function automatic int ebits(width_e w);
    return (w == W8) ? 8 : (w == W16) ? 16 : 32;
  endfunction

  function automatic logic [31:0] field(logic [31:0] word, int k, width_e w);
    int n = ebits(w);
    return 32'((64'(word) >> (n * k)) & ((64'd1 << n) - 1));
  endfunction

  function automatic logic [31:0] put(logic [31:0] word, int k, width_e w, logic [31:0] v);
    int n = ebits(w);
    logic [31:0] mask = 32'(((64'd1 << n) - 1) << (n * k));
    return (word & ~mask) | ((v << (n * k)) & mask);
  endfunction

  function automatic real to_real(logic [31:0] v, width_e w, logic flt);
    int n = ebits(w);
    int eb, mb, bias, e;
    logic s;
    longint m;
    real r;
    if (!flt) begin
      longint x = longint'(v);
      if (v[n-1]) x = x - (longint'(1) << n);
      return real'(x);
    end
    eb   = (n == 8) ? 4 : (n == 16) ? 5 : 8;
    mb   = n - 1 - eb;
    bias = (1 << (eb - 1)) - 1;
    s    = v[n-1];
    e    = int'((v >> mb) & ((1 << eb) - 1));
    m    = longint'({32'd0, v & 32'((1 << mb) - 1)});
    if (e == 0) r = real'(m) / real'(longint'(1) << mb) * (2.0 ** (1 - bias));
    else        r = (1.0 + real'(m) / real'(longint'(1) << mb)) * (2.0 ** (e - bias));
    return s ? -r : r;
  endfunction

  // random element, avoiding NaN/Inf codes of the IEEE formats
  function automatic logic [31:0] rand_elem(width_e w, logic flt);
    logic [31:0] v;
    int n = ebits(w);
    v = $urandom() & 32'((64'd1 << n) - 1);
    if (flt && n == 32 && v[30:23] == 8'hFF) v[30] = 1'b0;
    if (flt && n == 16 && v[14:10] == 5'h1F) v[14] = 1'b0;
    return v;
  endfunction

  // real -> IEEE single, round to nearest even; tiny values flush to zero
  function automatic logic [31:0] real_to_f32(real r);
    logic [63:0] b = $realtobits(r);
    int          e = int'(b[62:52]) - 1023 + 127;
    logic [24:0] mant;
    if (e <= 0) return {b[63], 31'd0};
    mant = {2'b01, b[51:29]};
    if (b[28] && (b[27:0] != '0 || b[29])) mant = mant + 1'b1;
    if (mant[24]) begin mant = mant >> 1; e++; end
    return {b[63], 8'(e), mant[22:0]};
  endfunction

  function automatic real f32_to_real(logic [31:0] v);
    return to_real(v, W32, 1'b1);
  endfunction
endpackage
