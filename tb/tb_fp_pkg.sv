// tb_fp_pkg: reference single-precision arithmetic for the testbenches.
//
// Converts between IEEE-754 single-precision bit patterns and SystemVerilog
// `real` (double precision), rounding to nearest-even and flushing subnormals
// to zero, the same conventions as the design's fp32 units. Products of two
// singles are exact in double precision, as are sums of singles whose
// exponents differ by less than 29, so rounding the double result once gives
// the correctly rounded single result.
package tb_fp_pkg;

  function automatic real fp2r(input logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 8'h00) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    m = m * (2.0 ** e);
    return b[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2fp(input real x);
    real ax, m, fr;
    int  e;
    longint fi;
    logic s;
    if (x == 0.0) return 32'd0;
    s  = (x < 0.0);
    ax = s ? -x : x;
    e  = 0;
    while (ax >= 2.0) begin ax = ax / 2.0; e++; end
    while (ax < 1.0)  begin ax = ax * 2.0; e--; end
    m  = ax * 8388608.0;            // [2^23, 2^24)
    fi = longint'($floor(m));
    fr = m - real'(fi);
    if (fr > 0.5 || (fr == 0.5 && fi[0])) fi++;
    if (fi == 64'd16777216) begin fi = 64'd8388608; e++; end
    if (e + 127 >= 255) return {s, 8'hff, 23'd0};
    if (e + 127 <= 0)   return {s, 31'd0};
    return {s, 8'(e + 127), fi[22:0]};
  endfunction

  // Random normal single with exponent in [127-span, 127+span].
  function automatic logic [31:0] rand_fp(input int span);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(127 - span + int'($urandom_range(2 * span, 0)));
    return r;
  endfunction

endpackage
