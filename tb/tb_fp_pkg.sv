// tb_fp_pkg: reference single-precision helpers for the DLAU testbenches.
//
// fp_to_real converts a binary32 word to a real; rne converts a real to the
// nearest binary32 word (ties to even), flushing results below the normal
// range to zero like the RTL. A real holds the exact product of two binary32
// values and the exact sum of two whose exponents differ by less than 29, so
// rne(a op b) is the exactly rounded result the RTL must return.
package tb_fp_pkg;

  function automatic real fp_to_real(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] rne(input real v);
    logic   s;
    real    a, m, fr;
    int     e;
    longint mi;
    if (v == 0.0) return 32'd0;
    s = (v < 0.0);
    a = s ? -v : v;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m  = a * 8388608.0;
    mi = longint'($floor(m));
    fr = m - real'(mi);
    if (fr > 0.5 || (fr == 0.5 && mi[0])) mi++;
    if (mi == 64'd16777216) begin mi = mi >> 1; e++; end
    if (e + 127 <= 0)   return {s, 31'd0};
    if (e + 127 >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(e + 127), mi[22:0]};
  endfunction

  // random binary32 with unbiased exponent in [-span, span]
  function automatic logic [31:0] rand_fp(input int span);
    int e;
    e = int'($urandom_range(2 * span)) - span;
    return {1'($urandom), 8'(e + 127), 23'($urandom)};
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
