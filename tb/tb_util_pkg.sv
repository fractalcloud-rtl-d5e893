// tb_util_pkg: reference arithmetic for the testbenches.
//
// Converts between FP16 bit patterns and `real`, so that expected results
// are computed in double precision, independently of the FP16 functions in
// the design. Test data are drawn from a grid of values that FP16 holds
// exactly (multiples of 1/64 in [0, 4)), which makes midpoints and small
// sums exact and keeps the comparison with the design free of rounding.
package tb_util_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    int  e;
    real m, v;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    v = m * (2.0 ** (e - 15));
    return h[15] ? -v : v;
  endfunction

  // Exact for values with at most 11 significant bits; truncates otherwise.
  function automatic logic [15:0] real_to_fp16(real r);
    logic s;
    int   e;
    real  a;
    int   m;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = int'($floor((a - 1.0) * 1024.0));
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  // A random grid coordinate: k/64 with k in [0, range).
  function automatic logic [15:0] grid_coord(int range);
    return real_to_fp16(real'($urandom_range(range - 1)) / 64.0);
  endfunction

  function automatic real rabs(real a);
    return (a < 0.0) ? -a : a;
  endfunction

endpackage
