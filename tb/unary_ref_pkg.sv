// unary_ref_pkg: reference arithmetic for the testbenches, written from the
// formulas rather than from the circuits.
//
// ref_scalable_mult(a, b, n) is the count the scalable unary multiplier must
// produce: with h = n/2, q = 2^h and a = a_h*q + a_l, b = b_h*q + b_l,
//   a_h*b_h + floor((a_l*b_h + q/2)/q) + floor((b_l*a_h + q/2)/q).
// opt_mult(a, b, n) is the best n-bit approximation, round(a*b / 2^n).
package unary_ref_pkg;

  function automatic int unsigned ref_scalable_mult(int unsigned a, int unsigned b,
                                                    int unsigned n);
    int unsigned h, q, ah, al, bh, bl;
    h  = n / 2;
    q  = 1 << h;
    ah = a / q;  al = a % q;
    bh = b / q;  bl = b % q;
    return ah * bh + (al * bh + q / 2) / q + (bl * ah + q / 2) / q;
  endfunction

  function automatic int unsigned opt_mult(int unsigned a, int unsigned b, int unsigned n);
    int unsigned full;
    full = 1 << n;
    return (a * b + full / 2) / full;
  endfunction

  function automatic int unsigned abs_diff(int unsigned x, int unsigned y);
    return (x > y) ? x - y : y - x;
  endfunction

endpackage
