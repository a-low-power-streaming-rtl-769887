// tb_fp10_ref_pkg -- reference model of the FP10 format for the testbenches,
// written with real arithmetic and independent of the RTL package: a code is
// converted to a real, the exact result is formed in double precision (exact
// for one FP10 product or sum) and rounded back by to_fp10, which finds the
// binade, rounds to 5 significant bits (nearest, ties to even), flushes
// magnitudes below 2^-14 to +0 and saturates above 1.9375 * 2^16.
package tb_fp10_ref_pkg;

  function automatic real to_real(input logic [9:0] c);
    int e;
    real v;
    e = int'(c[8:4]);
    if (e == 0) return 0.0;
    v = (16.0 + real'(c[3:0])) / 16.0 * (2.0 ** (e - 15));
    return c[9] ? -v : v;
  endfunction

  function automatic logic [9:0] to_fp10(input real x);
    logic s;
    real  a, sc, fl, fr;
    int   k, e;
    if (x == 0.0) return 10'h000;
    s = (x < 0.0);
    a = s ? -x : x;
    k = 0;
    while (2.0 ** k > a) k--;
    while (2.0 ** (k + 1) <= a) k++;
    sc = a / (2.0 ** (k - 4));           // in [16, 32)
    fl = real'($rtoi(sc));
    fr = sc - fl;
    if (fr > 0.5 || (fr == 0.5 && ($rtoi(fl) % 2) == 1)) fl = fl + 1.0;
    if (fl >= 32.0) begin
      fl = 16.0;
      k++;
    end
    e = k + 15;
    if (e < 1) return 10'h000;
    if (e > 31) return {s, 9'h1FF};
    return {s, 5'(e), 4'($rtoi(fl) - 16)};
  endfunction

  function automatic logic [9:0] ref_mul(input logic [9:0] a, input logic [9:0] b);
    return to_fp10(to_real(a) * to_real(b));
  endfunction

  function automatic logic [9:0] ref_add(input logic [9:0] a, input logic [9:0] b);
    return to_fp10(to_real(a) + to_real(b));
  endfunction

  // a random code with a moderate exponent (|x| in [2^-6, 2^6)), or zero
  function automatic logic [9:0] rnd_code();
    logic [9:0] c;
    c = 10'($urandom);
    c[8:4] = 5'(9 + $urandom_range(0, 11));
    if ($urandom_range(0, 15) == 0) c = 10'h000;
    return c;
  endfunction
endpackage
