// fp10_pkg -- the 10-bit floating-point number format shared by every
// datapath unit of the accelerator, and its add and multiply operators.
//
// Format: 1 sign bit, 5 exponent bits (bias 15), 4 mantissa bits with a
// hidden leading one, as selected by the quantization study of the design.
// A code with exponent 0 is zero; there are no subnormals, infinities or
// NaNs (all 31 other exponents are normal numbers). The largest magnitude is
// 1.9375 * 2^16 = 126976, the smallest 2^-14.
//
// Rounding (this design's choice, the source only fixes the bit split):
// the exact result is rounded to 5 significant bits, round to nearest,
// ties to even; a rounded magnitude below 2^-14 becomes +0 and one above the
// largest magnitude saturates to it. Both operators are exact before the
// single rounding: add aligns both operands into a 36-bit integer, multiply
// forms the 10-bit mantissa product. All functions are combinational.
package fp10_pkg;

  typedef logic [9:0] fp10_t;

  localparam fp10_t FP10_ZERO = 10'h000;
  localparam fp10_t FP10_ONE  = 10'h0F0;   // 0 01111 0000 = 1.0
  localparam int    FP10_BIAS = 15;

  // Round an unsigned magnitude mag * 2^scale to FP10 with the given sign.
  // The leading one is found, mag is shifted so it sits at bit 39, the top
  // five bits are kept and rounded with the guard bit and a sticky OR of the
  // rest. All widths are narrow: exponents fit in 9 signed bits. Shifts and
  // products are computed unconditionally and the special cases selected at
  // the end, so no shifter sits under a condition.
  function automatic fp10_t fp10_round(input logic sign, input logic [39:0] mag,
                                       input logic signed [7:0] scale);
    logic [5:0]  msb;
    logic        found;
    logic [39:0] norm;
    logic [5:0]  kept;
    logic        up;
    logic signed [8:0] e;
    fp10_t       r;
    msb   = 6'd0;
    found = 1'b0;
    for (int i = 0; i < 40; i++) if (mag[i]) begin
      msb   = 6'(i);
      found = 1'b1;
    end
    norm = mag << (6'd39 - msb);
    up   = norm[34] && ((|norm[33:0]) || norm[35]);
    kept = {1'b0, norm[39:35]} + {5'd0, up};
    // value = kept * 2^(scale + msb - 4) = (16+m) * 2^(e-19)
    e = 9'(scale) + 9'(msb) + 9'sd15 + {8'd0, kept[5]};
    r = {sign, e[4:0], kept[5] ? 4'd0 : kept[3:0]};
    if (e > 9'sd31)            r = {sign, 9'h1FF};
    if (!found || e < 9'sd1)   r = FP10_ZERO;
    return r;
  endfunction

  function automatic fp10_t fp10_mul(input fp10_t a, input fp10_t b);
    logic [9:0] p;
    fp10_t      r;
    p = {5'd0, 1'b1, a[3:0]} * {5'd0, 1'b1, b[3:0]};
    // (16+ma)(16+mb) * 2^(ea-19) * 2^(eb-19)
    r = fp10_round(a[9] ^ b[9], {30'd0, p}, 8'(a[8:4]) + 8'(b[8:4]) - 8'sd38);
    return (a[8:4] == 5'd0 || b[8:4] == 5'd0) ? FP10_ZERO : r;
  endfunction

  function automatic fp10_t fp10_add(input fp10_t a, input fp10_t b);
    logic [35:0] ia;
    logic [35:0] ib;
    logic [35:0] s;
    logic        sign;
    // value = (16+m) << (e-1) * 2^-18 ; zero codes contribute 0
    ia = ({31'd0, 1'b1, a[3:0]} << (a[8:4] - 5'd1)) & {36{a[8:4] != 5'd0}};
    ib = ({31'd0, 1'b1, b[3:0]} << (b[8:4] - 5'd1)) & {36{b[8:4] != 5'd0}};
    if (a[9] == b[9]) begin
      s    = ia + ib;
      sign = a[9];
    end else if (ia >= ib) begin
      s    = ia - ib;
      sign = a[9];
    end else begin
      s    = ib - ia;
      sign = b[9];
    end
    return fp10_round(sign, {4'd0, s}, -8'sd18);
  endfunction

  function automatic fp10_t fp10_neg(input fp10_t a);
    return (a[8:4] == 5'd0) ? FP10_ZERO : {~a[9], a[8:0]};
  endfunction

  function automatic fp10_t fp10_relu(input fp10_t a);
    return (a[9] || a[8:4] == 5'd0) ? FP10_ZERO : a;
  endfunction

  function automatic logic fp10_is_zero(input fp10_t a);
    return (a & 10'h1F0) == 10'h000;
  endfunction

endpackage
