// pe_cell -- one element-wise multiply-accumulate lane of a PE block.
//
// The cell computes y = +-(a' * w) + c' in FP10, where a' is the data input
// or the constant 1 and c' is the addend input or 0, and registers y in a
// 10-bit output register. With a' = data and c' = 0 it is the multiplier of
// a convolution; with a' = 1 it adds w and c (shortcut, gate sums); with both
// used it multiply-accumulates, the addend being fed back for the matrix
// multiplication flow. The two operand selectors, the multiplier, the 10-bit
// output register and the zero-skip path follow the PE-cell drawing; the
// separate addend input, the product negation (used for 1-z in the GRU) and
// rounding after the multiply and again after the add are this design's.
//
// Zero skipping: when the data input is zero and the cell multiplies it
// (a_one = 0), the multiplier operands are held at zero (data gating) and the
// result is taken from the skip path: 0, or the addend when one is used.
// skip reports this. Timing: inputs sampled at the rising edge when en = 1;
// y is valid the cycle after. en = 0 holds y (clock gating of an idle cell).
module pe_cell
  import fp10_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  a_one,
  input  logic  c_en,
  input  logic  neg,
  input  fp10_t d,
  input  fp10_t w,
  input  fp10_t c,
  output fp10_t y,
  output logic  skip
);
  fp10_t mul_a, mul_w, prod, addend, result;

  always_comb begin
    skip   = !a_one && fp10_is_zero(d);
    // operand isolation: a skipped multiplier sees constant zeros
    mul_a  = skip ? FP10_ZERO : (a_one ? FP10_ONE : d);
    mul_w  = skip ? FP10_ZERO : w;
    prod   = fp10_mul(mul_a, mul_w);
    if (neg) prod = fp10_neg(prod);
    addend = c_en ? c : FP10_ZERO;
    result = skip ? addend : fp10_add(prod, addend);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= FP10_ZERO;
    else if (en) y <= result;
  end
endmodule
