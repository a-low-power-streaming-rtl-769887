// fp10_adder -- combinational FP10 adder: y = a + b, rounded once to the
// nearest FP10 value (ties to even), with the flush-to-zero and saturation
// rules of fp10_pkg. Used as the node of the PE-block tree adders and in the
// accumulator, so each adder is one small synthesized unit. No clock; the
// result is valid in the same cycle as the inputs. The number format follows
// the design description (1/5/4 bits); the rounding rules are this design's.
module fp10_adder
  import fp10_pkg::*;
(
  input  fp10_t a,
  input  fp10_t b,
  output fp10_t y
);
  assign y = fp10_add(a, b);
endmodule
