// accumulator -- adds the partial sums of the two PE blocks and the bias and
// accumulates them over the kernel taps of one convolution output.
//
// On a valid cycle it forms t = s0 + s1 and acc = (first ? bias : acc) + t in
// FP10. On the last term of an output the result leaves through the 10-bit
// output register, with ReLU applied when relu is set (the BN of the model is
// folded into weights and bias, so Conv+BN+ReLU ends here). The bias input
// and the 10-bit result follow the system drawing; the order of the two adds
// and the ReLU placement are this design's.
// Timing: out/out_valid are registered, one cycle after the last term.
module accumulator
  import fp10_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid,
  input  logic  first,
  input  logic  last,
  input  logic  relu,
  input  fp10_t s0,
  input  fp10_t s1,
  input  fp10_t bias,
  output fp10_t out,
  output logic  out_valid
);
  fp10_t acc, nxt;

  always_comb nxt = fp10_add(first ? bias : acc, fp10_add(s0, s1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= FP10_ZERO;
      out       <= FP10_ZERO;
      out_valid <= 1'b0;
    end else begin
      out_valid <= valid && last;
      if (valid) begin
        acc <= nxt;
        if (last) out <= relu ? fp10_relu(nxt) : nxt;
      end
    end
  end
endmodule
