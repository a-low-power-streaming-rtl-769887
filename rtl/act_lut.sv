// act_lut -- sigmoid and tanh of an FP10 value by table lookup, used by the
// GRU gates. The use of one lookup table for both functions, fed 10 bits and
// returning 10 bits, follows the system drawing; its organisation is this
// design's.
//
// Two 256-entry tables (one per function) are indexed by the sign, the low
// three bits of (exponent - 11) and the mantissa of inputs with
// 2^-4 <= |x| < 16, i.e. every FP10 code in that range has its own entry.
// Entry i holds the FP10 rounding (nearest, ties even) of f(x_i) with
// x_i = (-1)^i[7] * (16 + i[3:0]) * 2^(i[6:4] - 8); the files
// act_lut_sigmoid.hex / act_lut_tanh.hex hold those 256 values in order.
// Outside the range the functions are computed from their limits:
// |x| < 2^-4 : tanh(x) = x, sigmoid(x) = 0.5 + x/4 (within one unit in the
//              last place of the exact value);
// |x| >= 16  : tanh = +-1, sigmoid = 1 or 0 (exact after rounding).
// Timing: registered output, valid one cycle after a valid input.
module act_lut
  import fp10_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  valid,
  input  logic  func,        // 0: sigmoid, 1: tanh
  input  fp10_t x,
  output fp10_t y,
  output logic  y_valid
);
  localparam fp10_t HALF    = 10'h0E0;  // 0.5
  localparam fp10_t QUARTER = 10'h0D0;  // 0.25

  logic [9:0] sig_rom [256];
  logic [9:0] tanh_rom[256];
  initial begin
    $readmemh("rtl/act_lut_sigmoid.hex", sig_rom);
    $readmemh("rtl/act_lut_tanh.hex", tanh_rom);
  end

  logic [7:0] idx;
  fp10_t      f;
  fp10_t      lin;   // sigmoid near zero: 0.5 + x/4
  always_comb begin
    idx = {x[9], 3'(x[8:4] - 5'd11), x[3:0]};
    lin = fp10_add(HALF, fp10_mul(x, QUARTER));
    if (x[8:4] < 5'd11) begin
      f = func ? x : lin;
    end else if (x[8:4] > 5'd18) begin
      if (func) f = {x[9], FP10_ONE[8:0]};
      else      f = x[9] ? FP10_ZERO : FP10_ONE;
    end else begin
      f = func ? tanh_rom[idx] : sig_rom[idx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= FP10_ZERO;
      y_valid <= 1'b0;
    end else begin
      y_valid <= valid;
      if (valid) y <= f;
    end
  end
endmodule
