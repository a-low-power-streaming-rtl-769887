// pe_block -- eight PE cells sharing one mode and a tree adder.
//
// Each cell gets its own data, weight and addend lane; the eight registered
// cell results leave the block as one 80-bit word (element-wise results) and
// also feed a three-level FP10 tree adder, ((y0+y1)+(y2+y3))+((y4+y5)+(y6+y7)),
// whose result is held in a 10-bit register (the channel-wise partial sum of a
// convolution). Eight cells and the registered tree adder follow the PE-block
// drawing; the pairing order of the tree is this design's choice.
//
// Timing: lanes are valid one cycle after the inputs, the sum two cycles
// after. en gates the cell registers; sum_en gates the sum register.
// nskip counts the cells that took the zero-skip path in this cycle.
module pe_block
  import fp10_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          sum_en,
  input  logic          a_one,
  input  logic          c_en,
  input  logic          neg,
  input  fp10_t [N-1:0] d,
  input  fp10_t [N-1:0] w,
  input  fp10_t [N-1:0] c,
  output fp10_t [N-1:0] y,
  output fp10_t         sum,
  output logic  [$clog2(N+1)-1:0] nskip
);
  logic [N-1:0] skip;

  for (genvar i = 0; i < N; i++) begin : g_cell
    pe_cell u_cell (
      .clk, .rst_n, .en, .a_one, .c_en, .neg,
      .d(d[i]), .w(w[i]), .c(c[i]), .y(y[i]), .skip(skip[i])
    );
  end

  // pairwise tree over a power-of-two padded vector: level 0 holds the
  // cell outputs, node i of level lv adds nodes 2i and 2i+1 of level lv-1.
  // Each level is its own signal, so the tree is free of false loops.
  localparam int unsigned NP = 1 << $clog2(N);
  localparam int unsigned LV = $clog2(N);
  fp10_t tree_sum;
  for (genvar lv = 0; lv <= LV; lv++) begin : g_lvl
    fp10_t v [NP >> lv];
    if (lv == 0) begin : g_leaf
      for (genvar i = 0; i < NP; i++) begin : g_in
        assign v[i] = (i < N) ? y[i] : FP10_ZERO;
      end
    end else begin : g_node
      for (genvar i = 0; i < (NP >> lv); i++) begin : g_add
        fp10_adder u_add (.a(g_lvl[lv-1].v[2*i]), .b(g_lvl[lv-1].v[2*i+1]), .y(v[i]));
      end
    end
  end
  assign tree_sum = g_lvl[LV].v[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sum <= FP10_ZERO;
    else if (sum_en) sum <= tree_sum;
  end

  always_comb begin
    nskip = '0;
    for (int i = 0; i < N; i++) nskip = nskip + {{($clog2(N+1)-1){1'b0}}, (en & skip[i])};
  end
endmodule
