// local_reg_buffer -- 10 x 160-bit register buffer between the SRAMs and the
// two PE blocks (160 bits = one 80-bit word for each PE block).
//
// It keeps operands and partial results that would otherwise be re-read from
// SRAM: in attention, rows 0..7 hold the 8 x 8 matrix K^T V of both heads
// and row 8 holds the current query word, reused for 8 cycles. Size and
// purpose follow the text; the row assignment and ports are this design's.
// One write port with a per-PE-block (80-bit half) mask, two combinational
// read ports. Written on the rising edge; reset clears all rows.
module local_reg_buffer
  import se_pkg::*;
#(
  parameter int unsigned DEPTH = LRB_DEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [1:0]        wmask,
  input  logic [AW-1:0]     waddr,
  input  logic [LRB_W-1:0]  wdata,
  input  logic [AW-1:0]     raddr0,
  output logic [LRB_W-1:0]  rdata0,
  input  logic [AW-1:0]     raddr1,
  output logic [LRB_W-1:0]  rdata1
);
  logic [LRB_W-1:0] regs [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) regs[i] <= '0;
    end else if (we && waddr < AW'(DEPTH)) begin
      if (wmask[0]) regs[waddr][79:0]   <= wdata[79:0];
      if (wmask[1]) regs[waddr][159:80] <= wdata[159:80];
    end
  end

  assign rdata0 = (raddr0 < AW'(DEPTH)) ? regs[raddr0] : '0;
  assign rdata1 = (raddr1 < AW'(DEPTH)) ? regs[raddr1] : '0;
endmodule
