// sram_bank -- one on-chip SRAM bank: one synchronous read port and one
// write port with a write mask of LANES equal fields.
//
// A read with re = 1 returns mem[raddr] on rdata the next cycle; rdata holds
// its value when re = 0 (the bank is not clocked). A write with we = 1
// updates the lanes whose wmask bit is set. Writing and reading the same
// address in one cycle returns the old contents. The bank is behavioural
// array code that synthesis maps to a memory; the two ports are this
// design's choice so that the memory controller can fill one half of a
// ping-pong buffer while the datapath uses the other.
module sram_bank #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 80,
  parameter int unsigned LANES = 8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [LANES-1:0] wmask,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  localparam int unsigned LW = WIDTH / LANES;
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      if (we && wmask[l]) mem[waddr][l*LW +: LW] <= wdata[l*LW +: LW];
    end
  end
endmodule
