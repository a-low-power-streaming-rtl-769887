// weight_sram -- the 12.5 KB weight memory: 4 banks of 320 x 80 bit,
// organised as two ping-pong halves of two banks.
//
// The datapath reads one half (rd_half selects banks {0,1} or {2,3}) at one
// address: bank 2h+b gives the 8 weights of input channels 8b..8b+7 for PE
// block b. A word line holds the weights of one output channel and one
// kernel tap, so a convolution walks the half sequentially. The memory
// controller writes single banks, normally of the half not in use. Bank
// count and size follow the system architecture; the half arrangement is
// this design's reading of "ping-pong". Read data one cycle after rd_en;
// unaccessed banks are not clocked (bank_active).
module weight_sram
  import se_pkg::*;
#(
  parameter int unsigned DEPTH = WDEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic              rd_half,
  input  logic [AW-1:0]     rd_addr,
  output word_t [1:0]       rd_data,
  input  logic              wr_en,
  input  logic [1:0]        wr_bank,
  input  logic [AW-1:0]     wr_addr,
  input  word_t             wr_data,
  output logic [3:0]        bank_active
);
  logic  [3:0] re, we;
  word_t [3:0] rd;
  logic        half_q;

  always_comb begin
    for (int b = 0; b < 4; b++) begin
      re[b] = rd_en && (rd_half == b[1]);
      we[b] = wr_en && (wr_bank == 2'(b));
      bank_active[b] = re[b] | we[b];
    end
  end

  for (genvar b = 0; b < 4; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .WIDTH(WORD_W), .LANES(1)) u_bank (
      .clk, .re(re[b]), .raddr(rd_addr), .rdata(rd[b]),
      .we(we[b]), .wmask(1'b1), .waddr(wr_addr), .wdata(wr_data)
    );
  end

  always_ff @(posedge clk) if (rd_en) half_q <= rd_half;
  assign rd_data[0] = half_q ? rd[2] : rd[0];
  assign rd_data[1] = half_q ? rd[3] : rd[1];
endmodule
