// bias_sram -- the 1.25 KB bias memory: 2 banks of 512 x 10 bit used as a
// ping-pong pair. The datapath reads one FP10 bias per cycle from the bank
// rd_bank selects (one bias per output channel, added in the accumulator);
// the memory controller writes the other bank. Bank count and size follow
// the system architecture. Read data one cycle after rd_en; unaccessed
// banks are not clocked (bank_active).
module bias_sram
  import fp10_pkg::*;
  import se_pkg::*;
#(
  parameter int unsigned DEPTH = BDEPTH,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic          rd_bank,
  input  logic [AW-1:0] rd_addr,
  output fp10_t         rd_data,
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  fp10_t         wr_data,
  output logic [1:0]    bank_active
);
  logic  [1:0] re, we;
  fp10_t [1:0] rd;
  logic        bank_q;

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      re[b] = rd_en && (rd_bank == b[0]);
      we[b] = wr_en && (wr_bank == b[0]);
      bank_active[b] = re[b] | we[b];
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .WIDTH(10), .LANES(1)) u_bank (
      .clk, .re(re[b]), .raddr(rd_addr), .rdata(rd[b]),
      .we(we[b]), .wmask(1'b1), .waddr(wr_addr), .wdata(wr_data)
    );
  end

  always_ff @(posedge clk) if (rd_en) bank_q <= rd_bank;
  assign rd_data = bank_q ? rd[1] : rd[0];
endmodule
