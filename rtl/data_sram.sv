// data_sram -- the 40 KB feature-map memory: 8 banks of 512 x 80 bit.
//
// A word holds 8 FP10 channels of one signal position; a pair of banks
// (2p, 2p+1) gives the 2 x 80 bits that feed the two PE blocks in one cycle.
// Tensors are placed by bank and address, so one layer's input and output
// sit in different banks (ping-pong) and feature maps never leave the chip.
// Bank count, depth and width follow the system architecture; the port
// arrangement and arbitration are this design's.
//
// Ports: the datapath reads any set of banks (one address per bank) and
// writes any set (lane mask per bank). The memory controller has one read
// and one write request of a single bank; it is granted when the datapath
// does not use that bank's port in the same cycle (the datapath has
// priority), otherwise it must wait: dma_rgnt / dma_wgnt stay low.
// Read data returns one cycle after the request. A bank with no access in
// a cycle is not clocked: bank_active shows the banks in use (clock gating).
module data_sram
  import se_pkg::*;
#(
  parameter int unsigned BANKS = DBANKS,
  parameter int unsigned DEPTH = DDEPTH,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned BW = $clog2(BANKS)
) (
  input  logic                         clk,
  // datapath side
  input  logic [BANKS-1:0]             rd_en,
  input  logic [BANKS-1:0][AW-1:0]     rd_addr,
  output word_t [BANKS-1:0]            rd_data,
  input  logic [BANKS-1:0]             wr_en,
  input  logic [BANKS-1:0][LANES-1:0]  wr_mask,
  input  logic [BANKS-1:0][AW-1:0]     wr_addr,
  input  word_t [BANKS-1:0]            wr_data,
  // memory-controller side
  input  logic                         dma_rreq,
  input  logic [BW-1:0]                dma_rbank,
  input  logic [AW-1:0]                dma_raddr,
  output logic                         dma_rgnt,
  output word_t                        dma_rdata,
  input  logic                         dma_wreq,
  input  logic [BW-1:0]                dma_wbank,
  input  logic [AW-1:0]                dma_waddr,
  input  word_t                        dma_wdata,
  output logic                         dma_wgnt,
  output logic [BANKS-1:0]             bank_active
);
  logic [BANKS-1:0]            re, we;
  logic [BANKS-1:0][AW-1:0]    ra, wa;
  logic [BANKS-1:0][LANES-1:0] wm;
  word_t [BANKS-1:0]           wd;
  logic [BW-1:0]               dma_rbank_q;

  assign dma_rgnt = dma_rreq && !rd_en[dma_rbank];
  assign dma_wgnt = dma_wreq && !wr_en[dma_wbank];

  always_comb begin
    for (int b = 0; b < BANKS; b++) begin
      re[b] = rd_en[b];
      ra[b] = rd_addr[b];
      we[b] = wr_en[b];
      wa[b] = wr_addr[b];
      wm[b] = wr_mask[b];
      wd[b] = wr_data[b];
      if (dma_rgnt && dma_rbank == BW'(b)) begin
        re[b] = 1'b1;
        ra[b] = dma_raddr;
      end
      if (dma_wgnt && dma_wbank == BW'(b)) begin
        we[b] = 1'b1;
        wa[b] = dma_waddr;
        wm[b] = '1;
        wd[b] = dma_wdata;
      end
      bank_active[b] = re[b] | we[b];
    end
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .WIDTH(WORD_W), .LANES(LANES)) u_bank (
      .clk, .re(re[b]), .raddr(ra[b]), .rdata(rd_data[b]),
      .we(we[b]), .wmask(wm[b]), .waddr(wa[b]), .wdata(wd[b])
    );
  end

  always_ff @(posedge clk) if (dma_rgnt) dma_rbank_q <= dma_rbank;
  assign dma_rdata = rd_data[dma_rbank_q];
endmodule
