// se_accel_top -- low-power streaming speech-enhancement accelerator.
//
// A 1-D processing array of two PE blocks (8 FP10 multiply-accumulate cells
// each, 16 MACs) runs every layer of a small transformer speech-enhancement
// network -- 1-D dilated convolutions, GRU gates, softmax-free attention,
// shortcuts and masking -- by breaking it into element-wise MACs and
// choosing what each cell sees through SRAM addressing. All feature maps of
// one frame stay in the on-chip data SRAM; only the frame input, the output,
// weights, biases and the program cross the chip boundary, over two 80-bit
// streams. Blocks: data SRAM (8 x 512 x 80), weight SRAM (4 x 320 x 80),
// bias SRAM (2 x 512 x 10), instruction register (32 x 32), local register
// buffer (10 x 160), two PE blocks, accumulator, sigmoid/tanh LUT, memory
// controller and controller, connected as in the system architecture.
//
// Pipeline of one micro-operation (issued by the controller at stage 0):
//   s0  data and weight SRAM reads requested
//   s1  read data arrives; operand selection; PE cells compute; LUT input
//   s2  PE lane registers valid: element-wise / attention results written
//       to the data SRAM or the local register buffer; LUT result written;
//       bias read requested for a convolution
//   s3  tree-adder registers valid: accumulator adds both blocks and bias
//   s4  accumulator output valid: convolution result lane written
// Operand selection in s1, per PE block h (channels 8h..8h+7):
//   CONV  d = data word (0 when padded), w = weight word, c unused
//   EW    d = word of pair a, w = word of pair b, c = word of pair c
//   MMKV  d = lane `lane` of K word broadcast, w = V word, c = own result
//   MMQ   d = lane `lane` of Q word broadcast, w = local buffer row `lane`,
//         c = own result
// ReLU: convolutions in the accumulator, element-wise results on write.
//
// Interface: `start` (with `prog_words`) loads a program from the input
// stream and runs it; `done` rises at HALT. in_*/out_* are the two 80-bit
// valid/ready streams to the off-chip memory. The st_* outputs are one-cycle
// event strobes for power and test statistics: zero-skipped cells, SRAM
// banks clocked, memory-controller stalls.
module se_accel_top
  import fp10_pkg::*;
  import se_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [4:0]  prog_words,
  output logic        done,
  output logic        busy,
  // off-chip memory streams (through the memory controller)
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output word_t       out_data,
  // statistics strobes
  output logic [4:0]  st_zero_skip,     // PE cells that skipped their multiply this cycle
  output logic [7:0]  st_dbank_active,  // data SRAM banks clocked this cycle
  output logic [3:0]  st_wbank_active,
  output logic [1:0]  st_bbank_active,
  output logic        st_dma_stall,     // memory controller refused by a busy bank
  output logic        st_dma_wait,      // controller waits for the memory controller
  output logic        st_lut,           // LUT lookup this cycle
  output logic        st_pad            // padded (unread) convolution operand this cycle
);
  // ------------------------------------------------------------------
  // controller and instruction register
  logic [4:0]  pc;
  logic [31:0] instr;
  logic        cmd_valid, cmd_ready, cmd_store, dma_busy;
  target_e     cmd_target;
  logic [2:0]  cmd_bank;
  logic [8:0]  cmd_addr;
  logic [9:0]  cmd_count;
  logic [DBANKS-1:0]      c_rd_en;
  logic [DBANKS-1:0][8:0] c_rd_addr;
  logic        w_rd_en, w_rd_half, bias_bank;
  logic [8:0]  w_rd_addr;
  uop_t        u0, u1, u2, u3, u4;

  controller u_ctrl (
    .clk, .rst_n, .start, .prog_words, .done, .busy,
    .pc, .instr,
    .cmd_valid, .cmd_ready, .cmd_store, .cmd_target, .cmd_bank, .cmd_addr,
    .cmd_count, .dma_busy,
    .d_rd_en(c_rd_en), .d_rd_addr(c_rd_addr),
    .w_rd_en, .w_rd_half, .w_rd_addr, .bias_bank,
    .uop(u0), .dma_wait(st_dma_wait)
  );

  logic        i_we;
  logic [4:0]  i_addr;
  logic [63:0] i_data;
  instr_reg #(.DEPTH(IDEPTH)) u_ireg (
    .clk, .rst_n, .we(i_we), .waddr(i_addr), .wdata(i_data),
    .raddr(pc), .rdata(instr)
  );

  // ------------------------------------------------------------------
  // memory controller and memories
  logic        d_rreq, d_rgnt, d_wreq, d_wgnt;
  logic [2:0]  d_rbank, d_wbank;
  logic [8:0]  d_raddr, d_waddr;
  word_t       d_rdata, d_wdata;
  logic        w_we;
  logic [1:0]  w_bank;
  logic [8:0]  w_addr;
  word_t       w_data;
  logic        b_we, b_bank;
  logic [8:0]  b_addr;
  fp10_t       b_data;

  mem_ctrl u_mc (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_store, .cmd_target, .cmd_bank, .cmd_addr,
    .cmd_count, .busy(dma_busy), .stall(st_dma_stall),
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .d_rreq, .d_rbank, .d_raddr, .d_rgnt, .d_rdata,
    .d_wreq, .d_wbank, .d_waddr, .d_wdata, .d_wgnt,
    .w_we, .w_bank, .w_addr, .w_data,
    .b_we, .b_bank, .b_addr, .b_data,
    .i_we, .i_addr, .i_data
  );

  word_t [DBANKS-1:0]            d_rd_data;
  logic  [DBANKS-1:0]            d_wr_en;
  logic  [DBANKS-1:0][LANES-1:0] d_wr_mask;
  logic  [DBANKS-1:0][8:0]       d_wr_addr;
  word_t [DBANKS-1:0]            d_wr_data;

  data_sram u_dsram (
    .clk,
    .rd_en(c_rd_en), .rd_addr(c_rd_addr), .rd_data(d_rd_data),
    .wr_en(d_wr_en), .wr_mask(d_wr_mask), .wr_addr(d_wr_addr), .wr_data(d_wr_data),
    .dma_rreq(d_rreq), .dma_rbank(d_rbank), .dma_raddr(d_raddr), .dma_rgnt(d_rgnt),
    .dma_rdata(d_rdata),
    .dma_wreq(d_wreq), .dma_wbank(d_wbank), .dma_waddr(d_waddr), .dma_wdata(d_wdata),
    .dma_wgnt(d_wgnt), .bank_active(st_dbank_active)
  );

  word_t [1:0] w_rd_data;
  weight_sram u_wsram (
    .clk, .rd_en(w_rd_en), .rd_half(w_rd_half), .rd_addr(w_rd_addr),
    .rd_data(w_rd_data),
    .wr_en(w_we), .wr_bank(w_bank), .wr_addr(w_addr), .wr_data(w_data),
    .bank_active(st_wbank_active)
  );

  fp10_t bias;
  logic  bias_re;
  bias_sram u_bsram (
    .clk, .rd_en(bias_re), .rd_bank(bias_bank), .rd_addr(u2.bias_addr),
    .rd_data(bias),
    .wr_en(b_we), .wr_bank(b_bank), .wr_addr(b_addr), .wr_data(b_data),
    .bank_active(st_bbank_active)
  );
  assign bias_re = u2.valid && u2.kind == U_CONV && u2.first;

  // ------------------------------------------------------------------
  // pipeline tags
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u1 <= '0; u2 <= '0; u3 <= '0; u4 <= '0;
    end else begin
      u1 <= u0; u2 <= u1; u3 <= u2; u4 <= u3;
    end
  end
  assign st_pad = u0.valid && u0.kind == U_CONV && u0.pad;

  // ------------------------------------------------------------------
  // local register buffer
  logic               lrb_we;
  logic [1:0]         lrb_wmask;
  logic [3:0]         lrb_waddr;
  logic [LRB_W-1:0]   lrb_wdata, lrb_row, lrb_hold;

  local_reg_buffer u_lrb (
    .clk, .rst_n, .we(lrb_we), .wmask(lrb_wmask), .waddr(lrb_waddr), .wdata(lrb_wdata),
    .raddr0(u1.lrb_row), .rdata0(lrb_row),
    .raddr1(4'd8), .rdata1(lrb_hold)
  );

  // ------------------------------------------------------------------
  // stage 1: operand selection and PE blocks
  vec8_t [1:0] pe_d, pe_w, pe_c, pe_y;
  fp10_t [1:0] pe_sum;
  logic  [1:0][3:0] pe_nskip;
  logic        pe_en, pe_sum_en;
  vec8_t       a_word [2];

  always_comb begin
    for (int h = 0; h < 2; h++) begin
      a_word[h] = d_rd_data[{u1.a_pair, h[0]}];
      if (u1.kind == U_MMQ && u1.use_hold) a_word[h] = lrb_hold[h*80 +: 80];
      if (u1.kind == U_CONV && u1.pad)     a_word[h] = '0;
      for (int l = 0; l < LANES; l++) begin
        pe_d[h][l] = a_word[h][l];
        pe_w[h][l] = w_rd_data[h][l*10 +: 10];
        pe_c[h][l] = FP10_ZERO;
        unique case (u1.kind)
          U_EW: begin
            pe_w[h][l] = d_rd_data[{u1.b_pair, h[0]}][l*10 +: 10];
            pe_c[h][l] = d_rd_data[{u1.c_pair, h[0]}][l*10 +: 10];
          end
          U_MMKV: begin
            pe_d[h][l] = a_word[h][u1.lane];
            pe_w[h][l] = d_rd_data[{u1.b_pair, h[0]}][l*10 +: 10];
            pe_c[h][l] = u1.first ? FP10_ZERO : pe_y[h][l];
          end
          U_MMQ: begin
            pe_d[h][l] = a_word[h][u1.lane];
            pe_w[h][l] = lrb_row[h*80 + l*10 +: 10];
            pe_c[h][l] = u1.first ? FP10_ZERO : pe_y[h][l];
          end
          default: ;
        endcase
      end
    end
  end

  assign pe_en     = u1.valid && u1.kind != U_ACT;
  assign pe_sum_en = u2.valid && u2.kind == U_CONV;

  for (genvar h = 0; h < 2; h++) begin : g_pe
    pe_block #(.N(LANES)) u_pe (
      .clk, .rst_n, .en(pe_en), .sum_en(pe_sum_en),
      .a_one(u1.a_one), .c_en(u1.c_en), .neg(u1.neg),
      .d(pe_d[h]), .w(pe_w[h]), .c(pe_c[h]), .y(pe_y[h]), .sum(pe_sum[h]),
      .nskip(pe_nskip[h])
    );
  end
  assign st_zero_skip = {1'b0, pe_nskip[0]} + {1'b0, pe_nskip[1]};

  // MMQ keeps the query word for the 8 cycles of one output row
  always_comb begin
    lrb_we    = 1'b0;
    lrb_wmask = 2'b11;
    lrb_waddr = 4'd8;
    lrb_wdata = {a_word[1], a_word[0]};
    if (u1.valid && u1.kind == U_MMQ && !u1.use_hold) begin
      lrb_we = 1'b1;
    end else if (u2.valid && u2.kind == U_MMKV && u2.last) begin
      lrb_we    = 1'b1;
      lrb_waddr = u2.lrb_row;
      lrb_wdata = {pe_y[1], pe_y[0]};
    end
  end

  // LUT on one lane of the a operand
  fp10_t lut_y;
  logic  lut_valid;
  assign st_lut = u1.valid && u1.kind == U_ACT;
  act_lut u_lut (
    .clk, .rst_n, .valid(st_lut), .func(u1.func),
    .x(d_rd_data[{u1.a_pair, u1.hi}][u1.lane*10 +: 10]),
    .y(lut_y), .y_valid(lut_valid)
  );

  // ------------------------------------------------------------------
  // stages 3-4: accumulator
  fp10_t acc_out;
  logic  acc_valid;
  accumulator u_acc (
    .clk, .rst_n, .valid(u3.valid && u3.kind == U_CONV),
    .first(u3.first), .last(u3.last), .relu(u3.relu),
    .s0(pe_sum[0]), .s1(pe_sum[1]), .bias(bias),
    .out(acc_out), .out_valid(acc_valid)
  );

  // ------------------------------------------------------------------
  // data SRAM write-back (the write multiplexer of the system drawing)
  always_comb begin
    d_wr_en   = '0;
    d_wr_mask = '0;
    d_wr_addr = '0;
    d_wr_data = '0;
    if (acc_valid) begin                                   // convolution lane
      d_wr_en[u4.dst_bank]   = 1'b1;
      d_wr_mask[u4.dst_bank] = LANES'(1) << u4.dst_lane;
      d_wr_addr[u4.dst_bank] = u4.dst_addr;
      d_wr_data[u4.dst_bank] = {LANES{acc_out}};
    end else if (u2.valid && u2.kind == U_ACT && lut_valid) begin   // LUT lane
      d_wr_en[u2.dst_bank]   = 1'b1;
      d_wr_mask[u2.dst_bank] = LANES'(1) << u2.dst_lane;
      d_wr_addr[u2.dst_bank] = u2.dst_addr;
      d_wr_data[u2.dst_bank] = {LANES{lut_y}};
    end else if (u2.valid && u2.last && (u2.kind == U_EW || u2.kind == U_MMQ)) begin
      for (int h = 0; h < 2; h++) begin                     // 2 x 80-bit PE words
        d_wr_en[{u2.dst_bank[2:1], h[0]}]   = 1'b1;
        d_wr_mask[{u2.dst_bank[2:1], h[0]}] = '1;
        d_wr_addr[{u2.dst_bank[2:1], h[0]}] = u2.dst_addr;
        for (int l = 0; l < LANES; l++)
          d_wr_data[{u2.dst_bank[2:1], h[0]}][l*10 +: 10] =
            u2.relu ? fp10_relu(pe_y[h][l]) : pe_y[h][l];
      end
    end
  end
endmodule
