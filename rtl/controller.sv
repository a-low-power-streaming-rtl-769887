// controller -- instruction sequencer and configurable SRAM address
// generator of the accelerator.
//
// The accelerator runs the network layer by layer; every layer is one or a
// few instructions (encoding in se_pkg). On `start` the controller has the
// memory controller load `prog_words` 80-bit words (two instructions each)
// into the instruction register, then executes from address 0 until HALT,
// where `done` rises. CFG instructions set eight parameter registers;
// LOAD / STORE hand a command to the memory controller (waiting while it is
// busy) and continue; WAIT waits for it to finish; compute instructions run
// a loop nest that issues one micro-operation per cycle:
//
//   CONV  for p < len_out, o < oc_cnt, k < K, g < groups:
//         data word pair at position p*stride + (k - (K-1)/2)*dil of channel
//         pair g, weight word pair (o*K + k)*groups + g; the accumulator adds
//         the 16 products, starts from the bias at k=g=0 and writes output
//         channel o at position p*step after the last term. Positions
//         outside [0, len_in) are zero padding: nothing is read.
//   MMKV  for i < 8, j < len: broadcast lane i of K[j] times V[j] (both
//         heads, one per PE block), accumulate over j, row i of K^T V into
//         the local register buffer.
//   MMQ   for p < len, i < 8: broadcast lane i of Q[p] times row i of K^T V,
//         accumulate over i, write the output word pair at p. Q[p] is read
//         from SRAM once (i = 0) and then reused from buffer row 8.
//   EW    for p < len, g < groups: out = +-(a*w) + c on 16 lanes.
//   ACT   for p < len, ch < 16*groups: out[ch] = LUT(a[ch]), one per cycle.
//
// Only the flows themselves (channel-wise input for convolution, broadcast
// element-wise MAC for matrix products, a 5-step GRU and 3-step attention
// built from them) come from the design description; the instruction set,
// the register layout, the loop orders not drawn there and the pipeline
// drain between instructions are this design's.
//
// Data layout: channel group c (8 channels) of a tensor based at bank b,
// address a lives in bank (b + c) mod 8 at address a + position. A tensor's
// base bank is even so channel pairs fall on bank pairs.
//
// Timing: a micro-operation is issued in the cycle its SRAM reads are
// requested; the top delays it with the read data. After the last one of an
// instruction the controller waits DRAIN cycles so results are written
// before the next instruction reads them. One compute instruction therefore
// takes (number of micro-operations) + DRAIN + 1 cycles.
module controller
  import fp10_pkg::*;
  import se_pkg::*;
#(
  parameter int unsigned DRAIN = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [4:0]               prog_words,
  output logic                     done,
  output logic                     busy,
  // instruction register
  output logic [4:0]               pc,
  input  logic [31:0]              instr,
  // memory controller command
  output logic                     cmd_valid,
  input  logic                     cmd_ready,
  output logic                     cmd_store,
  output target_e                  cmd_target,
  output logic [2:0]               cmd_bank,
  output logic [8:0]               cmd_addr,
  output logic [9:0]               cmd_count,
  input  logic                     dma_busy,
  // SRAM read requests of the issue cycle
  output logic [DBANKS-1:0]        d_rd_en,
  output logic [DBANKS-1:0][8:0]   d_rd_addr,
  output logic                     w_rd_en,
  output logic                     w_rd_half,
  output logic [8:0]               w_rd_addr,
  output logic                     bias_bank,
  // micro-operation issued this cycle
  output uop_t                     uop,
  // statistics
  output logic                     dma_wait     // an instruction waits for the memory controller
);
  typedef enum logic [2:0] {C_IDLE, C_BOOT, C_BOOTW, C_FETCH, C_RUN, C_DRAIN, C_DONE} cstate_e;
  cstate_e     state;
  logic [23:0] regs [8];
  opcode_e     op_q;
  logic [4:0]  flags_q;
  logic [9:0]  idx [4];
  logic [9:0]  lim [4];
  logic [3:0]  drain_cnt;

  // ---- parameter register fields
  logic [2:0]  a_bank, b_bank, c_bank, o_bank;
  logic [8:0]  a_addr, b_addr, c_addr, o_addr;
  logic [9:0]  len_out, len_in;
  logic [2:0]  groups;
  logic [8:0]  oc_cnt;
  logic [2:0]  ksize;
  logic [3:0]  dil;
  logic [1:0]  stride, ostep;
  logic [8:0]  wbase, bbase;
  logic        wsel, bsel;

  always_comb begin
    {a_bank, a_addr} = regs[R_SRC_A][11:0];
    {b_bank, b_addr} = regs[R_SRC_B][11:0];
    {c_bank, c_addr} = regs[R_SRC_C][11:0];
    {o_bank, o_addr} = regs[R_DST][11:0];
    len_out = regs[R_LEN][9:0];
    len_in  = regs[R_LEN][19:10];
    groups  = regs[R_CHAN][2:0];
    oc_cnt  = regs[R_CHAN][11:3];
    ksize   = regs[R_CONV][2:0];
    dil     = regs[R_CONV][6:3];
    stride  = regs[R_CONV][8:7];
    ostep   = regs[R_CONV][10:9];
    wbase   = regs[R_MEM][8:0];
    wsel    = regs[R_MEM][9];
    bbase   = regs[R_MEM][18:10];
    bsel    = regs[R_MEM][19];
  end

  opcode_e op_f;
  assign op_f = opcode_e'(instr[31:28]);

  // ---- loop limits of a compute instruction
  function automatic void limits_of(input opcode_e op, output logic [9:0] l0,
                                    output logic [9:0] l1, output logic [9:0] l2,
                                    output logic [9:0] l3);
    l0 = 10'd1; l1 = 10'd1; l2 = 10'd1; l3 = 10'd1;
    unique case (op)
      OP_CONV: begin
        l0 = {7'd0, groups}; l1 = {7'd0, ksize}; l2 = {1'b0, oc_cnt}; l3 = len_out;
      end
      OP_MMKV: begin l0 = len_out; l1 = 10'd8; end
      OP_MMQ:  begin l0 = 10'd8;   l1 = len_out; end
      OP_EW:   begin l0 = {7'd0, groups}; l1 = len_out; end
      OP_ACT:  begin l0 = {3'd0, groups, 4'd0}; l1 = len_out; end
      default: ;
    endcase
  endfunction

  logic run_last;
  assign run_last = (idx[0] == lim[0] - 10'd1) && (idx[1] == lim[1] - 10'd1) &&
                    (idx[2] == lim[2] - 10'd1) && (idx[3] == lim[3] - 10'd1);

  // ---- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      pc        <= '0;
      op_q      <= OP_HALT;
      flags_q   <= '0;
      drain_cnt <= '0;
      for (int i = 0; i < 8; i++) regs[i] <= '0;
      for (int i = 0; i < 4; i++) begin
        idx[i] <= '0;
        lim[i] <= 10'd1;
      end
    end else begin
      unique case (state)
        C_IDLE, C_DONE: if (start) state <= C_BOOT;
        C_BOOT:  if (cmd_ready) state <= C_BOOTW;
        C_BOOTW: if (!dma_busy) begin
          pc    <= '0;
          state <= C_FETCH;
        end
        C_FETCH: begin
          unique case (op_f)
            OP_HALT: state <= C_DONE;
            OP_CFG: begin
              regs[instr[26:24]] <= instr[23:0];
              pc <= pc + 5'd1;
            end
            OP_LOAD, OP_STORE: if (cmd_ready) pc <= pc + 5'd1;
            OP_WAIT: if (!dma_busy) pc <= pc + 5'd1;
            OP_CONV, OP_MMKV, OP_MMQ, OP_EW, OP_ACT: begin
              op_q    <= op_f;
              flags_q <= instr[4:0];
              limits_of(op_f, lim[0], lim[1], lim[2], lim[3]);
              for (int i = 0; i < 4; i++) idx[i] <= '0;
              state <= C_RUN;
            end
            default: pc <= pc + 5'd1;   // unknown opcodes are skipped
          endcase
        end
        C_RUN: begin
          if (run_last) begin
            state     <= C_DRAIN;
            drain_cnt <= 4'(DRAIN);
          end
          // odometer increment, innermost first
          if (idx[0] != lim[0] - 10'd1) idx[0] <= idx[0] + 10'd1;
          else begin
            idx[0] <= '0;
            if (idx[1] != lim[1] - 10'd1) idx[1] <= idx[1] + 10'd1;
            else begin
              idx[1] <= '0;
              if (idx[2] != lim[2] - 10'd1) idx[2] <= idx[2] + 10'd1;
              else begin
                idx[2] <= '0;
                idx[3] <= idx[3] + 10'd1;
              end
            end
          end
        end
        C_DRAIN: begin
          if (drain_cnt == 4'd0) begin
            pc    <= pc + 5'd1;
            state <= C_FETCH;
          end else drain_cnt <= drain_cnt - 4'd1;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign done = (state == C_DONE);
  assign busy = (state != C_IDLE) && (state != C_DONE);

  // ---- memory controller commands
  always_comb begin
    cmd_valid  = 1'b0;
    cmd_store  = 1'b0;
    cmd_target = TGT_DATA;
    cmd_bank   = instr[25:23];
    cmd_addr   = instr[22:14];
    cmd_count  = instr[13:4];
    dma_wait   = 1'b0;
    if (state == C_BOOT) begin
      cmd_valid  = 1'b1;
      cmd_target = TGT_INSTR;
      cmd_bank   = '0;
      cmd_addr   = '0;
      cmd_count  = {5'd0, prog_words};
    end else if (state == C_FETCH && (op_f == OP_LOAD || op_f == OP_STORE)) begin
      cmd_valid  = 1'b1;
      cmd_store  = (op_f == OP_STORE);
      cmd_target = (op_f == OP_STORE) ? TGT_DATA : target_e'(instr[27:26]);
      dma_wait   = !cmd_ready;
    end else if (state == C_FETCH && op_f == OP_WAIT) begin
      dma_wait   = dma_busy;
    end
  end

  // ---- address generation for the issue cycle
  logic signed [12:0] ipos;
  logic [1:0]  pa, pb, pc2, pd;
  logic [9:0]  i0, i1, i2, i3;
  logic [9:0]  ocr;
  logic [12:0] waddr_full;

  always_comb begin
    i0 = idx[0]; i1 = idx[1]; i2 = idx[2]; i3 = idx[3];
    ocr = i2;
    d_rd_en   = '0;
    d_rd_addr = '0;
    w_rd_en   = 1'b0;
    w_rd_half = wsel;
    w_rd_addr = '0;
    bias_bank = bsel;
    ipos       = '0;
    waddr_full = '0;
    pa = '0; pb = '0; pc2 = '0; pd = '0;
    uop = '0;
    uop.valid = (state == C_RUN);
    uop.relu  = flags_q[0];
    uop.a_one = flags_q[1];
    uop.c_en  = flags_q[2];
    uop.neg   = flags_q[3];
    uop.func  = flags_q[4];
    unique case (op_q)
      OP_CONV: begin
        uop.kind  = U_CONV;
        uop.a_one = 1'b0;
        uop.c_en  = 1'b0;
        uop.neg   = 1'b0;
        ipos = 13'(i3) * 13'(stride) + 13'(i1) * 13'(dil)
             - (13'(ksize) - 13'd1) / 13'd2 * 13'(dil);
        uop.pad = (ipos < 0) || (ipos >= 13'(len_in));
        pa = 2'(a_bank[2:1] + i0[1:0]);
        uop.a_pair = pa;
        if (state == C_RUN && !uop.pad) begin
          d_rd_en[{pa, 1'b0}]   = 1'b1;
          d_rd_en[{pa, 1'b1}]   = 1'b1;
          d_rd_addr[{pa, 1'b0}] = 9'(a_addr + 9'(ipos));
          d_rd_addr[{pa, 1'b1}] = 9'(a_addr + 9'(ipos));
        end
        waddr_full = 13'(wbase) + (13'(ocr) * 13'(ksize) + 13'(i1)) * 13'(groups) + 13'(i0);
        w_rd_en   = (state == C_RUN);
        w_rd_addr = waddr_full[8:0];
        uop.first     = (i1 == 10'd0) && (i0 == 10'd0);
        uop.last      = (i1 == 10'(ksize) - 10'd1) && (i0 == 10'(groups) - 10'd1);
        uop.bias_addr = 9'(bbase + 9'(ocr));
        uop.dst_bank  = 3'(o_bank + 3'(ocr >> 3));
        uop.dst_lane  = ocr[2:0];
        uop.dst_addr  = 9'(o_addr + 9'(i3) * 9'(ostep));
      end
      OP_MMKV: begin   // i1 = row i, i0 = position j
        uop.kind  = U_MMKV;
        uop.a_one = 1'b0;
        uop.c_en  = 1'b1;
        uop.neg   = 1'b0;
        pa = a_bank[2:1];
        pb = b_bank[2:1];
        uop.a_pair = pa;
        uop.b_pair = pb;
        if (state == C_RUN) begin
          d_rd_en[{pa, 1'b0}] = 1'b1; d_rd_addr[{pa, 1'b0}] = 9'(a_addr + 9'(i0));
          d_rd_en[{pa, 1'b1}] = 1'b1; d_rd_addr[{pa, 1'b1}] = 9'(a_addr + 9'(i0));
          d_rd_en[{pb, 1'b0}] = 1'b1; d_rd_addr[{pb, 1'b0}] = 9'(b_addr + 9'(i0));
          d_rd_en[{pb, 1'b1}] = 1'b1; d_rd_addr[{pb, 1'b1}] = 9'(b_addr + 9'(i0));
        end
        uop.lane    = i1[2:0];
        uop.first   = (i0 == 10'd0);
        uop.last    = (i0 == len_out - 10'd1);
        uop.lrb_row = {1'b0, i1[2:0]};
      end
      OP_MMQ: begin    // i1 = position p, i0 = row i
        uop.kind  = U_MMQ;
        uop.a_one = 1'b0;
        uop.c_en  = 1'b1;
        uop.neg   = 1'b0;
        pa = a_bank[2:1];
        uop.a_pair   = pa;
        uop.use_hold = (i0 != 10'd0);
        if (state == C_RUN && i0 == 10'd0) begin
          d_rd_en[{pa, 1'b0}] = 1'b1; d_rd_addr[{pa, 1'b0}] = 9'(a_addr + 9'(i1));
          d_rd_en[{pa, 1'b1}] = 1'b1; d_rd_addr[{pa, 1'b1}] = 9'(a_addr + 9'(i1));
        end
        uop.lane     = i0[2:0];
        uop.lrb_row  = {1'b0, i0[2:0]};
        uop.first    = (i0 == 10'd0);
        uop.last     = (i0 == 10'd7);
        uop.dst_bank = {o_bank[2:1], 1'b0};
        uop.dst_addr = 9'(o_addr + 9'(i1));
      end
      OP_EW: begin     // i1 = position p, i0 = channel pair g
        uop.kind = U_EW;
        pa  = 2'(a_bank[2:1] + i0[1:0]);
        pb  = 2'(b_bank[2:1] + i0[1:0]);
        pc2 = 2'(c_bank[2:1] + i0[1:0]);
        pd  = 2'(o_bank[2:1] + i0[1:0]);
        uop.a_pair = pa;
        uop.b_pair = pb;
        uop.c_pair = pc2;
        if (state == C_RUN) begin
          if (!flags_q[1]) begin
            d_rd_en[{pa, 1'b0}] = 1'b1; d_rd_addr[{pa, 1'b0}] = 9'(a_addr + 9'(i1));
            d_rd_en[{pa, 1'b1}] = 1'b1; d_rd_addr[{pa, 1'b1}] = 9'(a_addr + 9'(i1));
          end
          d_rd_en[{pb, 1'b0}] = 1'b1; d_rd_addr[{pb, 1'b0}] = 9'(b_addr + 9'(i1));
          d_rd_en[{pb, 1'b1}] = 1'b1; d_rd_addr[{pb, 1'b1}] = 9'(b_addr + 9'(i1));
          if (flags_q[2]) begin
            d_rd_en[{pc2, 1'b0}] = 1'b1; d_rd_addr[{pc2, 1'b0}] = 9'(c_addr + 9'(i1));
            d_rd_en[{pc2, 1'b1}] = 1'b1; d_rd_addr[{pc2, 1'b1}] = 9'(c_addr + 9'(i1));
          end
        end
        uop.first    = 1'b1;
        uop.last     = 1'b1;
        uop.dst_bank = {pd, 1'b0};
        uop.dst_addr = 9'(o_addr + 9'(i1));
      end
      OP_ACT: begin    // i1 = position p, i0 = channel
        uop.kind = U_ACT;
        pa = 2'(a_bank[2:1] + i0[5:4]);
        uop.a_pair = pa;
        uop.hi     = i0[3];
        uop.lane   = i0[2:0];
        if (state == C_RUN) begin
          d_rd_en[{pa, i0[3]}]   = 1'b1;
          d_rd_addr[{pa, i0[3]}] = 9'(a_addr + 9'(i1));
        end
        uop.first    = 1'b1;
        uop.last     = 1'b1;
        uop.dst_bank = 3'(o_bank + 3'(i0[5:3]));
        uop.dst_lane = i0[2:0];
        uop.dst_addr = 9'(o_addr + 9'(i1));
      end
      default: uop.valid = 1'b0;
    endcase
  end

  // Operands of one element-wise or attention step must sit in different
  // bank pairs: each bank has a single read port.
  a_ew_ac: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_RUN && op_q == OP_EW && !flags_q[1]) |-> (pa != pb));
  a_ew_bc: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_RUN && op_q == OP_EW && flags_q[2]) |-> (pb != pc2));
  a_ew_ab: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_RUN && op_q == OP_EW && !flags_q[1] && flags_q[2]) |-> (pa != pc2));
  a_mmkv:  assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_RUN && op_q == OP_MMKV) |-> (pa != pb));
endmodule
