// tb_controller -- runs a program through the controller with a model of the
// instruction register and of a memory controller that stays busy for a
// while after each command. Every issued micro-operation is compared with a
// loop-nest reference: data-bank read enables and addresses, padding, weight
// address, first/last, lanes and destinations, for a dilated convolution, a
// strided convolution, both attention steps, an element-wise and an LUT
// instruction. Also checks the boot command, the number of cycles of each
// compute instruction (micro-operations + drain), the LOAD wait and done.
module tb_controller;
  import se_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] prog_words = 5'd7;
  logic done, busy;
  logic [4:0] pc;
  logic [31:0] instr;
  logic cmd_valid, cmd_ready, cmd_store, dma_busy;
  target_e cmd_target;
  logic [2:0] cmd_bank;
  logic [8:0] cmd_addr;
  logic [9:0] cmd_count;
  logic [7:0] d_rd_en;
  logic [7:0][8:0] d_rd_addr;
  logic w_rd_en, w_rd_half, bias_bank;
  logic [8:0] w_rd_addr;
  uop_t uop;
  logic dma_wait;
  int checks = 0, failures = 0;

  controller #(.DRAIN(5)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- program
  logic [31:0] prog [32];
  function automatic logic [31:0] cfg(input int r, input int v);
    return {4'(OP_CFG), 4'(r), 24'(v)};
  endfunction
  function automatic logic [31:0] opx(input opcode_e o, input int fl);
    return {4'(o), 23'd0, 5'(fl)};
  endfunction
  assign instr = prog[pc];

  // ---- memory-controller model: busy for 20 cycles after a command
  int dma_left = 0, cmds = 0, waits = 0;
  assign cmd_ready = (dma_left == 0);
  assign dma_busy  = (dma_left != 0);
  always_ff @(posedge clk) begin
    if (cmd_valid && cmd_ready) begin
      dma_left <= 20;
      cmds <= cmds + 1;
      if (cmds == 0) begin
        checks++;
        if (cmd_target !== TGT_INSTR || cmd_count !== 10'd7) failures++;
      end
    end else if (dma_left != 0) dma_left <= dma_left - 1;
    if (dma_wait) waits <= waits + 1;
  end

  // ---- expected micro-operation stream
  typedef struct {
    logic [7:0] en;
    logic [8:0] addr0;     // address at the lowest enabled bank
    logic pad, first, last;
    logic [8:0] waddr;
    logic [2:0] lane, dst_bank, dst_lane;
    logic [8:0] dst_addr;
  } exp_t;
  exp_t q[$];

  function automatic logic [7:0] pair(input int p);
    return 8'(3) << (2 * (p % 4));
  endfunction

  task automatic exp_conv(input int ab, aa, ob, oa, lo, li, g, oc, k, dl, st, os, wb);
    for (int p = 0; p < lo; p++)
      for (int o = 0; o < oc; o++)
        for (int kk = 0; kk < k; kk++)
          for (int gg = 0; gg < g; gg++) begin
            exp_t e;
            int ip;
            ip = p * st + kk * dl - ((k - 1) / 2) * dl;
            e.pad = (ip < 0) || (ip >= li);
            e.en = e.pad ? 8'd0 : pair(ab / 2 + gg);
            e.addr0 = 9'(aa + ip);
            e.first = (kk == 0 && gg == 0);
            e.last = (kk == k - 1 && gg == g - 1);
            e.waddr = 9'(wb + (o * k + kk) * g + gg);
            e.lane = 0;
            e.dst_bank = 3'(ob + o / 8);
            e.dst_lane = 3'(o % 8);
            e.dst_addr = 9'(oa + p * os);
            q.push_back(e);
          end
  endtask

  int n_issued = 0;
  always @(posedge clk) if (rst_n && uop.valid) begin
    exp_t e;
    int lb;
    n_issued++;
    if (q.size() == 0) begin
      failures++;
      $display("unexpected micro-operation");
    end else begin
      e = q.pop_front();
      checks++;
      if (d_rd_en !== e.en) begin
        failures++;
        if (failures < 10) $display("rd_en %b exp %b", d_rd_en, e.en);
      end
      lb = -1;
      for (int b = 7; b >= 0; b--) if (e.en[b]) lb = b;
      if (lb >= 0) begin
        checks++;
        if (d_rd_addr[lb] !== e.addr0) begin
          failures++;
          if (failures < 10) $display("addr %0d exp %0d", d_rd_addr[lb], e.addr0);
        end
      end
      checks++;
      if (uop.first !== e.first || uop.last !== e.last) begin
        failures++;
        if (failures < 10) $display("first/last %b%b exp %b%b kind %0d", uop.first, uop.last, e.first, e.last, uop.kind);
      end
      if (uop.kind == U_CONV) begin
        checks++;
        if (uop.pad !== e.pad || w_rd_addr !== e.waddr || uop.dst_bank !== e.dst_bank ||
            uop.dst_lane !== e.dst_lane || uop.dst_addr !== e.dst_addr) begin
          failures++;
          if (failures < 10) $display("conv tag mismatch");
        end
      end else begin
        checks++;
        if (uop.lane !== e.lane || (uop.kind != U_MMKV && uop.dst_addr !== e.dst_addr) ||
            (uop.kind == U_MMKV && uop.lrb_row !== 4'(e.lane))) begin
          failures++;
          if (failures < 10) $display("lane %0d dst %0d exp %0d %0d kind %0d", uop.lane, uop.dst_addr, e.lane, e.dst_addr, uop.kind);
        end
      end
    end
  end

  // cycles between the fetch of a compute instruction and the next fetch
  int run_start, run_cycles [$], cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.state == dut.C_FETCH && (instr[31:28] inside {4'd2, 4'd3, 4'd4, 4'd5, 4'd6}))
      run_start = cyc;
    if (dut.state == dut.C_DRAIN && dut.drain_cnt == 0) run_cycles.push_back(cyc - run_start + 1);
  end

  initial begin
    int i;
    for (int k = 0; k < 32; k++) prog[k] = '0;
    i = 0;
    // dilated convolution: 32 in ch (2 groups), 3 out ch, k=5, d=2, len 6
    prog[i++] = cfg(R_SRC_A, (2 << 9) | 10);
    prog[i++] = cfg(R_DST,   (4 << 9) | 100);
    prog[i++] = cfg(R_LEN,   (6 << 10) | 6);
    prog[i++] = cfg(R_CHAN,  (3 << 3) | 2);
    prog[i++] = cfg(R_CONV,  (1 << 9) | (1 << 7) | (2 << 3) | 5);
    prog[i++] = cfg(R_MEM,   7);
    prog[i++] = opx(OP_CONV, 1);
    // strided convolution: k=3, stride 2, 9 out ch, len 4 from 8, step 2
    prog[i++] = cfg(R_LEN,   (8 << 10) | 4);
    prog[i++] = cfg(R_CHAN,  (9 << 3) | 1);
    prog[i++] = cfg(R_CONV,  (2 << 9) | (2 << 7) | (1 << 3) | 3);
    prog[i++] = opx(OP_CONV, 0);
    // attention steps on length 5: K at bank 0, V at bank 2, Q at bank 4
    prog[i++] = cfg(R_SRC_A, (0 << 9) | 20);
    prog[i++] = cfg(R_SRC_B, (2 << 9) | 30);
    prog[i++] = cfg(R_LEN,   5);
    prog[i++] = opx(OP_MMKV, 0);
    prog[i++] = cfg(R_SRC_A, (4 << 9) | 40);
    prog[i++] = opx(OP_MMQ, 0);
    // element-wise and LUT over 3 positions, 1 group
    prog[i++] = cfg(R_LEN,   3);
    prog[i++] = opx(OP_EW, 0);
    prog[i++] = opx(OP_ACT, 16);
    prog[i++] = {4'(OP_LOAD), 2'(TGT_WEIGHT), 3'd2, 9'd0, 10'd4, 4'd0};
    prog[i++] = {4'(OP_LOAD), 2'(TGT_DATA), 3'd1, 9'd0, 10'd4, 4'd0};
    prog[i++] = opx(OP_WAIT, 0);
    prog[i++] = opx(OP_HALT, 0);

    exp_conv(2, 10, 4, 100, 6, 6, 2, 3, 5, 2, 1, 1, 7);
    exp_conv(2, 10, 4, 100, 4, 8, 1, 9, 3, 1, 2, 2, 7);
    for (int r = 0; r < 8; r++)
      for (int j = 0; j < 5; j++) begin
        exp_t e;
        e.en = pair(0) | pair(1); e.addr0 = 9'(20 + j); e.first = (j == 0); e.last = (j == 4);
        e.lane = 3'(r); e.dst_addr = 100; e.pad = 0; e.waddr = 0; e.dst_bank = 0; e.dst_lane = 0;
        q.push_back(e);
      end
    for (int p = 0; p < 5; p++)
      for (int r = 0; r < 8; r++) begin
        exp_t e;
        e.en = (r == 0) ? pair(2) : 8'd0; e.addr0 = 9'(40 + p);
        e.first = (r == 0); e.last = (r == 7); e.lane = 3'(r); e.dst_addr = 9'(100 + p);
        e.pad = 0; e.waddr = 0; e.dst_bank = 0; e.dst_lane = 0;
        q.push_back(e);
      end
    for (int p = 0; p < 3; p++) begin    // EW: a = pair 2 (bank 4), w = pair 1 (bank 2)
      exp_t e;
      e.en = pair(2) | pair(1); e.addr0 = 9'(30 + p); e.first = 1; e.last = 1; e.lane = 0;
      e.dst_addr = 9'(100 + p); e.pad = 0; e.waddr = 0; e.dst_bank = 0; e.dst_lane = 0;
      q.push_back(e);
    end
    for (int p = 0; p < 3; p++)
      for (int ch = 0; ch < 16; ch++) begin
        exp_t e;
        e.en = 8'(1) << (4 + ch / 8); e.addr0 = 9'(40 + p); e.first = 1; e.last = 1;
        e.lane = 3'(ch % 8); e.dst_addr = 9'(100 + p); e.pad = 0; e.waddr = 0;
        e.dst_bank = 0; e.dst_lane = 0;
        q.push_back(e);
      end

    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("%0d micro-operations missing", q.size());
    end
    checks++;
    if (n_issued != 6*3*5*2 + 4*9*3 + 40 + 40 + 3 + 48) failures++;
    // cycle count of each compute instruction = micro-operations + DRAIN + 2
    begin
      int exp_c [6] = '{180 + 7, 108 + 7, 40 + 7, 40 + 7, 3 + 7, 48 + 7};
      checks++;
      if (run_cycles.size() != 6) failures++;
      else for (int k = 0; k < 6; k++) begin
        checks++;
        if (run_cycles[k] != exp_c[k]) begin
          failures++;
          $display("instruction %0d took %0d cycles, expected %0d", k, run_cycles[k], exp_c[k]);
        end
      end
    end
    checks++;
    if (cmds != 3 || waits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
