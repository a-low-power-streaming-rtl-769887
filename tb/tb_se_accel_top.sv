// tb_se_accel_top -- end-to-end test of the whole accelerator at its full
// size (no parameter overrides), driven only through its ports.
//
// A model of the off-chip memory feeds the input stream (programs, feature
// maps, weights, biases, with random gaps) and takes the output stream with
// random back-pressure. Two programs run one after the other:
//   1. loads a 32-channel input of length 20, two weight banks, biases and
//      an operand tensor; a dilated (2), strided (2), zero-padded k=3
//      convolution 32 -> 16 channels with ReLU runs while a store of the
//      input runs in the background (forcing memory-controller stalls);
//      then an element-wise -(a*w)+c and an element-wise w+c with ReLU.
//   2. loads a second weight/bias set into the other halves of the
//      ping-pong weight and bias memories while the datapath runs an
//      element-wise product, the two attention steps (K^T V into the local
//      buffer, then Q (K^T V)), sigmoid and tanh through the LUT, a k=1
//      convolution from the other memory halves, and a store of results.
// After each program the data memory is compared word by word with a
// reference model built on the real-number FP10 reference, in the same
// operation order as the hardware (pairwise tree, accumulator from the
// bias, FMA accumulation with a rounding after multiply and after add).
// LUT results are exact where the table is used and within one unit in the
// last place in the linear region. Both output streams are compared with the
// model. Each compute instruction must take exactly (micro-operations + 7)
// cycles, i.e. one MAC step per cycle. Every mechanism is counted and a
// mechanism that never happens is a failure.
module tb_se_accel_top;
  import fp10_pkg::*;
  import se_pkg::*;
  import tb_fp10_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] prog_words = 0;
  logic done, busy;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  word_t in_data = '0, out_data;
  logic [4:0] st_zero_skip;
  logic [7:0] st_dbank_active;
  logic [3:0] st_wbank_active;
  logic [1:0] st_bbank_active;
  logic st_dma_stall, st_dma_wait, st_lut, st_pad;
  int checks = 0, failures = 0;

  se_accel_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  word_t dm [8][512];
  bit    dv [8][512];
  word_t wm [4][320];
  fp10_t bm [2][512];
  word_t lrb [10][2];

  function automatic fp10_t lane(input word_t w, input int l);
    return w[l*10 +: 10];
  endfunction
  function automatic fp10_t rneg(input fp10_t a);
    return (a[8:4] == 0) ? 10'h000 : {~a[9], a[8:0]};
  endfunction
  function automatic fp10_t rrelu(input fp10_t a);
    return (a[9] || a[8:4] == 0) ? 10'h000 : a;
  endfunction
  // one PE cell
  function automatic fp10_t pe_ref(input fp10_t d, w, c, input bit a_one, c_en, ng);
    fp10_t p, ad;
    ad = c_en ? c : 10'h000;
    if (!a_one && d[8:4] == 0) return ad;
    p = ref_mul(a_one ? 10'h0F0 : d, w);
    if (ng) p = rneg(p);
    return ref_add(p, ad);
  endfunction
  function automatic fp10_t tree8(input fp10_t y [8]);
    return ref_add(ref_add(ref_add(y[0], y[1]), ref_add(y[2], y[3])),
                   ref_add(ref_add(y[4], y[5]), ref_add(y[6], y[7])));
  endfunction
  function automatic word_t dut_word(input int b, input int a);
    case (b)
      0: return dut.u_dsram.g_bank[0].u_bank.mem[a];
      1: return dut.u_dsram.g_bank[1].u_bank.mem[a];
      2: return dut.u_dsram.g_bank[2].u_bank.mem[a];
      3: return dut.u_dsram.g_bank[3].u_bank.mem[a];
      4: return dut.u_dsram.g_bank[4].u_bank.mem[a];
      5: return dut.u_dsram.g_bank[5].u_bank.mem[a];
      6: return dut.u_dsram.g_bank[6].u_bank.mem[a];
      default: return dut.u_dsram.g_bank[7].u_bank.mem[a];
    endcase
  endfunction

  task automatic m_set(input int b, a, l, input fp10_t v);
    dm[b % 8][a][l*10 +: 10] = v;
    dv[b % 8][a] = 1;
  endtask

  task automatic m_conv(input int ab, aa, ob, oa, lo, li, g, oc, k, dl, st, os,
                        input int wh, wb, bb, bbase, input bit relu);
    for (int p = 0; p < lo; p++)
      for (int o = 0; o < oc; o++) begin
        fp10_t acc;
        for (int kk = 0; kk < k; kk++)
          for (int gg = 0; gg < g; gg++) begin
            int ip;
            fp10_t s [2];
            ip = p * st + kk * dl - ((k - 1) / 2) * dl;
            for (int h = 0; h < 2; h++) begin
              fp10_t y [8];
              for (int l = 0; l < 8; l++) begin
                fp10_t d;
                d = (ip < 0 || ip >= li) ? 10'h000 : lane(dm[(ab + 2 * gg + h) % 8][aa + ip], l);
                y[l] = pe_ref(d, lane(wm[2 * wh + h][wb + (o * k + kk) * g + gg], l), 0, 0, 0, 0);
              end
              s[h] = tree8(y);
            end
            acc = ref_add((kk == 0 && gg == 0) ? bm[bb][bbase + o] : acc, ref_add(s[0], s[1]));
          end
        m_set(ob + o / 8, oa + p * os, o % 8, relu ? rrelu(acc) : acc);
      end
  endtask

  task automatic m_ew(input int ab, aa, bb, ba, cb, ca, ob, oa, len, g, input bit relu, a_one, c_en, ng);
    for (int p = 0; p < len; p++)
      for (int gg = 0; gg < g; gg++)
        for (int h = 0; h < 2; h++)
          for (int l = 0; l < 8; l++) begin
            fp10_t r;
            r = pe_ref(lane(dm[(ab + 2 * gg + h) % 8][aa + p], l), lane(dm[(bb + 2 * gg + h) % 8][ba + p], l),
                     lane(dm[(cb + 2 * gg + h) % 8][ca + p], l), a_one, c_en, ng);
            m_set(ob + 2 * gg + h, oa + p, l, relu ? rrelu(r) : r);
          end
  endtask

  task automatic m_mmkv(input int ab, aa, bb, ba, len);
    for (int i = 0; i < 8; i++)
      for (int h = 0; h < 2; h++)
        for (int l = 0; l < 8; l++) begin
          fp10_t y;
          y = 0;
          for (int j = 0; j < len; j++)
            y = pe_ref(lane(dm[ab + h][aa + j], i), lane(dm[bb + h][ba + j], l), y, 0, 1, 0);
          lrb[i][h][l*10 +: 10] = y;
        end
  endtask

  task automatic m_mmq(input int ab, aa, ob, oa, len);
    for (int p = 0; p < len; p++)
      for (int h = 0; h < 2; h++)
        for (int l = 0; l < 8; l++) begin
          fp10_t y;
          y = 0;
          for (int i = 0; i < 8; i++)
            y = pe_ref(lane(dm[ab + h][aa + p], i), lane(lrb[i][h], l), y, 0, 1, 0);
          m_set(ob + h, oa + p, l, y);
        end
  endtask

  // LUT: compare with the exact function and adopt the hardware value
  task automatic m_act(input int ab, aa, ob, oa, len, g, input bit fn);
    for (int p = 0; p < len; p++)
      for (int ch = 0; ch < 16 * g; ch++) begin
        fp10_t x, y, e;
        real xr, fr, ulp;
        x = lane(dm[ab + ch / 8][aa + p], ch % 8);
        y = lane(dut_word(ob + ch / 8, oa + p), ch % 8);
        xr = to_real(x);
        fr = fn ? $tanh(xr) : 1.0 / (1.0 + $exp(-xr));
        e = to_fp10(fr);
        checks++;
        if (x[8:4] >= 11) begin
          if (y !== e) begin
            failures++;
            $display("LUT x=%h y=%h exp=%h", x, y, e);
          end
        end else begin
          ulp = (e[8:4] == 0) ? to_real(10'h010)
                : to_real({1'b0, e[8:4], 4'd1}) - to_real({1'b0, e[8:4], 4'd0});
          if (to_real(y) - to_real(e) > ulp || to_real(e) - to_real(y) > ulp) begin
            failures++;
            $display("LUT approx x=%h y=%h exp=%h", x, y, e);
          end
        end
        m_set(ob + ch / 8, oa + p, ch % 8, y);
      end
  endtask

  task automatic compare_all(input string tag);
    int bad;
    bad = 0;
    for (int b = 0; b < 8; b++)
      for (int a = 0; a < 512; a++)
        if (dv[b][a]) begin
          checks++;
          if (dut_word(b, a) !== dm[b][a]) begin
            failures++;
            bad++;
            if (bad < 8) $display("%s: bank %0d addr %0d dut %h model %h", tag, b, a, dut_word(b, a), dm[b][a]);
          end
        end
  endtask

  // ---------------------------------------------------------- off-chip side
  word_t inq[$];
  word_t outq[$];
  word_t out_exp[$];

  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      void'(inq.pop_front());
    end
  end
  always @(negedge clk) begin
    in_valid = (inq.size() != 0) && ($urandom_range(0, 3) != 0);
    in_data  = (inq.size() != 0) ? inq[0] : '0;
    out_ready = ($urandom_range(0, 2) != 0);
  end
  always @(posedge clk) if (out_valid && out_ready) outq.push_back(out_data);

  // ---------------------------------------------------------- mechanisms
  int n_lutsig, n_luttanh, n_skip, n_pad, n_stall, n_wait, n_gated, n_uop;
  int n_wbank[4], n_bbank[2], n_lrbw, n_mmq_hold;
  always @(posedge clk) if (rst_n) begin
    if (st_lut && !dut.u1.func) n_lutsig++;
    if (st_lut && dut.u1.func) n_luttanh++;
    n_skip += st_zero_skip;
    if (st_pad) n_pad++;
    if (st_dma_stall) n_stall++;
    if (st_dma_wait) n_wait++;
    if (busy && st_dbank_active != 8'hFF) n_gated++;
    if (dut.u0.valid) n_uop++;
    for (int b = 0; b < 4; b++) if (st_wbank_active[b] && dut.w_rd_en) n_wbank[b]++;
    for (int b = 0; b < 2; b++) if (st_bbank_active[b] && dut.bias_re) n_bbank[b]++;
    if (dut.lrb_we) n_lrbw++;
    if (dut.u1.valid && dut.u1.use_hold) n_mmq_hold++;
  end

  // duration of every compute instruction: fetch to next fetch
  int cyc = 0, run_start, run_uops, durations[$], uop_counts[$];
  always @(posedge clk) begin
    cyc++;
    if (dut.u_ctrl.state == dut.u_ctrl.C_FETCH &&
        (dut.instr[31:28] inside {4'd2, 4'd3, 4'd4, 4'd5, 4'd6})) begin
      run_start = cyc;
      run_uops = 0;
    end
    if (dut.u0.valid) run_uops++;
    if (dut.u_ctrl.state == dut.u_ctrl.C_DRAIN && dut.u_ctrl.drain_cnt == 0) begin
      durations.push_back(cyc - run_start + 1);
      uop_counts.push_back(run_uops);
    end
  end

  // ---------------------------------------------------------- program helpers
  logic [31:0] prog[$];
  function automatic logic [31:0] cfg(input int r, input int v);
    return {4'(OP_CFG), 4'(r), 24'(v)};
  endfunction
  function automatic logic [31:0] op(input opcode_e o, input int fl);
    return {4'(o), 23'd0, 5'(fl)};
  endfunction
  function automatic logic [31:0] ld(input target_e t, input int bank, addr, cnt);
    return {4'(OP_LOAD), 2'(t), 3'(bank), 9'(addr), 10'(cnt), 4'd0};
  endfunction
  function automatic logic [31:0] stor(input int bank, addr, cnt);
    return {4'(OP_STORE), 2'd0, 3'(bank), 9'(addr), 10'(cnt), 4'd0};
  endfunction
  function automatic int ba(input int bank, addr);
    return (bank << 9) | addr;
  endfunction

  word_t payload[$];
  task automatic push_data(input int bank, addr, cnt);
    for (int i = 0; i < cnt; i++) begin
      word_t w;
      for (int l = 0; l < 8; l++) w[l*10 +: 10] = rnd_code();
      dm[bank][addr + i] = w;
      dv[bank][addr + i] = 1;
      payload.push_back(w);
    end
  endtask
  task automatic push_weight(input int bank, addr, cnt);
    for (int i = 0; i < cnt; i++) begin
      word_t w;
      for (int l = 0; l < 8; l++) w[l*10 +: 10] = rnd_code();
      wm[bank][addr + i] = w;
      payload.push_back(w);
    end
  endtask
  task automatic push_bias(input int bank, addr, cnt);
    for (int i = 0; i < cnt; i++) begin
      word_t w;
      for (int l = 0; l < 8; l++) begin
        w[l*10 +: 10] = rnd_code();
        bm[bank][addr + 8 * i + l] = w[l*10 +: 10];
      end
      payload.push_back(w);
    end
  endtask

  task automatic run_program();
    int n;
    if (prog.size() % 2) prog.push_back(op(OP_HALT, 0));
    n = prog.size() / 2;
    for (int i = 0; i < n; i++) inq.push_back({16'd0, prog[2*i+1], prog[2*i]});
    foreach (payload[i]) inq.push_back(payload[i]);
    payload.delete();
    @(negedge clk);
    prog_words = 5'(n);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    prog.delete();
  endtask

  task automatic check_durations(input int exp_uops[$]);
    checks++;
    if (durations.size() != exp_uops.size()) begin
      failures++;
      $display("%0d compute instructions, expected %0d", durations.size(), exp_uops.size());
    end else
      foreach (exp_uops[i]) begin
        checks += 2;
        if (uop_counts[i] != exp_uops[i]) begin
          failures++;
          $display("instruction %0d: %0d micro-operations, expected %0d", i, uop_counts[i], exp_uops[i]);
        end
        if (durations[i] != exp_uops[i] + 7) begin
          failures++;
          $display("instruction %0d: %0d cycles, expected %0d", i, durations[i], exp_uops[i] + 7);
        end
      end
    durations.delete();
    uop_counts.delete();
  endtask

  task automatic check_stream();
    checks++;
    if (outq.size() != out_exp.size()) begin
      failures++;
      $display("%0d output words, expected %0d", outq.size(), out_exp.size());
    end else
      foreach (out_exp[i]) begin
        checks++;
        if (outq[i] !== out_exp[i]) begin
          failures++;
          $display("output word %0d: %h expected %h", i, outq[i], out_exp[i]);
        end
      end
    outq.delete();
    out_exp.delete();
  endtask

  // ---------------------------------------------------------- stimulus
  localparam int L = 20, LO = 10, NW = 16 * 3 * 2;
  int n_relu0;

  initial begin
    for (int b = 0; b < 8; b++) for (int a = 0; a < 512; a++) dv[b][a] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- program 1
    prog.push_back(ld(TGT_DATA, 0, 0, L));   push_data(0, 0, L);
    prog.push_back(ld(TGT_DATA, 1, 0, L));   push_data(1, 0, L);
    prog.push_back(ld(TGT_DATA, 2, 0, L));   push_data(2, 0, L);
    prog.push_back(ld(TGT_DATA, 3, 0, L));   push_data(3, 0, L);
    prog.push_back(ld(TGT_WEIGHT, 0, 0, NW)); push_weight(0, 0, NW);
    prog.push_back(ld(TGT_WEIGHT, 1, 0, NW)); push_weight(1, 0, NW);
    prog.push_back(ld(TGT_BIAS, 0, 0, 2));   push_bias(0, 0, 2);
    prog.push_back(ld(TGT_DATA, 6, 0, LO));  push_data(6, 0, LO);
    prog.push_back(ld(TGT_DATA, 7, 0, LO));  push_data(7, 0, LO);
    prog.push_back(op(OP_WAIT, 0));
    prog.push_back(cfg(R_SRC_A, ba(0, 0)));
    prog.push_back(cfg(R_DST, ba(4, 0)));
    prog.push_back(cfg(R_LEN, (L << 10) | LO));
    prog.push_back(cfg(R_CHAN, (16 << 3) | 2));
    prog.push_back(cfg(R_CONV, (1 << 9) | (2 << 7) | (2 << 3) | 3));
    prog.push_back(cfg(R_MEM, 0));
    prog.push_back(stor(0, 0, L));            // runs beside the convolution
    prog.push_back(op(OP_CONV, 1));
    prog.push_back(op(OP_WAIT, 0));
    prog.push_back(cfg(R_SRC_A, ba(4, 0)));
    prog.push_back(cfg(R_SRC_B, ba(6, 0)));
    prog.push_back(cfg(R_SRC_C, ba(0, 0)));
    prog.push_back(cfg(R_DST, ba(2, 100)));
    prog.push_back(cfg(R_CHAN, 1));
    prog.push_back(op(OP_EW, 4'b1100));      // -(a*w) + c
    prog.push_back(cfg(R_SRC_B, ba(2, 100)));
    prog.push_back(cfg(R_SRC_C, ba(6, 0)));
    prog.push_back(cfg(R_DST, ba(4, 100)));
    prog.push_back(op(OP_EW, 4'b0111));      // ReLU(w + c)
    prog.push_back(op(OP_HALT, 0));
    for (int i = 0; i < L; i++) out_exp.push_back(dm[0][i]);
    run_program();

    m_conv(0, 0, 4, 0, LO, L, 2, 16, 3, 2, 2, 1, 0, 0, 0, 0, 1);
    n_relu0 = 0;
    for (int b = 4; b < 6; b++) for (int a = 0; a < LO; a++)
      for (int l = 0; l < 8; l++) if (lane(dm[b][a], l) == 0) n_relu0++;
    m_ew(4, 0, 6, 0, 0, 0, 2, 100, LO, 1, 0, 0, 1, 1);
    m_ew(4, 0, 2, 100, 6, 0, 4, 100, LO, 1, 1, 1, 1, 0);
    compare_all("program 1");
    check_durations('{LO * 16 * 3 * 2, LO, LO});
    check_stream();

    // ---------------- program 2
    prog.push_back(ld(TGT_WEIGHT, 2, 0, 8)); push_weight(2, 0, 8);
    prog.push_back(ld(TGT_WEIGHT, 3, 0, 8)); push_weight(3, 0, 8);
    prog.push_back(ld(TGT_BIAS, 1, 40, 1));  push_bias(1, 40, 1);
    prog.push_back(cfg(R_SRC_A, ba(4, 100)));
    prog.push_back(cfg(R_SRC_B, ba(2, 100)));
    prog.push_back(cfg(R_DST, ba(6, 100)));
    prog.push_back(cfg(R_LEN, LO));
    prog.push_back(cfg(R_CHAN, 1));
    prog.push_back(op(OP_EW, 0));             // a * w
    prog.push_back(op(OP_MMKV, 0));           // K = bank 4, V = bank 2
    prog.push_back(cfg(R_SRC_A, ba(6, 100)));
    prog.push_back(cfg(R_DST, ba(0, 100)));
    prog.push_back(op(OP_MMQ, 0));            // Q = bank 6
    prog.push_back(cfg(R_SRC_A, ba(0, 100)));
    prog.push_back(cfg(R_DST, ba(2, 200)));
    prog.push_back(op(OP_ACT, 0));            // sigmoid
    prog.push_back(cfg(R_SRC_A, ba(6, 100)));
    prog.push_back(cfg(R_DST, ba(4, 200)));
    prog.push_back(op(OP_ACT, 16));           // tanh
    prog.push_back(op(OP_WAIT, 0));
    prog.push_back(cfg(R_DST, ba(0, 300)));
    prog.push_back(cfg(R_LEN, (LO << 10) | LO));
    prog.push_back(cfg(R_CHAN, (8 << 3) | 1));
    prog.push_back(cfg(R_CONV, (1 << 9) | (1 << 7) | (1 << 3) | 1));
    prog.push_back(cfg(R_MEM, (1 << 19) | (40 << 10) | (1 << 9)));
    prog.push_back(op(OP_CONV, 0));
    prog.push_back(stor(2, 200, LO));
    prog.push_back(op(OP_WAIT, 0));
    prog.push_back(op(OP_HALT, 0));
    run_program();

    m_ew(4, 100, 2, 100, 0, 0, 6, 100, LO, 1, 0, 0, 0, 0);
    m_mmkv(4, 100, 2, 100, LO);
    m_mmq(6, 100, 0, 100, LO);
    m_act(0, 100, 2, 200, LO, 1, 0);
    m_act(6, 100, 4, 200, LO, 1, 1);
    m_conv(6, 100, 0, 300, LO, LO, 1, 8, 1, 1, 1, 1, 1, 0, 1, 40, 0);
    for (int i = 0; i < LO; i++) out_exp.push_back(dm[2][200 + i]);
    compare_all("program 2");
    check_durations('{LO, 8 * LO, 8 * LO, 16 * LO, 16 * LO, LO * 8});
    check_stream();

    // ---------------- mechanisms
    begin
      string names [16] = '{"pad", "zero-skip", "relu-zero", "mem-stall", "dma-wait",
                            "bank-gating", "lut-sigmoid", "lut-tanh", "weight-bank0",
                            "weight-bank1", "weight-bank2", "weight-bank3", "bias-bank0",
                            "bias-bank1", "lrb-write", "mmq-hold"};
      int counts [16];
      counts = '{n_pad, n_skip, n_relu0, n_stall, n_wait, n_gated, n_lutsig, n_luttanh,
                 n_wbank[0], n_wbank[1], n_wbank[2], n_wbank[3], n_bbank[0], n_bbank[1],
                 n_lrbw, n_mmq_hold};
      for (int i = 0; i < 16; i++) begin
        checks++;
        $display("mechanism %-12s %0d", names[i], counts[i]);
        if (counts[i] == 0) failures++;
      end
      $display("micro-operations %0d", n_uop);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
