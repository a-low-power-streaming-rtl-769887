// tb_mem_ctrl -- runs load commands to every target and store commands
// through the memory controller, with a random input-valid pattern, random
// refusals from the data SRAM and random output back-pressure. Reference
// arrays record what each write port must receive; the output stream must
// reproduce the stored words in order. Checks that busy drops only when a
// command is complete and that stalls were seen.
module tb_mem_ctrl;
  import se_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_store = 0, busy, stall;
  target_e cmd_target = TGT_DATA;
  logic [2:0] cmd_bank = 0;
  logic [8:0] cmd_addr = 0;
  logic [9:0] cmd_count = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [79:0] in_data = 0, out_data;
  logic d_rreq, d_rgnt, d_wreq, d_wgnt;
  logic [2:0] d_rbank, d_wbank;
  logic [8:0] d_raddr, d_waddr;
  logic [79:0] d_rdata, d_wdata;
  logic w_we, b_we, b_bank, i_we;
  logic [1:0] w_bank;
  logic [8:0] w_addr, b_addr;
  logic [79:0] w_data;
  logic [9:0] b_data;
  logic [4:0] i_addr;
  logic [63:0] i_data;
  int checks = 0, failures = 0, stalls = 0;

  mem_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memories seen by the controller
  logic [79:0] dmem [8][512];
  logic [79:0] wmem [4][512];
  logic [9:0]  bmem [2][512];
  logic [31:0] imem [32];
  logic        gnt_r, gnt_w;
  always_ff @(posedge clk) begin
    gnt_r <= 1'($urandom);
    gnt_w <= 1'($urandom);
  end
  assign d_rgnt = d_rreq && gnt_r;
  assign d_wgnt = d_wreq && gnt_w;
  always_ff @(posedge clk) begin
    if (d_rgnt) d_rdata <= dmem[d_rbank][d_raddr];
    if (d_wgnt) dmem[d_wbank][d_waddr] <= d_wdata;
    if (w_we) wmem[w_bank][w_addr] <= w_data;
    if (b_we) bmem[b_bank][b_addr] <= b_data;
    if (i_we) begin
      imem[i_addr] <= i_data[31:0];
      imem[5'(i_addr + 1)] <= i_data[63:32];
    end
    if (stall) stalls++;
  end

  logic [79:0] words [64];
  task automatic run_cmd(input logic st, input target_e tg, input logic [2:0] bk,
                         input logic [8:0] ad, input int n);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_store = st; cmd_target = tg; cmd_bank = bk; cmd_addr = ad;
    cmd_count = 10'(n);
    @(negedge clk);
    cmd_valid = 0;
    if (!st) begin
      for (int i = 0; i < n; i++) begin
        words[i] = {16'($urandom), 32'($urandom), 32'($urandom)};
        in_data = words[i];
        in_valid = 0;
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
    end else begin
      for (int i = 0; i < n; i++) begin
        out_ready = 1'($urandom);
        @(posedge clk);
        while (!(out_valid && out_ready)) begin
          @(negedge clk);
          out_ready = 1'($urandom);
          @(posedge clk);
        end
        checks++;
        if (out_data !== dmem[bk][9'(ad + 9'(i))]) failures++;
        @(negedge clk);
        out_ready = 0;
      end
    end
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      int n;
      logic [2:0] bk;
      logic [8:0] ad;
      n = $urandom_range(1, 40); bk = 3'($urandom); ad = 9'($urandom_range(0, 400));
      run_cmd(0, TGT_DATA, bk, ad, n);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (dmem[bk][9'(ad + 9'(i))] !== words[i]) failures++;
      end
      run_cmd(1, TGT_DATA, bk, ad, n);
      n = $urandom_range(1, 40); bk = {1'b0, 2'($urandom)}; ad = 9'($urandom_range(0, 250));
      run_cmd(0, TGT_WEIGHT, bk, ad, n);
      for (int i = 0; i < n; i++) begin
        checks++;
        if (wmem[bk[1:0]][9'(ad + 9'(i))] !== words[i]) failures++;
      end
      n = $urandom_range(1, 20); bk = {2'b0, 1'($urandom)}; ad = 9'($urandom_range(0, 300));
      run_cmd(0, TGT_BIAS, bk, ad, n);
      for (int i = 0; i < n * 8; i++) begin
        checks++;
        if (bmem[bk[0]][9'(ad + 9'(i))] !== words[i / 8][(i % 8) * 10 +: 10]) failures++;
      end
      n = $urandom_range(1, 16);
      run_cmd(0, TGT_INSTR, 3'd0, 9'd0, n);
      for (int i = 0; i < 2 * n; i++) begin
        checks++;
        if (imem[i] !== words[i / 2][(i % 2) * 32 +: 32]) failures++;
      end
    end
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
