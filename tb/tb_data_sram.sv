// tb_data_sram -- random datapath reads and masked writes on all 8 banks
// against a reference array, memory-controller reads and writes that are
// granted only when their bank's port is free (and then take effect), and
// the bank_active clock-gating flags.
module tb_data_sram;
  localparam int B = 8, D = 64;
  logic clk = 0;
  logic [B-1:0] rd_en = 0, wr_en = 0;
  logic [B-1:0][5:0] rd_addr = 0, wr_addr = 0;
  logic [B-1:0][79:0] rd_data, wr_data = 0;
  logic [B-1:0][7:0] wr_mask = 0;
  logic dma_rreq = 0, dma_wreq = 0, dma_rgnt, dma_wgnt;
  logic [2:0] dma_rbank = 0, dma_wbank = 0;
  logic [5:0] dma_raddr = 0, dma_waddr = 0;
  logic [79:0] dma_rdata, dma_wdata = 0;
  logic [B-1:0] bank_active;
  int checks = 0, failures = 0;

  data_sram #(.BANKS(B), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [79:0] ref_mem [B][D];
  logic [B-1:0][79:0] exp_rd;
  logic [B-1:0] exp_rd_v;
  logic [79:0] exp_dma;
  logic exp_dma_v;
  int conflicts = 0;

  initial begin
    // initialise through full-mask writes
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        wr_en[b] = 1; wr_mask[b] = '1; wr_addr[b] = 6'(a);
        wr_data[b] = {16'($urandom), 32'($urandom), 32'($urandom)};
        ref_mem[b][a] = wr_data[b];
      end
    end
    @(negedge clk);
    wr_en = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        rd_en[b] = 1'($urandom); rd_addr[b] = 6'($urandom);
        wr_en[b] = ($urandom_range(0, 3) == 0); wr_addr[b] = 6'($urandom);
        wr_mask[b] = 8'($urandom);
        wr_data[b] = {16'($urandom), 32'($urandom), 32'($urandom)};
      end
      dma_rreq = 1'($urandom); dma_rbank = 3'($urandom); dma_raddr = 6'($urandom);
      dma_wreq = 1'($urandom); dma_wbank = 3'($urandom); dma_waddr = 6'($urandom);
      dma_wdata = {16'($urandom), 32'($urandom), 32'($urandom)};
      #1;
      checks++;
      if (dma_rgnt !== (dma_rreq && !rd_en[dma_rbank])) failures++;
      checks++;
      if (dma_wgnt !== (dma_wreq && !wr_en[dma_wbank])) failures++;
      if ((dma_rreq && !dma_rgnt) || (dma_wreq && !dma_wgnt)) conflicts++;
      for (int b = 0; b < B; b++) begin
        exp_rd_v[b] = rd_en[b];
        exp_rd[b]   = ref_mem[b][rd_addr[b]];
        checks++;
        if (bank_active[b] !== (rd_en[b] || wr_en[b] || (dma_rgnt && dma_rbank == 3'(b)) ||
                                (dma_wgnt && dma_wbank == 3'(b)))) failures++;
      end
      exp_dma_v = dma_rgnt;
      exp_dma   = ref_mem[dma_rbank][dma_raddr];
      @(posedge clk);
      for (int b = 0; b < B; b++)
        if (wr_en[b])
          for (int l = 0; l < 8; l++)
            if (wr_mask[b][l]) ref_mem[b][wr_addr[b]][l*10 +: 10] = wr_data[b][l*10 +: 10];
      if (dma_wgnt) ref_mem[dma_wbank][dma_waddr] = dma_wdata;
      #1;
      for (int b = 0; b < B; b++)
        if (exp_rd_v[b]) begin
          checks++;
          if (rd_data[b] !== exp_rd[b]) failures++;
        end
      if (exp_dma_v) begin
        checks++;
        if (dma_rdata !== exp_dma) failures++;
      end
    end
    checks++;
    if (conflicts == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
