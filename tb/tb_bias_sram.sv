// tb_bias_sram -- fills both bias banks, then reads one bank while the other
// is rewritten (ping-pong) and checks every read and the bank_active flags.
module tb_bias_sram;
  localparam int D = 512;
  logic clk = 0, rd_en = 0, rd_bank = 0, wr_en = 0, wr_bank = 0;
  logic [8:0] rd_addr = 0, wr_addr = 0;
  logic [9:0] rd_data, wr_data = 0;
  logic [1:0] bank_active;
  int checks = 0, failures = 0;

  bias_sram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [9:0] ref_mem [2][D];
  initial begin
    logic [9:0] exp;
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_addr = 9'(a); wr_data = 10'($urandom);
        ref_mem[b][a] = wr_data;
      end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      rd_en = 1'($urandom); rd_bank = 1'($urandom); rd_addr = 9'($urandom);
      wr_en = 1'($urandom); wr_bank = ~rd_bank; wr_addr = 9'($urandom); wr_data = 10'($urandom);
      exp = ref_mem[rd_bank][rd_addr];
      #1;
      checks++;
      if (bank_active !== {(rd_en && rd_bank) || (wr_en && wr_bank),
                           (rd_en && !rd_bank) || (wr_en && !wr_bank)}) failures++;
      @(posedge clk);
      if (wr_en) ref_mem[wr_bank][wr_addr] = wr_data;
      #1;
      if (rd_en) begin
        checks++;
        if (rd_data !== exp) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
