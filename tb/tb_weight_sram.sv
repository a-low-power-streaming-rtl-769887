// tb_weight_sram -- fills all 4 banks through the write port, then reads
// random addresses of both halves and checks the word pair against the
// reference, while writes to the other half go on (ping-pong use), and the
// bank_active flags.
module tb_weight_sram;
  localparam int D = 320;
  logic clk = 0, rd_en = 0, rd_half = 0, wr_en = 0;
  logic [8:0] rd_addr = 0, wr_addr = 0;
  logic [1:0][79:0] rd_data;
  logic [1:0] wr_bank = 0;
  logic [79:0] wr_data = 0;
  logic [3:0] bank_active;
  int checks = 0, failures = 0;

  weight_sram dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [79:0] ref_mem [4][D];
  initial begin
    logic [1:0][79:0] exp;
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(b); wr_addr = 9'(a);
        wr_data = {16'($urandom), 32'($urandom), 32'($urandom)};
        ref_mem[b][a] = wr_data;
      end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      rd_en = 1'($urandom); rd_half = 1'($urandom); rd_addr = 9'($urandom_range(0, D - 1));
      wr_en = 1'($urandom); wr_bank = {~rd_half, 1'($urandom)}; wr_addr = 9'($urandom_range(0, D - 1));
      wr_data = {16'($urandom), 32'($urandom), 32'($urandom)};
      exp[0] = ref_mem[{rd_half, 1'b0}][rd_addr];
      exp[1] = ref_mem[{rd_half, 1'b1}][rd_addr];
      #1;
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (bank_active[b] !== ((rd_en && rd_half == b[1]) || (wr_en && wr_bank == 2'(b)))) failures++;
      end
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
