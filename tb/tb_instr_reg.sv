// tb_instr_reg -- writes instruction pairs at random even addresses and
// reads every address back against a reference; checks reset to zero.
module tb_instr_reg;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] waddr = 0, raddr = 0;
  logic [63:0] wdata = 0;
  logic [31:0] rdata;
  int checks = 0, failures = 0;

  instr_reg dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ref_mem [32];
  initial begin
    for (int i = 0; i < 32; i++) ref_mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      we = 1'($urandom); waddr = {4'($urandom), 1'b0};
      wdata = {32'($urandom), 32'($urandom)};
      raddr = 5'($urandom);
      #1;
      checks++;
      if (rdata !== ref_mem[raddr]) failures++;
      @(posedge clk);
      if (we) begin
        ref_mem[waddr] = wdata[31:0];
        ref_mem[waddr + 1] = wdata[63:32];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
