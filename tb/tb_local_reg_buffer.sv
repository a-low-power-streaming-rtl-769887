// tb_local_reg_buffer -- reset contents, random half-masked writes and two
// read ports against a reference, and out-of-range rows reading as zero.
module tb_local_reg_buffer;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] wmask = 0;
  logic [3:0] waddr = 0, raddr0 = 0, raddr1 = 0;
  logic [159:0] wdata = 0, rdata0, rdata1;
  int checks = 0, failures = 0;

  local_reg_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [159:0] ref_mem [16];
  initial begin
    for (int i = 0; i < 16; i++) ref_mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      we = 1'($urandom); wmask = 2'($urandom); waddr = 4'($urandom);
      wdata = {32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom), 32'($urandom)};
      raddr0 = 4'($urandom); raddr1 = 4'($urandom);
      #1;
      checks += 2;
      if (rdata0 !== ref_mem[raddr0]) failures++;
      if (rdata1 !== ref_mem[raddr1]) failures++;
      @(posedge clk);
      if (we && waddr < 10) begin
        if (wmask[0]) ref_mem[waddr][79:0]   = wdata[79:0];
        if (wmask[1]) ref_mem[waddr][159:80] = wdata[159:80];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
