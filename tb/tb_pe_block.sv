// tb_pe_block -- drives random lanes into a PE block and checks the eight
// lane results (one cycle later) and the registered tree-adder sum (two
// cycles later) against a reference that adds pairwise in the same tree
// order, plus the zero-skip count and the clock-enable hold.
module tb_pe_block;
  import tb_fp10_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, sum_en = 0, a_one = 0, c_en = 0, neg = 0;
  logic [7:0][9:0] d, w, c, y;
  logic [9:0] sum;
  logic [3:0] nskip;
  int checks = 0, failures = 0;

  pe_block #(.N(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0][9:0] exp_y;
  logic [9:0] t[8];
  int nz;

  initial begin
    d = '0; w = '0; c = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      a_one = ($urandom_range(0, 3) == 0);
      c_en  = 1'($urandom);
      neg   = 1'($urandom);
      nz = 0;
      for (int l = 0; l < 8; l++) begin
        d[l] = rnd_code();
        if ($urandom_range(0, 3) == 0) d[l] = 10'h000;
        w[l] = rnd_code();
        c[l] = rnd_code();
        t[l] = a_one ? w[l] : ref_mul(d[l], w[l]);
        if (neg && t[l][8:4] != 0) t[l][9] = ~t[l][9];
        if (!a_one && d[l][8:4] == 0) begin
          t[l] = 10'h000;
          nz++;
        end
        exp_y[l] = c_en ? ref_add(t[l], c[l]) : t[l];
      end
      en = 1; sum_en = 0;
      #1;
      checks++;
      if (nskip != 4'(nz)) failures++;
      @(negedge clk);
      en = 0; sum_en = 1;
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 5) $display("lane mismatch %h vs %h", y, exp_y);
      end
      for (int l = 0; l < 8; l++) t[l] = exp_y[l];
      for (int l = 0; l < 4; l++) t[l] = ref_add(t[2*l], t[2*l+1]);
      for (int l = 0; l < 2; l++) t[l] = ref_add(t[2*l], t[2*l+1]);
      t[0] = ref_add(t[0], t[1]);
      @(negedge clk);
      sum_en = 0;
      checks++;
      if (sum !== t[0]) begin
        failures++;
        if (failures < 5) $display("sum mismatch %h vs %h", sum, t[0]);
      end
      checks++;
      if (y !== exp_y) failures++;   // held while en = 0
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
