// tb_accumulator -- feeds random convolution outputs of 1 to 10 terms
// (two partial sums per term, a bias at the first) and checks the result,
// its ReLU, that out_valid pulses exactly once per output one cycle after
// the last term, and that idle cycles do not disturb the running sum.
module tb_accumulator;
  import tb_fp10_ref_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, first = 0, last = 0, relu = 0;
  logic [9:0] s0 = 0, s1 = 0, bias = 0, out;
  logic out_valid;
  int checks = 0, failures = 0;

  accumulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [9:0] acc;
    int n;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      n = $urandom_range(1, 10);
      relu = 1'($urandom);
      bias = rnd_code();
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        valid = ($urandom_range(0, 4) != 0);
        if (!valid) begin
          k--;
          first = 0; last = 0;
          continue;
        end
        first = (k == 0);
        last  = (k == n - 1);
        s0 = rnd_code();
        s1 = rnd_code();
        acc = ref_add(first ? bias : acc, ref_add(s0, s1));
        @(posedge clk); #1;
        checks++;
        if (out_valid !== last) failures++;
        if (last) begin
          checks++;
          if (out !== ((relu && (acc[9] || acc[8:4] == 0)) ? 10'h000 : acc)) begin
            failures++;
            if (failures < 5) $display("out %h exp %h", out, acc);
          end
        end
      end
      @(negedge clk);
      valid = 0; first = 0; last = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
