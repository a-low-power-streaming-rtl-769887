// tb_act_lut -- sweeps all 1024 FP10 inputs through both functions and
// compares with the exact sigmoid / tanh rounded to FP10. Inside the table
// range (2^-4 <= |x| < 16) and above it the result must be exact; below it
// (the linear approximation) within one unit in the last place. Also checks
// the one-cycle latency of y_valid.
module tb_act_lut;
  import tb_fp10_ref_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0, func = 0;
  logic [9:0] x = 0, y;
  logic y_valid;
  int checks = 0, failures = 0;

  act_lut dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xr, fr, ulp;
    logic [9:0] e;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < 1024; i++) begin
        @(negedge clk);
        valid = 1; func = f[0]; x = 10'(i);
        xr = to_real(x);
        fr = f ? $tanh(xr) : 1.0 / (1.0 + $exp(-xr));
        @(negedge clk);
        valid = 0;
        checks++;
        if (!y_valid) failures++;
        checks++;
        e = to_fp10(fr);
        if (x[8:4] >= 11) begin
          if (y !== e) begin
            failures++;
            if (failures < 10) $display("f=%0d x=%h y=%h exp=%h", f, x, y, e);
          end
        end else begin
          ulp = (e[8:4] == 0) ? to_real(10'h010) : to_real({1'b0, e[8:4], 4'd1}) - to_real({1'b0, e[8:4], 4'd0});
          if (to_real(y) - to_real(e) > ulp || to_real(e) - to_real(y) > ulp) begin
            failures++;
            if (failures < 10) $display("approx f=%0d x=%h y=%h exp=%h", f, x, y, e);
          end
        end
        @(negedge clk);
        checks++;
        if (y_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
