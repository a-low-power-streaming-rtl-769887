// tb_pe_cell -- checks one PE cell against the real-arithmetic reference:
// multiply, add (a := 1), multiply-add, negated multiply-add, the zero-skip
// path, operand extremes (overflow saturation, underflow flush) and the
// clock-enable hold. Result is expected one cycle after the inputs.
module tb_pe_cell;
  import tb_fp10_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, a_one = 0, c_en = 0, neg = 0;
  logic [9:0] d = 0, w = 0, c = 0, y;
  logic skip;
  int checks = 0, failures = 0;

  pe_cell dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [9:0] dd, ww, cc, input logic one, ce, ng);
    logic [9:0] p, exp_y;
    logic exp_skip;
    d = dd; w = ww; c = cc; a_one = one; c_en = ce; neg = ng; en = 1;
    p = one ? ww : ref_mul(dd, ww);
    if (ng && p[8:4] != 0) p[9] = ~p[9];
    exp_skip = !one && dd[8:4] == 0;
    exp_y = ce ? ref_add(p, cc) : p;
    if (exp_skip) exp_y = ce ? cc : 10'h000;
    #1;
    checks++;
    if (skip !== exp_skip) begin
      failures++;
      $display("skip mismatch d=%h", dd);
    end
    @(posedge clk); #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("y mismatch d=%h w=%h c=%h one=%b ce=%b neg=%b got %h exp %h",
                                  dd, ww, cc, one, ce, ng, y, exp_y);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // directed: 1.5 * 2.0 = 3.0, 1 + 1 = 2, max*max saturates, tiny*tiny flushes
    apply(10'h0F8, 10'h100, 10'h000, 0, 0, 0);
    checks++; if (y !== 10'h108) failures++;
    apply(10'h0F0, 10'h0F0, 10'h0F0, 1, 1, 0);
    checks++; if (y !== 10'h100) failures++;
    apply(10'h1FF, 10'h1FF, 10'h000, 0, 0, 0);
    checks++; if (y !== 10'h1FF) failures++;
    apply(10'h010, 10'h010, 10'h000, 0, 0, 0);
    checks++; if (y !== 10'h000) failures++;
    apply(10'h0F0, 10'h0F0, 10'h0F0, 0, 1, 1);     // -1 + 1 = 0
    checks++; if (y !== 10'h000) failures++;
    // random, every mode
    for (int i = 0; i < 4000; i++)
      apply(rnd_code(), rnd_code(), rnd_code(), $urandom_range(0, 3) == 0,
            1'($urandom), 1'($urandom));
    // full random codes, multiply only and add only
    for (int i = 0; i < 2000; i++) apply(10'($urandom), 10'($urandom), 10'($urandom), 0, 0, 0);
    for (int i = 0; i < 2000; i++) apply(10'($urandom), 10'($urandom), 10'($urandom), 1, 1, 0);
    // hold with en = 0
    begin
      logic [9:0] held;
      held = y;
      en = 0; d = 10'h123; w = 10'h0F0; a_one = 0; c_en = 0;
      @(posedge clk); #1;
      checks++;
      if (y !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
