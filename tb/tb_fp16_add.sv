// tb_fp16_add: checks the binary16 adder against exact double-precision sums
// rounded to nearest even (ref_pkg), over directed cases (cancellation, carry
// out, ties, large exponent gaps, overflow, flush to zero) and random
// operands.
module tb_fp16_add;
  import ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;
  fp16_add dut (.a, .b, .y);

  task automatic check(input logic [15:0] x, input logic [15:0] z);
    logic [15:0] exp_y;
    a = x; b = z; #1;
    exp_y = radd(x, z);
    checks++;
    if (!heq(y, exp_y)) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    check(16'h3C00, 16'h3C00);   // 1 + 1
    check(16'h3C00, 16'hBC00);   // 1 - 1
    check(16'h3C00, 16'h1400);   // 1 + 2^-10 (tie region)
    check(16'h3C01, 16'h0C00);   // gap of 13 exponents
    check(16'h3C00, 16'hB3FF);   // cancellation
    check(16'h7BFF, 16'h7BFF);   // overflow to inf
    check(16'h0400, 16'h8401);   // result below normal range
    check(16'h3C00, 16'h0000);
    check(16'h0000, 16'h8000);
    check(16'h4500, 16'hC4FF);
    for (int i = 0; i < 30000; i++) begin
      int e1;
      logic [15:0] x, z;
      e1 = 2 + int'($urandom_range(27));
      x = hrand(e1, e1);
      // mostly nearby exponents, to exercise alignment and cancellation
      z = ($urandom_range(3) == 0) ? hrand(1, 30) : hrand((e1 > 5) ? e1 - 4 : 1, (e1 < 26) ? e1 + 4 : 30);
      if (x[14:10] == 5'h1F || z[14:10] == 5'h1F) continue;
      check(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
