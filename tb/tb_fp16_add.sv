// tb_fp16_add: random and directed checks of the FP16 adder against the
// double-precision reference (tb_fp16_pkg), including cancellation, ties,
// overflow and flush-to-zero cases.
module tb_fp16_add;
  import tb_fp16_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] x, logic [15:0] z);
    logic [15:0] exp;
    a = x; b = z;
    #1;
    exp = ref_add(x, z);
    checks++;
    if (!h_eq(y, exp)) begin
      failures++;
      if (failures < 10) $display("add %h + %h: got %h expected %h", x, z, y, exp);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00);  // 1 + 1
    check(16'h3C00, 16'hBC00);  // 1 - 1
    check(16'h3C00, 16'h1000);  // 1 + tiny
    check(16'h3C01, 16'hBC00);  // cancellation
    check(16'h7BFF, 16'h7BFF);  // overflow
    check(16'h0400, 16'h8200);  // subnormal operand
    check(16'h0401, 16'h8400);  // result below normal range
    check(16'h3C00, 16'h1400);  // tie case
    for (int i = 0; i < 20000; i++) check(rand_h(1, 30), rand_h(1, 30));
    for (int i = 0; i < 20000; i++) check(rand_h(10, 20), rand_h(10, 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
