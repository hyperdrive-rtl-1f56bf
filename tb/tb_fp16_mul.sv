// tb_fp16_mul: checks the FP16 multiplier against the real-valued reference
// model: random operands, rounding ties, overflow, underflow, zeros, inf, NaN.
module tb_fp16_mul;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [15:0] ta, input logic [15:0] tb_, input logic [15:0] special);
    logic [15:0] exp;
    a = ta; b = tb_;
    #1;
    exp = (special != 16'h0) ? special : ref_mul(ta, tb_);
    checks++;
    if (!fp16_eq(y, exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", ta, tb_, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00, 0);      // 1 * 1
    check(16'h4000, 16'hC200, 0);      // 2 * -3
    check(16'h3E00, 16'h3E00, 0);      // 1.5 * 1.5
    check(16'h7BFF, 16'h4000, 0);      // overflow
    check(16'h0400, 16'h3800, 0);      // underflow
    check(16'h7C00, 16'h0000, 16'h7E00);  // inf * 0
    check(16'h7C00, 16'hC000, 16'hFC00);  // inf * -2
    check(16'h3C01, 16'h3BFF, 0);
    for (int i = 0; i < 6000; i++) check(rand_fp16(6), rand_fp16(6), 0);
    for (int i = 0; i < 2000; i++) check(rand_fp16(14), rand_fp16(14), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
