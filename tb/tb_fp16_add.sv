// tb_fp16_add: checks the FP16 adder/subtractor against the real-valued
// reference model: random operands of near and far exponents, cancellation,
// x - x, zeros, infinities and NaN.
module tb_fp16_add;
  import fp16_ref_pkg::*;
  logic [15:0] a, b, y;
  logic sub;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .sub(sub), .y(y));

  task automatic check(input logic [15:0] ta, input logic [15:0] tb_, input logic ts);
    logic [15:0] exp;
    a = ta; b = tb_; sub = ts;
    #1;
    exp = ref_add(ta, tb_, ts);
    if (ta[14:10] == 5'h1F || tb_[14:10] == 5'h1F) begin
      // special operands: infinity / NaN rules
      logic an = ta[14:10] == 5'h1F && ta[9:0] != 0, bn = tb_[14:10] == 5'h1F && tb_[9:0] != 0;
      logic ai = ta[14:10] == 5'h1F && ta[9:0] == 0, bi = tb_[14:10] == 5'h1F && tb_[9:0] == 0;
      if (an || bn || (ai && bi && (ta[15] != (tb_[15] ^ ts)))) exp = 16'h7E00;
      else if (ai) exp = {ta[15], 15'h7C00};
      else exp = {tb_[15] ^ ts, 15'h7C00};
    end
    checks++;
    if (!fp16_eq(y, exp)) begin
      failures++;
      if (failures < 10) $display("FAIL %h %s %h = %h, expected %h", ta, ts ? "-" : "+", tb_, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00, 0);  // 1 + 1
    check(16'h3C00, 16'h3C00, 1);  // 1 - 1
    check(16'h3C00, 16'h0000, 1);
    check(16'h0000, 16'h3C00, 1);  // 0 - 1
    check(16'h7BFF, 16'h7BFF, 0);  // overflow
    check(16'h3C01, 16'h3C00, 1);  // cancellation
    check(16'h3C00, 16'h1400, 0);  // far apart, sticky
    check(16'h7C00, 16'h3C00, 0);
    check(16'h7C00, 16'h7C00, 1);  // inf - inf
    check(16'h7E00, 16'h3C00, 0);
    check(16'h0400, 16'h0401, 1);  // underflow -> 0
    for (int i = 0; i < 3000; i++) check(rand_fp16(3), rand_fp16(3), 1'($urandom()));
    for (int i = 0; i < 3000; i++) check(rand_fp16(14), rand_fp16(14), 1'($urandom()));
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] p = rand_fp16(10);
      check(p, {p[15], p[14:10], 10'($urandom())}, 1'($urandom()));   // same exponent
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
