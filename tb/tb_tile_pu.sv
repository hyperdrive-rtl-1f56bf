// tb_tile_pu: drives one Tile Processing Unit through the operation sequence
// of an output pixel (first product, +/- accumulation by binary weight, scale
// from the multiplier input, bypass add, bias add with and without ReLU) and
// compares the accumulator after every cycle with a reference accumulator.
module tb_tile_pu;
  import hd_pkg::*;
  import fp16_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  tpu_op_e op;
  logic en, w, relu;
  fp16_t x, bias, mul, acc;
  fp16_t model;
  int checks = 0, failures = 0, cycles = 0;

  tile_pu dut (.clk_i(clk), .rst_ni(rst_n), .op_i(op), .en_i(en), .weight_i(w),
               .x_i(x), .bias_i(bias), .mul_i(mul), .relu_i(relu), .acc_o(acc));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input tpu_op_e o, input logic e);
    fp16_t nx;
    op = o; en = e; w = 1'($urandom()); x = rand_fp16(3); bias = rand_fp16(3);
    mul = rand_fp16(3); relu = 1'($urandom());
    nx = model;
    if (e) unique case (o)
      TPU_CONV_FIRST: nx = ref_add(16'h0, x, ~w);
      TPU_CONV:       nx = ref_add(model, x, ~w);
      TPU_ADD_X:      nx = ref_add(model, x, 1'b0);
      TPU_BIAS: begin nx = ref_add(model, bias, 1'b0); if (relu && nx[15]) nx = 16'h0; end
      TPU_SCALE:      nx = mul;
      default: ;
    endcase
    @(posedge clk); #1;
    model = nx;
    checks++;
    if (!fp16_eq(acc, model)) begin
      failures++;
      if (failures < 10) $display("FAIL op=%s acc=%h exp=%h", o.name(), acc, model);
    end
  endtask

  initial begin
    op = TPU_NOP; en = 0; w = 0; x = 0; bias = 0; mul = 0; relu = 0;
    model = 16'h0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 300; p++) begin
      step(TPU_CONV_FIRST, 1);
      for (int k = 0; k < 8; k++) step(TPU_CONV, 1);
      step(TPU_CONV, 0);                // disabled: must hold
      step(TPU_SCALE, 1);
      step(TPU_ADD_X, 1);
      step(TPU_NOP, 1);
      step(TPU_BIAS, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
