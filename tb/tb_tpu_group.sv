// tb_tpu_group: C TPUs of a tile with their shared multiplier. Runs complete
// output pixels: a convolution of K random input pixels with random C-bit
// binary weight words (all channels in parallel), then per-channel scale on the
// shared multiplier (one channel per cycle), bias and ReLU, and reads every
// channel through the output select. Results are compared with an FP16
// reference computed step by step in the same order.
module tb_tpu_group;
  import hd_pkg::*;
  import fp16_ref_pkg::*;
  localparam int C = 16;
  logic clk = 0, rst_n = 0;
  tpu_op_e op;
  logic [C-1:0] en, w;
  fp16_t x, scale, out;
  fp16_t [C-1:0] bias, acc;
  logic [$clog2(C)-1:0] msel, osel;
  logic relu;
  fp16_t model [C];
  int checks = 0, failures = 0;

  tpu_group #(.C(C)) dut (.clk_i(clk), .rst_ni(rst_n), .op_i(op), .ch_en_i(en), .weight_i(w),
    .x_i(x), .bias_i(bias), .scale_i(scale), .mul_sel_i(msel), .relu_i(relu),
    .out_sel_i(osel), .out_o(out), .acc_o(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = TPU_NOP; en = 0; w = 0; x = 0; scale = 0; bias = '0; msel = 0; osel = 0; relu = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 40; p++) begin
      relu = 1'($urandom());
      for (int c = 0; c < C; c++) bias[c] = rand_fp16(3);
      // convolution: 9 steps, all channels
      for (int k = 0; k < 9; k++) begin
        op = (k == 0) ? TPU_CONV_FIRST : TPU_CONV; en = '1;
        w = C'($urandom()); x = rand_fp16(3);
        for (int c = 0; c < C; c++) model[c] = ref_add((k == 0) ? 16'h0 : model[c], x, ~w[c]);
        @(posedge clk); #1;
      end
      // scale, one channel per cycle
      for (int c = 0; c < C; c++) begin
        op = TPU_SCALE; en = C'(1) << c; msel = c; scale = rand_fp16(2);
        model[c] = ref_mul(model[c], scale);
        @(posedge clk); #1;
      end
      // bias + relu, one channel per cycle; check via out_o one cycle later
      for (int c = 0; c <= C; c++) begin
        if (c > 0) begin
          osel = c - 1; #1;
          checks++;
          if (!fp16_eq(out, model[c-1])) begin
            failures++;
            if (failures < 10) $display("FAIL pix %0d ch %0d out=%h exp=%h", p, c - 1, out, model[c-1]);
          end
        end
        if (c < C) begin
          op = TPU_BIAS; en = C'(1) << c;
          model[c] = ref_add(model[c], bias[c], 1'b0);
          if (relu && model[c][15]) model[c] = 16'h0;
          @(posedge clk); #1;
        end
      end
      op = TPU_NOP;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
