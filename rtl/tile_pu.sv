// tile_pu: one Tile Processing Unit (TPU) -- FP16 accumulator for one output
// channel of one spatial tile.
//
// Datapath (after the paper's TPU figure): an FP16 adder whose first operand is
// the accumulator register (or zero for the first contribution of a pixel) and
// whose second operand is the input-FM pixel or the channel bias. The single-bit
// binary weight drives the adder's subtract input (w = 1 adds, w = 0 subtracts,
// as in the paper's algorithm). A mux then picks the adder result or the result
// of the multiplier shared with the other TPUs of the tile, an optional ReLU
// follows, and the accumulator register closes the loop. The accumulator is the
// TPU's output. `op` is only applied while `en` is high, so the controller can
// address one TPU of the tile for per-channel steps (scale, bypass, bias).
// Timing: one operation per cycle, result visible in `acc` the next cycle.
// Own choices: the op encoding (hd_pkg::tpu_op_e) and the reset value 0.
module tile_pu
  import hd_pkg::*;
(
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tpu_op_e op_i,
  input  logic    en_i,
  input  logic    weight_i,   // binary weight, 1 = +1, 0 = -1
  input  fp16_t   x_i,        // input FM pixel (or bypass pixel)
  input  fp16_t   bias_i,
  input  fp16_t   mul_i,      // shared multiplier result
  input  logic    relu_i,
  output fp16_t   acc_o
);
  fp16_t acc_q, add_a, add_b, add_y, res, res_relu;
  logic  add_sub;

  always_comb begin
    add_a   = (op_i == TPU_CONV_FIRST) ? 16'h0000 : acc_q;
    add_b   = (op_i == TPU_BIAS) ? bias_i : x_i;
    add_sub = ((op_i == TPU_CONV_FIRST) || (op_i == TPU_CONV)) ? ~weight_i : 1'b0;
  end

  fp16_add u_add (.a(add_a), .b(add_b), .sub(add_sub), .y(add_y));

  always_comb begin
    res      = (op_i == TPU_SCALE) ? mul_i : add_y;
    res_relu = (relu_i && (op_i == TPU_BIAS) && res[15]) ? 16'h0000 : res;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) acc_q <= 16'h0000;
    else if (en_i && (op_i != TPU_NOP)) acc_q <= res_relu;
  end

  assign acc_o = acc_q;

endmodule
