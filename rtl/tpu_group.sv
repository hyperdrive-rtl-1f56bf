// tpu_group: the C Tile Processing Units of one spatial tile plus their shared
// FP16 multiplier (the paper's TPU figure: C = 4 drawn, C = 16 built).
//
// All C TPUs see the same input pixel each cycle and receive one bit each of the
// C-bit binary weight word, so one cycle adds one input-channel/tap contribution
// to C output channels at once. The multiplier is time-shared: `mul_sel_i`
// picks the accumulator that is multiplied by `scale_i`, and the product is
// written back into that TPU (one channel per cycle, which is why batch
// normalisation runs at one operation per tile per cycle). `ch_en_i` selects
// which TPUs execute `op_i`. `out_sel_i` picks the accumulator that goes to the
// feature-map memory write port (one channel per cycle). Timing: same as
// tile_pu, results one cycle after the operation.
module tpu_group
  import hd_pkg::*;
#(
  parameter int unsigned C = C_PAR
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  tpu_op_e              op_i,
  input  logic [C-1:0]         ch_en_i,
  input  logic [C-1:0]         weight_i,
  input  fp16_t                x_i,
  input  fp16_t [C-1:0]        bias_i,
  input  fp16_t                scale_i,
  input  logic [$clog2(C)-1:0] mul_sel_i,
  input  logic                 relu_i,
  input  logic [$clog2(C)-1:0] out_sel_i,
  output fp16_t                out_o,
  output fp16_t [C-1:0]        acc_o
);
  fp16_t mul_y;

  fp16_mul u_mul (.a(acc_o[mul_sel_i]), .b(scale_i), .y(mul_y));

  for (genvar c = 0; c < C; c++) begin : g_tpu
    tile_pu u_tpu (
      .clk_i, .rst_ni,
      .op_i,
      .en_i    (ch_en_i[c]),
      .weight_i(weight_i[c]),
      .x_i,
      .bias_i  (bias_i[c]),
      .mul_i   (mul_y),
      .relu_i,
      .acc_o   (acc_o[c])
    );
  end

  assign out_o = acc_o[out_sel_i];

endmodule
