// tb_controller: the layer sequencer alone (C = 4), with behavioural stand-ins
// for the weight stream, the border interface (room / sync) and the border
// memory write port (random busy cycles). For random layer shapes it checks:
// - the number of convolution cycles is output blocks x output pixels x taps x
//   input channels (one input channel / tap per cycle for all tiles), and with
//   no stalls a layer takes no more than that plus a fixed per-pixel overhead
//   (scale, bypass and bias C cycles each, plus 4);
// - every operation of a pixel is there: C scale, C bypass and C bias steps,
//   one per channel, in that order;
// - every output word is written once, one cycle after its bias step, to
//   out_base + channel x pixels + pixel, and edge pixels are flagged to the
//   border interface;
// - all weight-stream words are consumed and the first pixel of a block writes
//   the weight buffer at tap x n_in + input channel;
// - no convolution read is issued while the border memory is being written;
// - done_o follows the border interface's sync.
module tb_controller;
  import hd_pkg::*;
  localparam int C = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, busy, done;
  cmd_t cmd = '0;
  logic w_valid = 0, w_ready;
  logic [15:0] w_data = '0;
  logic io_start, io_read, io_done = 0;
  io_cfg_t io_cfg;
  logic fmm_re, fmm_we;
  logic [FMM_AW-1:0] fmm_addr;
  logic wb_we, wb_re;
  logic [12:0] wb_waddr, wb_raddr;
  logic [C-1:0] wb_wdata;
  logic bm_re, cm_re;
  logic [9:0] lh, lv, cidx;
  logic [1:0] ccorner;
  logic bwr_busy = 0;
  tpu_op_e op;
  logic [C-1:0] en;
  logic relu;
  logic [1:0] msel, osel;
  fp16_t [C-1:0] bias;
  fp16_t scale;
  logic signed [1:0] sy, sx;
  logic bi_start, bi_par, bi_room = 1, bi_sync = 1;
  logic [3:0] bi_edge, bi_corner;

  controller #(.C(C)) dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid_i(cmd_valid), .cmd_i(cmd),
    .cmd_ready_o(cmd_ready), .busy_o(busy), .done_o(done), .w_valid_i(w_valid), .w_data_i(w_data),
    .w_ready_o(w_ready), .io_start_o(io_start), .io_read_o(io_read), .io_cfg_o(io_cfg), .io_done_i(io_done),
    .fmm_re_o(fmm_re), .fmm_we_o(fmm_we), .fmm_addr_o(fmm_addr), .wb_we_o(wb_we), .wb_waddr_o(wb_waddr),
    .wb_wdata_o(wb_wdata), .wb_re_o(wb_re), .wb_raddr_o(wb_raddr), .bm_re_o(bm_re), .bm_line_h_o(lh),
    .bm_line_v_o(lv), .cm_re_o(cm_re), .cm_corner_o(ccorner), .cm_idx_o(cidx), .bwr_busy_i(bwr_busy),
    .tpu_op_o(op), .tpu_en_o(en), .relu_o(relu), .mul_sel_o(msel), .bias_o(bias), .scale_o(scale),
    .sy_o(sy), .sx_o(sx), .out_sel_o(osel), .bi_layer_start_o(bi_start), .bi_par_out_o(bi_par),
    .bi_edge_o(bi_edge), .bi_corner_o(bi_corner), .bi_room_i(bi_room), .bi_sync_i(bi_sync));

  int checks = 0, failures = 0;
  int n_conv, n_words, n_wr, n_edge;
  bit stalls;
  layer_cfg_t L;
  int written [int];
  tpu_op_e prev_op;
  logic [C-1:0] prev_en;
  int seq_c;          // per-pixel channel step checker
  tpu_op_e seq_op;
  int wb_first_idx;

  task automatic fail(input string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  always @(posedge clk) if (rst_n) begin
    // weight stream
    if (w_valid && w_ready) n_words++;
    w_valid <= stalls ? ($urandom_range(3, 0) != 0) : 1'b1;
    w_data  <= 16'($urandom());
    bwr_busy <= stalls ? ($urandom_range(4, 0) == 0) : 1'b0;
    bi_room  <= stalls ? ($urandom_range(2, 0) != 0) : 1'b1;
    if (op inside {TPU_CONV_FIRST, TPU_CONV}) n_conv++;
    if (fmm_re && dut.state_q == 4'd3) begin
      checks++;
      if (bwr_busy && (bm_re || cm_re)) fail("border-memory read during a write");
    end
    if (wb_we) begin
      checks++;
      if (int'(wb_waddr) != wb_first_idx) fail($sformatf("weight buffer write at %0d, expected %0d", wb_waddr, wb_first_idx));
      wb_first_idx = (wb_first_idx + 1) % ((L.k3 ? 9 : 1) * int'(L.n_in));
    end
    // the write-back of channel c follows its bias step
    if (fmm_we) begin
      n_wr++;
      checks++;
      if (!(prev_op == TPU_BIAS && prev_en == (C'(1) << osel))) fail("write not one cycle after the bias step");
      if (written.exists(int'(fmm_addr))) fail($sformatf("address %0d written twice", fmm_addr));
      written[int'(fmm_addr)] = 1;
      if (bi_edge != 0) n_edge++;
    end
    // per-pixel channel steps: scale*, bypass*, bias*, each channels 0..C-1
    if (op inside {TPU_SCALE, TPU_ADD_X, TPU_BIAS}) begin
      checks++;
      if (en != (C'(1) << seq_c)) fail($sformatf("step %s for channel mask %b, expected channel %0d", op.name(), en, seq_c));
      seq_c = (seq_c + 1) % C;
    end
    prev_op <= op;
    prev_en <= en;
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit st);
    int taps, s, hto, wto, blocks, pix, n_param, exp_conv, t0, cyc, bound;
    L = '0;
    L.k3 = 1'($urandom());
    L.stride2 = 1'($urandom());
    L.n_in = CH_W'($urandom_range(6, 1));
    L.n_out = CH_W'(C * $urandom_range(3, 1));
    L.ht_in = DIM_W'(2 * $urandom_range(3, 1));
    L.wt_in = DIM_W'(2 * $urandom_range(3, 1));
    L.in_base = 0; L.out_base = 2000; L.byp_base = 4000;
    L.bnorm_en = 1'($urandom()); L.bypass_en = 1'($urandom()); L.bias_en = 1'($urandom());
    L.relu_en = 1'($urandom());
    taps = L.k3 ? 9 : 1; s = L.stride2 ? 2 : 1;
    hto = int'(L.ht_in) / s; wto = int'(L.wt_in) / s;
    blocks = int'(L.n_out) / C; pix = hto * wto;
    n_param = (L.bnorm_en ? C : 0) + (L.bias_en ? C : 0);
    exp_conv = blocks * pix * taps * int'(L.n_in);
    stalls = st;
    n_conv = 0; n_words = 0; n_wr = 0; n_edge = 0; written.delete(); seq_c = 0; wb_first_idx = 0;
    @(negedge clk);
    cmd_valid = 1; cmd.op = CMD_LAYER; cmd.layer = L;
    t0 = int'($time / 10);
    @(negedge clk);
    cmd_valid = 0;
    bi_sync = 0;
    while (busy && !(dut.state_q == 4'd9)) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (done) fail("done before sync");
    bi_sync = 1;
    while (!done) @(negedge clk);
    cyc = int'($time / 10) - t0 - 5;
    checks += 5;
    if (n_conv != exp_conv) fail($sformatf("%0d convolution cycles, expected %0d", n_conv, exp_conv));
    if (n_words != blocks * (n_param + taps * int'(L.n_in))) fail($sformatf("%0d weight words consumed", n_words));
    if (n_wr != int'(L.n_out) * pix) fail($sformatf("%0d writes, expected %0d", n_wr, int'(L.n_out) * pix));
    for (int o = 0; o < int'(L.n_out); o++) for (int p = 0; p < pix; p++)
      if (!written.exists(2000 + o * pix + p)) begin fail($sformatf("output %0d/%0d not written", o, p)); break; end
    if (n_edge != int'(L.n_out) * (pix - (hto > 2 && wto > 2 ? (hto - 2) * (wto - 2) : 0))) fail("edge flags");
    bound = blocks * (n_param + 2) + blocks * pix * (taps * int'(L.n_in) + (L.bnorm_en ? C : 0) + (L.bypass_en ? C : 0) + C + 4) + 10;
    if (!st && cyc > bound) fail($sformatf("layer took %0d cycles, bound %0d", cyc, bound));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) run(it % 2 == 1);
    // I/O commands are handed to the I/O interface
    @(negedge clk);
    cmd_valid = 1; cmd = '0; cmd.op = CMD_READ;
    #1;
    checks++;
    if (!(io_start && io_read)) fail("read command not passed on");
    @(negedge clk);
    cmd_valid = 0;
    repeat (3) @(negedge clk);
    io_done = 1;
    @(negedge clk);
    io_done = 0;
    #1;
    checks++;
    if (!done) fail("no done after I/O");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
