// tb_hyperdrive_full: one Hyperdrive chip at its full default size (7 x 7
// tiles of 16 TPUs, 8192-word tile banks, 5120-word weight buffer), used as a
// stand-alone chip (zero padding on all sides).
// Loads a 16-channel 14 x 14 feature map (2 x 2 pixels per tile), runs a 3x3
// layer 16 -> 32 channels with batch-norm scale, bias and ReLU, then a 1x1
// stride-2 layer 32 -> 16 channels with bias. The weight stream has random
// gaps. Results are streamed out and compared bit-exactly with a reference
// model doing the same FP16 operations in the same
// order. The number of convolution cycles must be output blocks x output pixels
// per tile x taps x input channels: 1568 Op per cycle.
module tb_hyperdrive_full;
  import hd_pkg::*;
  import fp16_ref_pkg::*;

  localparam int M = M_TILES, N = N_TILES, C = C_PAR;
  localparam int HT = 2, WT = 2;
  localparam int GH = M * HT, GW = N * WT;
  localparam int MAXC = 32;

  typedef logic [15:0] fm_t [MAXC][GH][GW];

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cmd_valid = 1'b0;
  cmd_t        cmd = '0;
  logic        cmd_ready, busy, done;
  logic        w_valid = 1'b0, w_ready;
  logic [15:0] w_data = '0;
  logic        din_valid = 1'b0, din_ready;
  fp16_t       din = '0;
  logic        dout_valid, dout_ready = 1'b0;
  fp16_t       dout;
  logic [4:0]  tx;

  logic [15:0] wq [$], dq [$], rq [$];
  int          done_cnt = 0, n_conv = 0, n_wstall = 0;
  int          checks = 0, failures = 0;

  hyperdrive_top u_dut (
    .clk_i(clk), .rst_ni(rst_n), .chip_type_i(CHIP_SINGLE),
    .cmd_valid_i(cmd_valid), .cmd_i(cmd), .cmd_ready_o(cmd_ready), .busy_o(busy), .done_o(done),
    .w_valid_i(w_valid), .w_data_i(w_data), .w_ready_o(w_ready),
    .din_valid_i(din_valid), .din_i(din), .din_ready_o(din_ready),
    .dout_valid_o(dout_valid), .dout_o(dout), .dout_ready_i(dout_ready),
    .link_tx_o(tx), .link_rx_i('0)
  );

  always @(posedge clk) begin
    if (w_valid && w_ready) void'(wq.pop_front());
    if (din_valid && din_ready) void'(dq.pop_front());
    if (dout_valid && dout_ready) rq.push_back(dout);
    if (done) done_cnt++;
    if (u_dut.u_ctrl.tpu_op_o inside {TPU_CONV_FIRST, TPU_CONV}) n_conv++;
    if (u_dut.u_ctrl.state_q == 4'd3 && u_dut.u_ctrl.first_pix && !w_valid) n_wstall++;
    w_valid    <= (wq.size() > 0) && ($urandom_range(7, 0) != 0);
    w_data     <= (wq.size() > 0) ? wq[0] : 16'h0;
    din_valid  <= (dq.size() > 0);
    din        <= (dq.size() > 0) ? dq[0] : 16'h0;
    dout_ready <= 1'b1;
  end

  initial begin
    #20ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input cmd_t c);
    int b4 = done_cnt;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    cmd <= c;
    cmd_valid <= 1'b1;
    @(posedge clk);
    cmd_valid <= 1'b0;
    while (done_cnt == b4) @(posedge clk);
  endtask

  function automatic void ref_layer(input layer_cfg_t L, input fm_t fin, input fm_t fbyp,
                                    input bit wgt [MAXC][9][MAXC], input logic [15:0] sc [MAXC],
                                    input logic [15:0] bi [MAXC], output fm_t fout);
    int s = L.stride2 ? 2 : 1;
    int taps = L.k3 ? 9 : 1;
    int gh = M * int'(L.ht_in), gw = N * int'(L.wt_in);
    for (int o = 0; o < MAXC; o++) for (int y = 0; y < GH; y++) for (int x = 0; x < GW; x++) fout[o][y][x] = 16'h0;
    for (int o = 0; o < int'(L.n_out); o++)
      for (int y = 0; y < gh / s; y++)
        for (int x = 0; x < gw / s; x++) begin
          logic [15:0] acc = 16'h0;
          for (int t = 0; t < taps; t++) begin
            int dy = L.k3 ? t / 3 - 1 : 0;
            int dx = L.k3 ? t % 3 - 1 : 0;
            int yi = s * y + dy, xi = s * x + dx;
            for (int ci = 0; ci < int'(L.n_in); ci++) begin
              logic [15:0] v = (yi >= 0 && yi < gh && xi >= 0 && xi < gw) ? fin[ci][yi][xi] : 16'h0;
              acc = ref_add((t == 0 && ci == 0) ? 16'h0 : acc, v, !wgt[o][t][ci]);
            end
          end
          if (L.bnorm_en) acc = ref_mul(acc, sc[o]);
          if (L.bypass_en) acc = ref_add(acc, fbyp[o][y][x], 1'b0);
          acc = ref_add(acc, L.bias_en ? bi[o] : 16'h0, 1'b0);
          if (L.relu_en && acc[15]) acc = 16'h0;
          fout[o][y][x] = acc;
        end
  endfunction

  task automatic run_layer(input string name, input layer_cfg_t L, input fm_t fin, input fm_t fbyp, output fm_t fout);
    bit          wg [MAXC][9][MAXC];
    logic [15:0] sc [MAXC], bi [MAXC];
    cmd_t c = '0;
    int taps = L.k3 ? 9 : 1;
    int s = L.stride2 ? 2 : 1;
    int conv0 = n_conv;
    int expect_conv;
    longint t0;
    for (int o = 0; o < MAXC; o++) begin
      sc[o] = rand_fp16(1);
      sc[o][15] = 1'b0;
      bi[o] = rand_fp16(1);
      for (int t = 0; t < 9; t++) for (int i = 0; i < MAXC; i++) wg[o][t][i] = 1'($urandom());
    end
    ref_layer(L, fin, fbyp, wg, sc, bi, fout);
    for (int b = 0; b < int'(L.n_out) / C; b++) begin
      if (L.bnorm_en) for (int k = 0; k < C; k++) wq.push_back(sc[b*C+k]);
      if (L.bias_en)  for (int k = 0; k < C; k++) wq.push_back(bi[b*C+k]);
      for (int t = 0; t < taps; t++)
        for (int ci = 0; ci < int'(L.n_in); ci++) begin
          logic [15:0] w;
          for (int k = 0; k < C; k++) w[k] = wg[b*C+k][t][ci];
          wq.push_back(w);
        end
    end
    c.op = CMD_LAYER;
    c.layer = L;
    t0 = $time;
    issue(c);
    expect_conv = (int'(L.n_out) / C) * (int'(L.ht_in) / s) * (int'(L.wt_in) / s) * taps * int'(L.n_in);
    checks++;
    if (n_conv - conv0 != expect_conv) begin
      failures++;
      $display("FAIL %s: %0d convolution cycles, expected %0d", name, n_conv - conv0, expect_conv);
    end
    $display("%s: %0d cycles, %0d convolution cycles at %0d Op/cycle", name, ($time - t0) / 10,
             n_conv - conv0, 2 * C * M * N);
  endtask

  task automatic check_fm(input string name, input fm_t f, input int nch, input int ht, input int wt, input int base);
    cmd_t c = '0;
    int bad = 0;
    c.op = CMD_READ;
    c.io.n_ch = CH_W'(nch); c.io.ht = DIM_W'(ht); c.io.wt = DIM_W'(wt); c.io.base = FMM_AW'(base);
    rq.delete();
    issue(c);
    checks++;
    if (rq.size() != nch * M * ht * N * wt) begin
      failures++;
      $display("FAIL %s: %0d words read", name, rq.size());
      return;
    end
    for (int ch = 0; ch < nch; ch++)
      for (int y = 0; y < M * ht; y++)
        for (int x = 0; x < N * wt; x++) begin
          logic [15:0] got = rq.pop_front();
          checks++;
          if (!fp16_eq(got, f[ch][y][x])) begin
            failures++; bad++;
            if (bad < 6) $display("FAIL %s ch %0d y %0d x %0d: got %h exp %h", name, ch, y, x, got, f[ch][y][x]);
          end
        end
    $display("%s: %0d mismatches", name, bad);
  endtask

  task automatic main_test();
    fm_t f0, f1, f2;
    layer_cfg_t L;
    cmd_t c;
    for (int ch = 0; ch < MAXC; ch++) for (int y = 0; y < GH; y++) for (int x = 0; x < GW; x++)
      f0[ch][y][x] = (ch < 16) ? rand_fp16(2) : 16'h0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < 16; ch++) for (int y = 0; y < GH; y++) for (int x = 0; x < GW; x++) dq.push_back(f0[ch][y][x]);
    c = '0; c.op = CMD_LOAD; c.io.n_ch = 16; c.io.ht = HT; c.io.wt = WT; c.io.base = 0;
    issue(c);

    // 3x3, 16 -> 32, scale, bias, ReLU
    L = '0; L.k3 = 1; L.n_in = 16; L.n_out = 32; L.ht_in = HT; L.wt_in = WT;
    L.in_base = 0; L.out_base = 100; L.bnorm_en = 1; L.bias_en = 1; L.relu_en = 1;
    run_layer("3x3 layer", L, f0, f0, f1);
    check_fm("3x3 layer", f1, 32, HT, WT, 100);

    // 1x1 stride 2, 32 -> 16, bias
    L = '0; L.k3 = 0; L.stride2 = 1; L.n_in = 32; L.n_out = 16; L.ht_in = HT; L.wt_in = WT;
    L.in_base = 100; L.out_base = 300; L.bias_en = 1;
    run_layer("1x1 stride-2 layer", L, f1, f1, f2);
    check_fm("1x1 stride-2 layer", f2, 16, HT / 2, WT / 2, 300);

    checks++;
    if (n_wstall == 0) begin
      failures++;
      $display("FAIL weight-stream stall never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial main_test();
endmodule
