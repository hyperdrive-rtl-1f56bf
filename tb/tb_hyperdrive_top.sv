// tb_hyperdrive_top: end-to-end test of a 2 x 2 mesh of Hyperdrive chips
// (types NW, NE, SW, SE) at a reduced size (2 x 2 tiles of C = 4 TPUs per
// chip), linked by their 4 bit + valid border links.
//
// The global 16 x 16 input feature map is split over the four chips and loaded
// through each chip's data stream; the borders of the first layer are loaded
// into the border and corner memories through the same stream. Four layers then
// run on all chips at once (the command is broadcast when all chips are idle):
//   L1  3x3, 4 -> 8 channels, batch-norm scale, bias, ReLU
//   L2  3x3, 8 -> 8 channels, scale, bypass (L1 output), bias, ReLU
//   L3  3x3 stride 2, 8 -> 4 channels, bias
//   L4  1x1 stride 2, 4 -> 8 channels, ReLU
// The weight streams have random gaps. After each layer every chip's output is
// streamed out and compared bit-exactly (+0 / -0 equal) with a reference model
// that does the same FP16 operations in the same order (filter tap outer loop,
// input channel inner, then scale, bypass, bias, ReLU), on the global feature
// map with zero padding only at the outer edge of the mesh.
// Cycle counts: the number of convolution cycles per layer must equal
// output channel blocks x output pixels per tile x taps x input channels (one
// input channel / tap per cycle for all C x M x N outputs).
// Mechanism counters (all must be non-zero): weight-stream stall, zero padding,
// read from a neighbour tile's bank, border-memory read, corner-memory read,
// scale, bypass, ReLU clipping, stride-2 layer, border pixels received,
// corner pixel forwarded, wait for the border queue, border/corner load over
// the data stream, stall on a border-memory write collision.
module tb_hyperdrive_top;
  import hd_pkg::*;
  import fp16_ref_pkg::*;

  localparam int M = 2, N = 2, C = 4;
  localparam int CR = 2, CC = 2, NCH = CR * CC;
  localparam int HT = 4, WT = 4;                 // tile size of the input FM
  localparam int GH = CR * M * HT, GW = CC * N * WT;
  localparam int MAXC = 8;

  typedef logic [15:0] fm_t [MAXC][GH][GW];

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cmd_valid [NCH];
  cmd_t        cmd [NCH];
  logic        cmd_ready [NCH], busy [NCH], done [NCH];
  logic        w_valid [NCH], w_ready [NCH];
  logic [15:0] w_data [NCH];
  logic        din_valid [NCH], din_ready [NCH];
  fp16_t       din [NCH];
  logic        dout_valid [NCH], dout_ready [NCH];
  fp16_t       dout [NCH];
  logic [4:0]  tx [NCH];

  logic [15:0] wq [NCH][$];
  logic [15:0] dq [NCH][$];
  logic [15:0] rq [NCH][$];
  int          done_cnt [NCH];
  int          checks = 0, failures = 0;

  // mechanism counters
  int n_wstall, n_pad, n_nbtile, n_bmread, n_cmread, n_scale, n_byp, n_relu, n_stride2;
  int n_brecv, n_fwd, n_qwait, n_bload, n_collide, n_conv;

  for (genvar k = 0; k < NCH; k++) begin : g_chip
    localparam int I = k / CC, J = k % CC;
    chip_type_e ct;
    logic [3:0][4:0] rx;
    assign ct = (I == 0) ? ((J == 0) ? CHIP_NW : CHIP_NE) : ((J == 0) ? CHIP_SW : CHIP_SE);
    assign rx[3] = (I > 0)      ? tx[k - CC] : 5'b0;
    assign rx[2] = (I < CR - 1) ? tx[k + CC] : 5'b0;
    assign rx[1] = (J > 0)      ? tx[k - 1]  : 5'b0;
    assign rx[0] = (J < CC - 1) ? tx[k + 1]  : 5'b0;

    hyperdrive_top #(.M(M), .N(N), .C(C)) u_dut (
      .clk_i(clk), .rst_ni(rst_n), .chip_type_i(ct),
      .cmd_valid_i(cmd_valid[k]), .cmd_i(cmd[k]), .cmd_ready_o(cmd_ready[k]), .busy_o(busy[k]), .done_o(done[k]),
      .w_valid_i(w_valid[k]), .w_data_i(w_data[k]), .w_ready_o(w_ready[k]),
      .din_valid_i(din_valid[k]), .din_i(din[k]), .din_ready_o(din_ready[k]),
      .dout_valid_o(dout_valid[k]), .dout_o(dout[k]), .dout_ready_i(dout_ready[k]),
      .link_tx_o(tx[k]), .link_rx_i(rx)
    );

    // stream drivers: registered sources with random gaps
    always @(posedge clk) begin
      if (w_valid[k] && w_ready[k]) void'(wq[k].pop_front());
      if (din_valid[k] && din_ready[k]) void'(dq[k].pop_front());
      if (dout_valid[k] && dout_ready[k]) rq[k].push_back(dout[k]);
      if (done[k]) done_cnt[k]++;
      w_valid[k]    <= (wq[k].size() > 0) && ($urandom_range(3, 0) != 0);
      w_data[k]     <= (wq[k].size() > 0) ? wq[k][0] : 16'h0;
      din_valid[k]  <= (dq[k].size() > 0) && ($urandom_range(3, 0) != 0);
      din[k]        <= (dq[k].size() > 0) ? dq[k][0] : 16'h0;
      dout_ready[k] <= ($urandom_range(3, 0) != 0);
    end
  end


  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (g_chip[0].u_dut.u_ctrl.state_q == 4'd3 && g_chip[0].u_dut.u_ctrl.first_pix && !g_chip[0].u_dut.w_valid_i) n_wstall++;
    if (g_chip[0].u_dut.u_ctrl.tpu_op_o inside {TPU_CONV_FIRST, TPU_CONV}) begin
      n_conv++;
      if (g_chip[0].u_dut.g_row[0].g_col[0].pad) n_pad++;
      if (g_chip[0].u_dut.u_ctrl.sy_o == -2'sd1 && !g_chip[0].u_dut.g_row[1].g_col[1].ext &&
          !g_chip[0].u_dut.g_row[1].g_col[1].pad) n_nbtile++;
    end
    if (g_chip[3].u_dut.u_ctrl.bm_re_o) n_bmread++;
    if (g_chip[3].u_dut.u_ctrl.cm_re_o) n_cmread++;
    if (g_chip[0].u_dut.u_ctrl.tpu_op_o == TPU_SCALE) n_scale++;
    if (g_chip[0].u_dut.u_ctrl.tpu_op_o == TPU_ADD_X) n_byp++;
    if (g_chip[1].u_dut.u_bi.wr_o.valid) n_brecv++;
    if (g_chip[1].u_dut.u_bi.f_push || g_chip[0].u_dut.u_bi.f_push) n_fwd++;
    if (g_chip[0].u_dut.u_ctrl.state_q == 4'd6 && !g_chip[0].u_dut.u_ctrl.bi_room_i) n_qwait++;
    if (g_chip[0].u_dut.io_bwr.valid) n_bload++;
    if (g_chip[2].u_dut.u_ctrl.state_q == 4'd3 && g_chip[2].u_dut.u_ctrl.need_ext && g_chip[2].u_dut.u_ctrl.bwr_busy_i) n_collide++;
  end

  initial begin
    #2ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ helpers
  task automatic issue(input logic [NCH-1:0] mask, input cmd_t c);
    int done_b4 [NCH];
    @(posedge clk);
    while (1) begin
      automatic bit all_ready = 1;
      for (int k = 0; k < NCH; k++) if (mask[k] && !cmd_ready[k]) all_ready = 0;
      if (all_ready) break;
      @(posedge clk);
    end
    for (int k = 0; k < NCH; k++) begin
      done_b4[k] = done_cnt[k];
      cmd[k] <= c;
      cmd_valid[k] <= mask[k];
    end
    @(posedge clk);
    for (int k = 0; k < NCH; k++) cmd_valid[k] <= 1'b0;
    $display("[%0t] command %s issued to %b", $time, c.op.name(), mask);
    while (1) begin
      automatic bit all_done = 1;
      for (int k = 0; k < NCH; k++) if (mask[k] && done_cnt[k] == done_b4[k]) all_done = 0;
      if (all_done) break;
      @(posedge clk);
    end
  endtask

  function automatic int chip_y0(int k); return (k / CC) * M * HT; endfunction
  function automatic int chip_x0(int k); return (k % CC) * N * WT; endfunction

  // reference layer on the global FM
  function automatic void ref_layer(input layer_cfg_t L, input fm_t fin, input fm_t fbyp,
                                    input bit wgt [MAXC][9][MAXC], input logic [15:0] sc [MAXC],
                                    input logic [15:0] bi [MAXC], output fm_t fout, inout int relu_cnt);
    int s = L.stride2 ? 2 : 1;
    int taps = L.k3 ? 9 : 1;
    int gh = CR * M * int'(L.ht_in), gw = CC * N * int'(L.wt_in);
    for (int o = 0; o < MAXC; o++) for (int y = 0; y < GH; y++) for (int x = 0; x < GW; x++) fout[o][y][x] = 16'h0;
    for (int o = 0; o < int'(L.n_out); o++) begin
      for (int y = 0; y < gh / s; y++) begin
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
          if (L.relu_en && acc[15]) begin
            if (acc[14:0] != 0) relu_cnt++;
            acc = 16'h0;
          end
          fout[o][y][x] = acc;
        end
      end
    end
  endfunction

  // weight stream of one layer: per block of C output channels the scales,
  // the biases and then one word per (tap, input channel)
  task automatic push_weights(input layer_cfg_t L, input bit wgt [MAXC][9][MAXC],
                              input logic [15:0] sc [MAXC], input logic [15:0] bi [MAXC]);
    int taps = L.k3 ? 9 : 1;
    for (int k = 0; k < NCH; k++) begin
      for (int b = 0; b < int'(L.n_out) / C; b++) begin
        if (L.bnorm_en) for (int c = 0; c < C; c++) wq[k].push_back(sc[b*C+c]);
        if (L.bias_en)  for (int c = 0; c < C; c++) wq[k].push_back(bi[b*C+c]);
        for (int t = 0; t < taps; t++)
          for (int ci = 0; ci < int'(L.n_in); ci++) begin
            logic [15:0] w = '0;
            for (int c = 0; c < C; c++) w[c] = wgt[b*C+c][t][ci];
            wq[k].push_back(w);
          end
      end
    end
  endtask

  // stream an FM out of every chip and compare with the reference
  task automatic check_fm(input string name, input fm_t f, input int nch, input int ht, input int wt, input int base);
    cmd_t c = '0;
    int bad = 0;
    c.op = CMD_READ;
    c.io.n_ch = CH_W'(nch); c.io.ht = DIM_W'(ht); c.io.wt = DIM_W'(wt); c.io.base = FMM_AW'(base);
    for (int k = 0; k < NCH; k++) rq[k].delete();
    issue('1, c);
    for (int k = 0; k < NCH; k++) begin
      int y0 = (k / CC) * M * ht, x0 = (k % CC) * N * wt;
      checks++;
      if (rq[k].size() != nch * M * ht * N * wt) begin
        failures++;
        $display("FAIL %s chip %0d: %0d words read", name, k, rq[k].size());
        continue;
      end
      for (int ch = 0; ch < nch; ch++)
        for (int y = 0; y < M * ht; y++)
          for (int x = 0; x < N * wt; x++) begin
            logic [15:0] got = rq[k].pop_front();
            checks++;
            if (!fp16_eq(got, f[ch][y0 + y][x0 + x])) begin
              failures++; bad++;
              if (bad < 400) $display("FAIL %s chip %0d ch %0d y %0d x %0d: got %h exp %h", name, k, ch, y, x, got, f[ch][y0+y][x0+x]);
            end
          end
    end
    $display("%s: %0d mismatches", name, bad);
  endtask

  // ---------------------------------------------------------------- test
  fm_t f0, f1, f2, f3, f4;
  bit          wg [MAXC][9][MAXC];
  logic [15:0] sc [MAXC], bi [MAXC];
  int          relu_cnt = 0;

  task automatic run_layer(input string name, input layer_cfg_t L, input fm_t fin, input fm_t fbyp, output fm_t fout);
    cmd_t c = '0;
    int taps = L.k3 ? 9 : 1;
    int s = L.stride2 ? 2 : 1;
    int conv0 = n_conv;
    longint t0;
    int expect_conv;
    for (int o = 0; o < MAXC; o++) begin
      sc[o] = rand_fp16(1);
      sc[o][15] = 1'b0;
      bi[o] = rand_fp16(1);
      for (int t = 0; t < 9; t++) for (int i = 0; i < MAXC; i++) wg[o][t][i] = 1'($urandom());
    end
    ref_layer(L, fin, fbyp, wg, sc, bi, fout, relu_cnt);
    push_weights(L, wg, sc, bi);
    c.op = CMD_LAYER;
    c.layer = L;
    t0 = $time;
    issue('1, c);
    expect_conv = (int'(L.n_out) / C) * (int'(L.ht_in) / s) * (int'(L.wt_in) / s) * taps * int'(L.n_in);
    checks++;
    if (n_conv - conv0 != expect_conv) begin
      failures++;
      $display("FAIL %s: %0d convolution cycles, expected %0d", name, n_conv - conv0, expect_conv);
    end
    $display("%s: %0d cycles, %0d convolution cycles (%0d Op/cycle during convolution)", name,
             ($time - t0) / 10, n_conv - conv0, 2 * C * M * N);
    if (L.stride2) n_stride2++;
    checks++;
    if (wq[0].size() != 0) begin
      failures++;
      $display("FAIL %s: %0d weight words not consumed", name, wq[0].size());
    end
  endtask

  task automatic main_test();
    layer_cfg_t L;
    cmd_t c;
    for (int k = 0; k < NCH; k++) begin
      cmd_valid[k] = 0; cmd[k] = '0; done_cnt[k] = 0;
    end
    for (int ch = 0; ch < MAXC; ch++) for (int y = 0; y < GH; y++) for (int x = 0; x < GW; x++)
      f0[ch][y][x] = (ch < 4) ? rand_fp16(2) : 16'h0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // load the input FM into every chip
    for (int k = 0; k < NCH; k++)
      for (int ch = 0; ch < 4; ch++)
        for (int y = 0; y < M * HT; y++)
          for (int x = 0; x < N * WT; x++) dq[k].push_back(f0[ch][chip_y0(k) + y][chip_x0(k) + x]);
    c = '0; c.op = CMD_LOAD; c.io.n_ch = 4; c.io.ht = HT; c.io.wt = WT; c.io.base = 0;
    issue('1, c);

    // borders of the input FM: one region at a time, on the chips that have it
    for (int r = 0; r < 8; r++) begin
      logic [NCH-1:0] mask = '0;
      int cnt = 0;
      for (int k = 0; k < NCH; k++) begin
        int i = k / CC, j = k % CC;
        int y0 = chip_y0(k), x0 = chip_x0(k), y1 = y0 + M * HT, x1 = x0 + N * WT;
        bit has;
        int yb, xb;
        unique case (r)
          0: begin has = i > 0;      yb = y0 - 1; end
          1: begin has = i < CR - 1; yb = y1;     end
          2: begin has = j > 0;      xb = x0 - 1; end
          3: begin has = j < CC - 1; xb = x1;     end
          4: begin has = i > 0 && j > 0;           yb = y0 - 1; xb = x0 - 1; end
          5: begin has = i > 0 && j < CC - 1;      yb = y0 - 1; xb = x1;     end
          6: begin has = i < CR - 1 && j > 0;      yb = y1;     xb = x0 - 1; end
          default: begin has = i < CR - 1 && j < CC - 1; yb = y1; xb = x1; end
        endcase
        if (!has) continue;
        mask[k] = 1'b1;
        cnt = 0;
        if (r < 2) begin
          for (int pos = 0; pos < WT; pos++) for (int ch = 0; ch < 4; ch++) for (int n = 0; n < N; n++) begin
            dq[k].push_back(f0[ch][yb][x0 + n * WT + pos]); cnt++;
          end
        end else if (r < 4) begin
          for (int pos = 0; pos < HT; pos++) for (int ch = 0; ch < 4; ch++) for (int m = 0; m < M; m++) begin
            dq[k].push_back(f0[ch][y0 + m * HT + pos][xb]); cnt++;
          end
        end else begin
          for (int ch = 0; ch < 4; ch++) begin dq[k].push_back(f0[ch][yb][xb]); cnt++; end
        end
      end
      if (mask == '0) continue;
      c = '0; c.op = CMD_LOAD; c.io.to_border = 1'b1; c.io.region = region_e'(r); c.io.bm_par = 1'b0;
      c.io.n_ch = 4; c.io.ht = HT; c.io.wt = WT; c.io.count = 16'(cnt);
      issue(mask, c);
    end

    // L1: 3x3, 4 -> 8, scale, bias, ReLU
    L = '0; L.k3 = 1; L.n_in = 4; L.n_out = 8; L.ht_in = HT; L.wt_in = WT;
    L.in_base = 0; L.out_base = 64; L.bnorm_en = 1; L.bias_en = 1; L.relu_en = 1; L.bm_par_in = 0;
    run_layer("L1", L, f0, f0, f1);
    check_fm("L1", f1, 8, HT, WT, 64);

    // L2: 3x3, 8 -> 8, scale, bypass, bias, ReLU
    L = '0; L.k3 = 1; L.n_in = 8; L.n_out = 8; L.ht_in = HT; L.wt_in = WT;
    L.in_base = 64; L.out_base = 256; L.byp_base = 64; L.bnorm_en = 1; L.bypass_en = 1;
    L.bias_en = 1; L.relu_en = 1; L.bm_par_in = 1;
    run_layer("L2", L, f1, f1, f2);
    check_fm("L2", f2, 8, HT, WT, 256);

    // L3: 3x3 stride 2, 8 -> 4, bias
    L = '0; L.k3 = 1; L.stride2 = 1; L.n_in = 8; L.n_out = 4; L.ht_in = HT; L.wt_in = WT;
    L.in_base = 256; L.out_base = 512; L.bias_en = 1; L.bm_par_in = 0;
    run_layer("L3", L, f2, f2, f3);
    check_fm("L3", f3, 4, HT / 2, WT / 2, 512);

    // L4: 1x1 stride 2, 4 -> 8, ReLU
    L = '0; L.k3 = 0; L.stride2 = 1; L.n_in = 4; L.n_out = 8; L.ht_in = HT / 2; L.wt_in = WT / 2;
    L.in_base = 512; L.out_base = 600; L.relu_en = 1; L.bm_par_in = 1;
    run_layer("L4", L, f3, f3, f4);
    check_fm("L4", f4, 8, HT / 4, WT / 4, 600);

    n_relu = relu_cnt;
    $display("mechanisms: wstall=%0d pad=%0d nbtile=%0d bmread=%0d cmread=%0d scale=%0d bypass=%0d relu=%0d",
             n_wstall, n_pad, n_nbtile, n_bmread, n_cmread, n_scale, n_byp, n_relu);
    $display("mechanisms: stride2=%0d border_recv=%0d forward=%0d queue_wait=%0d border_load=%0d collision=%0d",
             n_stride2, n_brecv, n_fwd, n_qwait, n_bload, n_collide);
    begin
      int mech [14] = '{n_wstall, n_pad, n_nbtile, n_bmread, n_cmread, n_scale, n_byp, n_relu,
                        n_stride2, n_brecv, n_fwd, n_qwait, n_bload, n_collide};
      for (int i = 0; i < 14; i++) begin
        checks++;
        if (mech[i] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial main_test();
endmodule
