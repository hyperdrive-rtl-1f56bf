// tb_border_interface: four border interfaces wired as a 2 x 2 chip mesh
// (NW, NE, SW, SE) with M = N = 2 tiles per chip edge and C = 4 channels.
// Each chip walks through the output positions of a 3 x 3 tile raster like the
// controller does: before an edge position it waits for room_o, then offers
// one line of random edge values per channel. Every receiving chip must write
// the neighbour's edge values, in order, into the matching border region (top,
// bottom, left, right) with consecutive line / word addresses in the half given
// by par_out_i, and the diagonal neighbour's corner pixel (sent to the vertical
// neighbour and forwarded sideways) into the corner region. At the end every
// chip's sync_o must be high and nothing may be left over.
module tb_border_interface;
  import hd_pkg::*;
  localparam int M = 2, N = 2, C = 4, HT = 3, WT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start;
  logic        par;
  logic [3:0]  edge_v [4], corner_v [4];
  fp16_t [N-1:0] ln [4], ls [4];
  fp16_t [M-1:0] lw [4], le [4];
  logic        room [4], sync [4];
  logic [4:0]  tx [4];
  bwr_t        wr [4];
  fp16_t       expq [4][8][$];
  int          cnt_line [4][8], cnt_word [4][8];
  int          checks = 0, failures = 0, n_fwd = 0, n_wait = 0;

  for (genvar k = 0; k < 4; k++) begin : g_chip
    localparam int I = k / 2, J = k % 2;
    logic [3:0][4:0] rx;
    assign rx[3] = (I > 0) ? tx[k - 2] : 5'b0;
    assign rx[2] = (I < 1) ? tx[k + 2] : 5'b0;
    assign rx[1] = (J > 0) ? tx[k - 1] : 5'b0;
    assign rx[0] = (J < 1) ? tx[k + 1] : 5'b0;
    border_interface #(.M(M), .N(N), .QLINES(C)) dut (
      .clk_i(clk), .rst_ni(rst_n),
      .nbrs_i(chip_neighbours((I == 0) ? ((J == 0) ? CHIP_NW : CHIP_NE) : ((J == 0) ? CHIP_SW : CHIP_SE))),
      .layer_start_i(start), .par_out_i(par), .edge_i(edge_v[k]), .corner_i(corner_v[k]),
      .line_n_i(ln[k]), .line_s_i(ls[k]), .line_w_i(lw[k]), .line_e_i(le[k]),
      .room_o(room[k]), .tx_o(tx[k]), .rx_i(rx), .wr_o(wr[k]), .sync_o(sync[k]));

    // receive checker
    always @(posedge clk) if (rst_n && wr[k].valid) begin
      automatic int r = int'(wr[k].region);
      automatic int last = (r < 2) ? N - 1 : M - 1;
      checks++;
      if (expq[k][r].size() == 0) begin
        failures++;
        $display("FAIL chip %0d region %0d: unexpected write", k, r);
      end else begin
        automatic fp16_t e = expq[k][r].pop_front();
        if (wr[k].data !== e || wr[k].line !== {par, 9'(cnt_line[k][r])} || (r < 4 && wr[k].word !== 3'(cnt_word[k][r]))) begin
          failures++;
          $display("FAIL chip %0d region %0d: got %h line %0d word %0d, exp %h line %0d word %0d", k, r,
                   wr[k].data, wr[k].line, wr[k].word, e, cnt_line[k][r], cnt_word[k][r]);
        end
      end
      if (r >= 4) cnt_line[k][r]++;
      else if (cnt_word[k][r] == last) begin cnt_word[k][r] = 0; cnt_line[k][r]++; end
      else cnt_word[k][r]++;
    end
    always @(posedge clk) if (rst_n && dut.f_push) n_fwd++;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one chip computing its output positions
  task automatic chip_run(input int k);
    int i = k / 2, j = k % 2;
    for (int y = 0; y < HT; y++) for (int x = 0; x < WT; x++) begin
      logic [3:0] e = {y == 0, y == HT - 1, x == 0, x == WT - 1};
      repeat ($urandom_range(30, 5)) @(negedge clk);
      if (e != 0) begin
        if (!room[k]) n_wait++;
        while (!room[k]) @(negedge clk);
      end
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        for (int t = 0; t < N; t++) begin ln[k][t] = 16'($urandom()); ls[k][t] = 16'($urandom()); end
        for (int t = 0; t < M; t++) begin lw[k][t] = 16'($urandom()); le[k][t] = 16'($urandom()); end
        edge_v[k] = e;
        corner_v[k] = {e[3] & e[1], e[3] & e[0], e[2] & e[1], e[2] & e[0]};
        // expected receptions at the neighbours
        if (e[3] && i == 1) for (int t = 0; t < N; t++) expq[k - 2][1].push_back(ln[k][t]);  // my N edge -> bottom of N chip
        if (e[2] && i == 0) for (int t = 0; t < N; t++) expq[k + 2][0].push_back(ls[k][t]);  // S edge -> top of S chip
        if (e[1] && j == 1) for (int t = 0; t < M; t++) expq[k - 1][3].push_back(lw[k][t]);  // W edge -> right of W chip
        if (e[0] && j == 0) for (int t = 0; t < M; t++) expq[k + 1][2].push_back(le[k][t]);  // E edge -> left of E chip
        if (corner_v[k][0] && i == 0 && j == 0) expq[3][4].push_back(ls[k][N-1]);  // SE corner -> NW region of SE chip
        if (corner_v[k][1] && i == 0 && j == 1) expq[2][5].push_back(ls[k][0]);    // SW corner -> NE region of SW chip
        if (corner_v[k][2] && i == 1 && j == 0) expq[1][6].push_back(ln[k][N-1]);  // NE corner -> SW region of NE chip
        if (corner_v[k][3] && i == 1 && j == 1) expq[0][7].push_back(ln[k][0]);    // NW corner -> SE region of NW chip
      end
      @(negedge clk);
      edge_v[k] = '0;
      corner_v[k] = '0;
    end
  endtask

  task automatic main_test();
    for (int layer = 0; layer < 2; layer++) begin
      @(negedge clk);
      start = 1; par = 1'(layer);
      for (int k = 0; k < 4; k++) for (int r = 0; r < 8; r++) begin cnt_line[k][r] = 0; cnt_word[k][r] = 0; end
      @(negedge clk);
      start = 0;
      fork
        chip_run(0);
        chip_run(1);
        chip_run(2);
        chip_run(3);
      join
      // wait for the exchange to finish
      for (int t = 0; t < 2000; t++) begin
        @(negedge clk);
        if (sync[0] && sync[1] && sync[2] && sync[3]) break;
      end
      checks++;
      if (!(sync[0] && sync[1] && sync[2] && sync[3])) begin
        failures++;
        $display("FAIL layer %0d: sync not reached", layer);
      end
      for (int k = 0; k < 4; k++) for (int r = 0; r < 8; r++) begin
        checks++;
        if (expq[k][r].size() != 0) begin
          failures++;
          $display("FAIL chip %0d region %0d: %0d pixels never arrived", k, r, expq[k][r].size());
        end
      end
    end
    checks++;
    if (n_fwd == 0 || n_wait == 0) failures++;
    $display("corner pixels forwarded %0d, waits for queue room %0d", n_fwd, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    start = 0; par = 0;
    for (int k = 0; k < 4; k++) begin
      edge_v[k] = '0; corner_v[k] = '0; ln[k] = '0; ls[k] = '0; lw[k] = '0; le[k] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    main_test();
  end
endmodule
