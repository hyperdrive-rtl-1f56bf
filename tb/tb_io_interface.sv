// tb_io_interface: I/O interface with a behavioural model of the tile banks
// (2 x 2 tiles). Checks that a feature-map load writes word (c, Y, X) of the
// stream to tile (Y / ht, X / wt) at base + c * ht * wt + y * wt + x, that a
// read-out returns the banks in the same order, that a border load writes
// `count` words into one region with the line / word order of the border
// memory, and the rates: one word per cycle when loading, two per word when
// reading out.
module tb_io_interface;
  import hd_pkg::*;
  localparam int M = 2, N = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, rd = 0, done;
  io_cfg_t cfg = '0;
  logic din_valid = 0, din_ready, dout_valid, dout_ready = 0;
  fp16_t din = '0, dout;
  logic fmm_re, fmm_we;
  logic [FMM_AW-1:0] fmm_addr;
  logic [M-1:0][N-1:0] fmm_sel;
  fp16_t fmm_wdata;
  fp16_t [M-1:0][N-1:0] fmm_rdata;
  bwr_t bwr;
  fp16_t bank [M][N][8192];
  int checks = 0, failures = 0;

  io_interface #(.M(M), .N(N)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .read_i(rd), .cfg_i(cfg),
    .done_o(done), .din_valid_i(din_valid), .din_i(din), .din_ready_o(din_ready),
    .dout_valid_o(dout_valid), .dout_o(dout), .dout_ready_i(dout_ready),
    .fmm_re_o(fmm_re), .fmm_we_o(fmm_we), .fmm_addr_o(fmm_addr), .fmm_sel_o(fmm_sel),
    .fmm_wdata_o(fmm_wdata), .fmm_rdata_i(fmm_rdata), .bwr_o(bwr));

  // bank model: registered read of all tiles, masked write
  always @(posedge clk) begin
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      if (fmm_we && fmm_sel[m][n]) bank[m][n][fmm_addr] = fmm_wdata;
      if (fmm_re) fmm_rdata[m][n] <= bank[m][n][fmm_addr];
    end
  end

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic go(input bit r, input io_cfg_t c);
    @(negedge clk);
    start = 1; rd = r; cfg = c;
    @(negedge clk);
    start = 0;
  endtask

  task automatic main_test();
    for (int it = 0; it < 20; it++) begin
      io_cfg_t c = '0;
      int nch = $urandom_range(5, 1), ht = $urandom_range(6, 1), wt = $urandom_range(6, 1);
      int base = $urandom_range(2000, 0);
      int nw = nch * M * ht * N * wt;
      fp16_t data [$];
      int t0, cyc;
      c.n_ch = CH_W'(nch); c.ht = DIM_W'(ht); c.wt = DIM_W'(wt); c.base = FMM_AW'(base);
      for (int i = 0; i < nw; i++) data.push_back(16'($urandom()));
      // load, stream always valid
      go(0, c);
      t0 = $time;
      for (int i = 0; i < nw; i++) begin
        din_valid = 1; din = data[i];
        @(posedge clk);
        while (!din_ready) @(posedge clk);
        #1;
      end
      din_valid = 0;
      cyc = int'(($time - t0) / 10);
      checks++;
      if (cyc > nw + 1) begin failures++; $display("FAIL load of %0d words took %0d cycles", nw, cyc); end
      @(posedge clk); #1;
      for (int ch = 0; ch < nch; ch++) for (int y = 0; y < M * ht; y++) for (int x = 0; x < N * wt; x++) begin
        checks++;
        if (bank[y / ht][x / wt][base + ch * ht * wt + (y % ht) * wt + (x % wt)] !== data[(ch * M * ht + y) * N * wt + x]) failures++;
      end
      // read back with a sink that is sometimes not ready
      go(1, c);
      t0 = $time;
      for (int i = 0; i < nw; i++) begin
        @(negedge clk);
        dout_ready = 1;
        while (!dout_valid) @(negedge clk);
        checks++;
        if (dout !== data[i]) begin
          failures++;
          if (failures < 5) $display("FAIL read word %0d got %h exp %h", i, dout, data[i]);
        end
        @(negedge clk);
        dout_ready = 0;
      end
      cyc = int'(($time - t0) / 10);
      checks++;
      if (cyc > 3 * nw + 3) begin failures++; $display("FAIL read of %0d words took %0d cycles", nw, cyc); end
      // border load into a random region
      begin
        int r = $urandom_range(7, 0);
        int cnt = $urandom_range(40, 1);
        int line = 0, word = 0;
        int last = (r < 2) ? N - 1 : M - 1;
        c.to_border = 1; c.region = region_e'(r); c.bm_par = 1'($urandom()); c.count = 16'(cnt);
        go(0, c);
        for (int i = 0; i < cnt; i++) begin
          @(negedge clk);
          din_valid = 1; din = 16'($urandom());
          #1;
          checks++;
          if (!(bwr.valid && bwr.region == region_e'(r) && bwr.line == {c.bm_par, 9'(line)} &&
                (r >= 4 || bwr.word == 3'(word)) && bwr.data == din)) begin
            failures++;
            $display("FAIL border load word %0d: %p", i, bwr);
          end
          if (r >= 4) line++;
          else if (word == last) begin word = 0; line++; end
          else word++;
        end
        @(negedge clk);
        din_valid = 0;
      end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    main_test();
  end
endmodule
