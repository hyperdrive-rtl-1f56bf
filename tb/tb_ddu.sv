// tb_ddu: a full 7 x 7 array of Data Distribution Units. Random FMM words,
// border-memory words and a corner word are placed on a 9 x 9 grid (the chip's
// tiles plus a one-tile ring standing for the neighbour chips); for every
// offset (sy, sx) and every neighbour configuration, tile (m, n) must deliver
// grid[m + sy][n + sx], or zero where the ring cell belongs to a missing chip.
module tb_ddu;
  import hd_pkg::*;
  localparam int M = 7, N = 7;
  logic signed [1:0] sy, sx;
  nbrs_t nb;
  fp16_t [M-1:0][N-1:0] fmm;
  fp16_t [N-1:0] top, bot;
  fp16_t [M-1:0] left, right;
  fp16_t cm;
  fp16_t [M-1:0][N-1:0] x;
  logic  [M-1:0][N-1:0] pad, ext;
  int checks = 0, failures = 0, n_pad = 0, n_ext = 0;

  for (genvar m = 0; m < M; m++) begin : g_r
    for (genvar n = 0; n < N; n++) begin : g_c
      fp16_t [2:0][2:0] nbh;
      fp16_t [2:0] t3, b3, l3, r3;
      always_comb begin
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++)
            nbh[dy+1][dx+1] = (m+dy >= 0 && m+dy < M && n+dx >= 0 && n+dx < N) ? fmm[m+dy][n+dx] : 16'h0;
        for (int k = -1; k <= 1; k++) begin
          t3[k+1] = (n+k >= 0 && n+k < N) ? top[n+k] : 16'h0;
          b3[k+1] = (n+k >= 0 && n+k < N) ? bot[n+k] : 16'h0;
          l3[k+1] = (m+k >= 0 && m+k < M) ? left[m+k] : 16'h0;
          r3[k+1] = (m+k >= 0 && m+k < M) ? right[m+k] : 16'h0;
        end
      end
      ddu #(.M(M), .N(N), .ROW(m), .COL(n)) dut (.sy_i(sy), .sx_i(sx), .nbrs_i(nb), .fmm_i(nbh),
        .top_i(t3), .bot_i(b3), .left_i(l3), .right_i(r3), .corner_i(cm),
        .x_o(x[m][n]), .pad_o(pad[m][n]), .ext_o(ext[m][n]));
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp16_t grid [M+2][N+2];
    for (int it = 0; it < 200; it++) begin
      nb = nbrs_t'(4'($urandom()));
      for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) fmm[m][n] = 16'($urandom_range(16'hFFFF, 1));
      for (int n = 0; n < N; n++) begin top[n] = 16'($urandom_range(16'hFFFF, 1)); bot[n] = 16'($urandom_range(16'hFFFF, 1)); end
      for (int m = 0; m < M; m++) begin left[m] = 16'($urandom_range(16'hFFFF, 1)); right[m] = 16'($urandom_range(16'hFFFF, 1)); end
      cm = 16'($urandom_range(16'hFFFF, 1));
      for (int sdy = -1; sdy <= 1; sdy++) begin
        for (int sdx = -1; sdx <= 1; sdx++) begin
          // build the reference grid; the corner cell used by this offset holds cm
          for (int r = 0; r < M + 2; r++) for (int c = 0; c < N + 2; c++) grid[r][c] = 16'h0;
          for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) grid[m+1][n+1] = fmm[m][n];
          for (int n = 0; n < N; n++) begin
            grid[0][n+1]   = nb.n ? top[n] : 16'h0;
            grid[M+1][n+1] = nb.s ? bot[n] : 16'h0;
          end
          for (int m = 0; m < M; m++) begin
            grid[m+1][0]   = nb.w ? left[m] : 16'h0;
            grid[m+1][N+1] = nb.e ? right[m] : 16'h0;
          end
          grid[0][0]     = (nb.n && nb.w) ? cm : 16'h0;
          grid[0][N+1]   = (nb.n && nb.e) ? cm : 16'h0;
          grid[M+1][0]   = (nb.s && nb.w) ? cm : 16'h0;
          grid[M+1][N+1] = (nb.s && nb.e) ? cm : 16'h0;
          sy = 2'(sdy); sx = 2'(sdx);
          #1;
          for (int m = 0; m < M; m++) begin
            for (int n = 0; n < N; n++) begin
              checks++;
              if (x[m][n] !== grid[m+1+sdy][n+1+sdx]) begin
                failures++;
                if (failures < 10) $display("FAIL tile %0d,%0d off %0d,%0d nb=%b got %h exp %h", m, n, sdy, sdx, nb, x[m][n], grid[m+1+sdy][n+1+sdx]);
              end
              if (pad[m][n]) n_pad++;
              if (ext[m][n]) n_ext++;
            end
          end
        end
      end
    end
    // every kind of source must have been exercised
    checks++;
    if (n_pad == 0 || n_ext == 0) failures++;
    $display("zero-padded %0d, from border/corner memory %0d", n_pad, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
