// ddu: Data Distribution Unit of spatial tile (ROW, COL).
//
// For a filter tap (dy, dx) every tile needs the input pixel at p + (dy, dx).
// Because all tiles work on the same in-tile position, the pixel either lies in
// the tile's own FMM bank or, for all tiles alike, in the bank of the same
// neighbour tile: the controller computes that common tile offset (sy_i, sx_i)
// in {-1, 0, +1} and one wrapped address for every bank, so the accesses never
// conflict. The DDU then picks, for its own tile:
//   * the neighbour tile's FMM word, if that tile is on this chip;
//   * a word of the border memory, if the tile lies on a neighbour chip in one
//     direction (top/bottom region for a vertical miss, left/right region for a
//     horizontal miss; for a diagonal offset the region that still holds the
//     pixel, cf. the corner access of the paper, which reads two border regions
//     and the corner memory in one cycle);
//   * the corner memory word, if the tile lies on a diagonal neighbour chip;
//   * zero, if that neighbour chip does not exist (zero padding at the edge of
//     the whole feature map).
// Inputs are the 3 x 3 neighbourhood of FMM words and the three border-memory
// words next to this tile's column (top/bottom) or row (left/right); the top
// level ties the entries that do not exist to zero. Purely combinational.
module ddu
  import hd_pkg::*;
#(
  parameter int unsigned M   = M_TILES,
  parameter int unsigned N   = N_TILES,
  parameter int unsigned ROW = 0,
  parameter int unsigned COL = 0
) (
  input  logic signed [1:0]   sy_i,
  input  logic signed [1:0]   sx_i,
  input  nbrs_t               nbrs_i,
  input  fp16_t [2:0][2:0]    fmm_i,    // [dy+1][dx+1]
  input  fp16_t [2:0]         top_i,    // top region words COL-1..COL+1
  input  fp16_t [2:0]         bot_i,
  input  fp16_t [2:0]         left_i,   // left region words ROW-1..ROW+1
  input  fp16_t [2:0]         right_i,
  input  fp16_t               corner_i,
  output fp16_t               x_o,
  output logic                pad_o,    // zero padding was used
  output logic                ext_o     // value came from border/corner memory
);
  int r, c;
  logic row_in, col_in, vert_ok, hor_ok;
  logic [1:0] iy, ix;

  always_comb begin
    r  = int'(ROW) + int'(sy_i);
    c  = int'(COL) + int'(sx_i);
    row_in = (r >= 0) && (r < int'(M));
    col_in = (c >= 0) && (c < int'(N));
    iy = 2'(sy_i + 2'sd1);
    ix = 2'(sx_i + 2'sd1);
    vert_ok = (sy_i < 0) ? nbrs_i.n : nbrs_i.s;
    hor_ok  = (sx_i < 0) ? nbrs_i.w : nbrs_i.e;
    x_o   = 16'h0000;
    pad_o = 1'b0;
    ext_o = 1'b0;
    if (row_in && col_in) begin
      x_o = fmm_i[iy][ix];
    end else if (!row_in && col_in) begin
      if (vert_ok) begin
        x_o   = (sy_i < 0) ? top_i[ix] : bot_i[ix];
        ext_o = 1'b1;
      end else pad_o = 1'b1;
    end else if (row_in && !col_in) begin
      if (hor_ok) begin
        x_o   = (sx_i < 0) ? left_i[iy] : right_i[iy];
        ext_o = 1'b1;
      end else pad_o = 1'b1;
    end else begin
      if (vert_ok && hor_ok) begin
        x_o   = corner_i;
        ext_o = 1'b1;
      end else pad_o = 1'b1;
    end
  end

endmodule
