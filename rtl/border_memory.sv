// border_memory: Border Memory (BM) for multi-chip operation.
//
// Holds the pixels of the neighbouring chips' outermost rows and columns that
// the 3x3 kernels of this chip's edge tiles need. Four single-port macros of
// 1024 lines: top and bottom regions (pixels of the N and S neighbour) hold N
// words per line, one per tile column, and the left and right regions (W and E
// neighbour) M words, one per tile row, so an edge access feeds all edge tiles
// in one cycle like an extension of the FMM. Because the regions are separate
// macros, a corner access can read a horizontal and a vertical region in the
// same cycle. Line numbering: bit 9 selects one of two halves (input FM of the
// running layer / output FM being received), the rest follows hd_pkg::bm_line.
// Writes come one word at a time from the border interface or the I/O loader;
// a write has priority and the read that collides with it is dropped (the
// controller stalls instead of reading then). Read data is valid one cycle
// after re_i. The split into one macro per side is this design's reading of
// "4 high-density single-port SRAMs with 1024 lines of 7 x 16 bit".
module border_memory
  import hd_pkg::*;
#(
  parameter int unsigned M     = M_TILES,
  parameter int unsigned N     = N_TILES,
  parameter int unsigned LINES = SRAM_LINES
) (
  input  logic                      clk_i,
  input  bwr_t                      wr_i,
  input  logic                      re_i,
  input  logic [$clog2(LINES)-1:0]  line_h_i,   // line in the top/bottom regions
  input  logic [$clog2(LINES)-1:0]  line_v_i,   // line in the left/right regions
  output fp16_t [N-1:0]             top_o,
  output fp16_t [N-1:0]             bot_o,
  output fp16_t [M-1:0]             left_o,
  output fp16_t [M-1:0]             right_o
);
  localparam int unsigned LAW = $clog2(LINES);
  logic [3:0] we;
  logic [N-1:0] hmask;
  logic [M-1:0] vmask;
  fp16_t [N-1:0] hdata;
  fp16_t [M-1:0] vdata;

  always_comb begin
    we = '0;
    if (wr_i.valid && !wr_i.region[2]) we[wr_i.region[1:0]] = 1'b1;
    hmask = N'(1) << wr_i.word;
    vmask = M'(1) << wr_i.word;
    hdata = {N{wr_i.data}};
    vdata = {M{wr_i.data}};
  end

  sram_sp #(.LINES(LINES), .WORDS(N), .WW(16)) u_top (
    .clk_i, .re_i(re_i), .we_i(we[0]),
    .addr_i(we[0] ? wr_i.line[LAW-1:0] : line_h_i),
    .wmask_i(hmask), .wdata_i(hdata), .rdata_o(top_o));
  sram_sp #(.LINES(LINES), .WORDS(N), .WW(16)) u_bot (
    .clk_i, .re_i(re_i), .we_i(we[1]),
    .addr_i(we[1] ? wr_i.line[LAW-1:0] : line_h_i),
    .wmask_i(hmask), .wdata_i(hdata), .rdata_o(bot_o));
  sram_sp #(.LINES(LINES), .WORDS(M), .WW(16)) u_left (
    .clk_i, .re_i(re_i), .we_i(we[2]),
    .addr_i(we[2] ? wr_i.line[LAW-1:0] : line_v_i),
    .wmask_i(vmask), .wdata_i(vdata), .rdata_o(left_o));
  sram_sp #(.LINES(LINES), .WORDS(M), .WW(16)) u_right (
    .clk_i, .re_i(re_i), .we_i(we[3]),
    .addr_i(we[3] ? wr_i.line[LAW-1:0] : line_v_i),
    .wmask_i(vmask), .wdata_i(vdata), .rdata_o(right_o));

endmodule
