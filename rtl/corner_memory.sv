// corner_memory: Corner Memory (CM) for multi-chip operation.
//
// Holds the corner pixels of the four diagonal neighbour chips (for 3x3 kernels
// one pixel per channel and corner). One single-port macro of 4096 x 16 bit,
// split into four regions of 1024 words (NW, NE, SW, SE); within a region bit 9
// selects the half (input FM of the running layer / output FM being received)
// and bits 8:0 the channel. Writes (regions 4..7 of hd_pkg::region_e) have
// priority over reads; read data is valid one cycle after re_i.
module corner_memory
  import hd_pkg::*;
#(
  parameter int unsigned DEPTH = CM_DEPTH
) (
  input  logic                      clk_i,
  input  bwr_t                      wr_i,
  input  logic                      re_i,
  input  logic [1:0]                corner_i,   // 0 NW, 1 NE, 2 SW, 3 SE
  input  logic [$clog2(DEPTH)-3:0]  idx_i,      // {half, channel}
  output fp16_t                     rdata_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic          we;
  logic [AW-1:0] addr;

  always_comb begin
    we   = wr_i.valid && wr_i.region[2];
    addr = we ? {wr_i.region[1:0], wr_i.line[AW-3:0]} : {corner_i, idx_i};
  end

  sram_sp #(.LINES(DEPTH), .WORDS(1), .WW(16)) u_sram (
    .clk_i, .re_i(re_i), .we_i(we), .addr_i(addr),
    .wmask_i(1'b1), .wdata_i(wr_i.data), .rdata_o(rdata_o));

endmodule
