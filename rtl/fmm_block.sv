// fmm_block: one row of the Feature Map Memory (FMM).
//
// The FMM of the chip is M x 8 single-port SRAM macros of 1024 lines x N FP16
// words; each row of spatial tiles owns 8 macros, and word n of a line belongs
// to tile column n, so one access reads or writes the same address of all N
// tile banks of the row at once (the aligned access of the paper). A bank thus
// holds 8 x 1024 = 8192 words per tile; address bits [12:10] pick the macro and
// [9:0] the line. Only the addressed macro is enabled. Read data is valid one
// cycle after re_i. Writes use a per-tile word mask (write-back of a channel
// writes all N words, loading from the data stream writes one).
module fmm_block
  import hd_pkg::*;
#(
  parameter int unsigned N      = N_TILES,
  parameter int unsigned MACROS = FMM_MACROS,
  parameter int unsigned LINES  = SRAM_LINES
) (
  input  logic                               clk_i,
  input  logic                               re_i,
  input  logic                               we_i,
  input  logic [$clog2(MACROS*LINES)-1:0]    addr_i,
  input  logic [N-1:0]                       wmask_i,
  input  fp16_t [N-1:0]                      wdata_i,
  output fp16_t [N-1:0]                      rdata_o
);
  localparam int unsigned LAW = $clog2(LINES);
  localparam int unsigned SW  = (MACROS > 1) ? $clog2(MACROS) : 1;

  logic [SW-1:0] sel, sel_q;
  fp16_t [MACROS-1:0][N-1:0] rd;

  assign sel = SW'(addr_i >> LAW);

  for (genvar k = 0; k < MACROS; k++) begin : g_macro
    sram_sp #(.LINES(LINES), .WORDS(N), .WW(16)) u_sram (
      .clk_i,
      .re_i   (re_i && (sel == SW'(k))),
      .we_i   (we_i && (sel == SW'(k))),
      .addr_i (addr_i[LAW-1:0]),
      .wmask_i,
      .wdata_i,
      .rdata_o(rd[k])
    );
  end

  always_ff @(posedge clk_i) begin
    if (re_i && !we_i) sel_q <= sel;
  end

  assign rdata_o = rd[sel_q];

endmodule
