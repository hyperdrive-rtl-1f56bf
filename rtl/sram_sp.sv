// sram_sp: single-port SRAM with a per-word write mask, written as an array.
//
// Stands for the high-density single-port SRAM macros of the chip: the feature
// map memory uses 7 x 8 macros of 1024 lines x 112 bit (7 FP16 words), the
// border memory four of the same kind, the corner memory one of 4096 x 16 bit.
// One access per cycle: a write (we_i, with wmask_i selecting the words) or a
// read (re_i); read data appears in rdata_o the cycle after the read and holds
// until the next read. The paper's macros are foundry IP; this array has the
// same organisation and single-port behaviour.
module sram_sp #(
  parameter int unsigned LINES = 1024,
  parameter int unsigned WORDS = 7,
  parameter int unsigned WW    = 16
) (
  input  logic                        clk_i,
  input  logic                        re_i,
  input  logic                        we_i,
  input  logic [$clog2(LINES)-1:0]    addr_i,
  input  logic [WORDS-1:0]            wmask_i,
  input  logic [WORDS-1:0][WW-1:0]    wdata_i,
  output logic [WORDS-1:0][WW-1:0]    rdata_o
);
  logic [WORDS-1:0][WW-1:0] mem [LINES];

  always_ff @(posedge clk_i) begin
    if (we_i) begin
      for (int w = 0; w < int'(WORDS); w++) begin
        if (wmask_i[w]) mem[addr_i][w] <= wdata_i[w];
      end
    end else if (re_i) begin
      rdata_o <= mem[addr_i];
    end
  end


endmodule
