// weight_buffer: the weight buffer (WBuf) holding the binary weights of the C
// output channels being computed, for every input channel and filter tap.
//
// Entry address = input_channel * taps + tap; each entry is one C-bit word, bit
// c being the weight of output channel c. While the first output pixel of an
// output-channel block is computed, every weight word arrives on the weight
// stream, is written here and used in the same pass; all further pixels of the
// block read it back, so each weight crosses the chip boundary once per layer.
// One read per cycle, data valid the next cycle; a read of the address being
// written returns the new word. The chip builds this as a latch-based standard
// cell memory of 5 x 8 blocks of 128 rows of 16 bit (5120 words, enough for 512
// input channels x 9 taps); here it is a flip-flop array of the same size with a
// synchronous write port.
module weight_buffer #(
  parameter int unsigned C     = 16,
  parameter int unsigned DEPTH = 5120
) (
  input  logic                     clk_i,
  input  logic                     we_i,
  input  logic [$clog2(DEPTH)-1:0] waddr_i,
  input  logic [C-1:0]             wdata_i,
  input  logic                     re_i,
  input  logic [$clog2(DEPTH)-1:0] raddr_i,
  output logic [C-1:0]             rdata_o
);
  logic [C-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= (we_i && (waddr_i == raddr_i)) ? wdata_i : mem[raddr_i];
  end

endmodule
