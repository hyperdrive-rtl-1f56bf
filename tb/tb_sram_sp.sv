// tb_sram_sp: random masked writes and reads against an associative-array
// model; checks one-cycle read latency and that read data holds while idle.
module tb_sram_sp;
  localparam int LINES = 1024, WORDS = 7;
  logic clk = 0;
  logic re, we;
  logic [9:0] addr;
  logic [WORDS-1:0] wmask;
  logic [WORDS-1:0][15:0] wdata, rdata;
  logic [WORDS-1:0][15:0] model [LINES];
  int checks = 0, failures = 0;

  sram_sp #(.LINES(LINES), .WORDS(WORDS), .WW(16)) dut (.clk_i(clk), .re_i(re), .we_i(we),
    .addr_i(addr), .wmask_i(wmask), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; addr = 0; wmask = 0; wdata = 0;
    // fill every line so reads are defined
    for (int l = 0; l < LINES; l++) begin
      @(negedge clk); we = 1; addr = l; wmask = '1;
      for (int w = 0; w < WORDS; w++) wdata[w] = 16'($urandom());
      model[l] = wdata;
    end
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      addr = 10'($urandom());
      if ($urandom_range(1, 0) == 1) begin
        we = 1; re = 0; wmask = WORDS'($urandom());
        for (int w = 0; w < WORDS; w++) begin
          wdata[w] = 16'($urandom());
          if (wmask[w]) model[addr][w] = wdata[w];
        end
      end else begin
        automatic logic [WORDS-1:0][15:0] exp = model[addr];
        we = 0; re = 1;
        @(negedge clk); re = 0;
        checks++;
        if (rdata !== exp) begin failures++; if (failures < 5) $display("FAIL read %0d", addr); end
        @(negedge clk);                       // idle cycle: data must hold
        checks++;
        if (rdata !== exp) begin failures++; if (failures < 5) $display("FAIL hold %0d", addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
