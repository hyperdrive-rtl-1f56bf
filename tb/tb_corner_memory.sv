// tb_corner_memory: writes corner pixels into the four corner regions (by
// region code 4..7, index {half, channel}) and reads them back by corner
// number and index, one cycle latency.
module tb_corner_memory;
  import hd_pkg::*;
  logic clk = 0;
  bwr_t wr;
  logic re;
  logic [1:0] corner;
  logic [9:0] idx;
  fp16_t rdata;
  fp16_t model [4][1024];
  int checks = 0, failures = 0;

  corner_memory dut (.clk_i(clk), .wr_i(wr), .re_i(re), .corner_i(corner), .idx_i(idx), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr = '0; re = 0; corner = 0; idx = 0;
    for (int k = 0; k < 4; k++)
      for (int i = 0; i < 1024; i++) begin
        @(negedge clk);
        wr = '{valid: 1'b1, region: region_e'(4 + k), line: 10'(i), word: 3'd0, data: 16'($urandom())};
        model[k][i] = wr.data;
      end
    @(negedge clk); wr.valid = 0;
    for (int i = 0; i < 8000; i++) begin
      @(negedge clk);
      re = 1; corner = 2'($urandom()); idx = 10'($urandom());
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[corner][idx]) begin
        failures++;
        if (failures < 5) $display("FAIL corner %0d idx %0d got %h exp %h", corner, idx, rdata, model[corner][idx]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
