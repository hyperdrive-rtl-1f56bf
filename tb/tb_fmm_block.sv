// tb_fmm_block: one FMM row (8 macros x 1024 lines x 7 words). Writes every
// word through random tile masks, then reads random addresses across all
// macros and checks the 7 tile words against a model (latency one cycle).
module tb_fmm_block;
  import hd_pkg::*;
  localparam int N = 7, DEPTH = 8192;
  logic clk = 0;
  logic re, we;
  logic [12:0] addr;
  logic [N-1:0] wmask;
  fp16_t [N-1:0] wdata, rdata;
  fp16_t [N-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  fmm_block #(.N(N)) dut (.clk_i(clk), .re_i(re), .we_i(we), .addr_i(addr),
    .wmask_i(wmask), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; addr = 0; wmask = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; addr = a; wmask = '1;
      for (int n = 0; n < N; n++) wdata[n] = 16'($urandom());
      model[a] = wdata;
    end
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      addr = 13'($urandom());
      if ($urandom_range(2, 0) == 0) begin
        we = 1; re = 0; wmask = N'(1) << $urandom_range(N - 1, 0);
        for (int n = 0; n < N; n++) begin
          wdata[n] = 16'($urandom());
          if (wmask[n]) model[addr][n] = wdata[n];
        end
      end else begin
        automatic fp16_t [N-1:0] exp = model[addr];
        we = 0; re = 1;
        @(negedge clk); re = 0;
        checks++;
        if (rdata !== exp) begin failures++; if (failures < 5) $display("FAIL addr %0d", addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
