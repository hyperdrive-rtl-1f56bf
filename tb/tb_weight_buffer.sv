// tb_weight_buffer: writes C-bit weight words as the stream would for the
// first pixel (reading the same address in the same cycle must return the new
// word), then reads random entries back as for the following pixels.
module tb_weight_buffer;
  localparam int C = 16, DEPTH = 5120;
  logic clk = 0;
  logic we, re;
  logic [12:0] waddr, raddr;
  logic [C-1:0] wdata, rdata;
  logic [C-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_buffer #(.C(C), .DEPTH(DEPTH)) dut (.clk_i(clk), .we_i(we), .waddr_i(waddr),
    .wdata_i(wdata), .re_i(re), .raddr_i(raddr), .rdata_o(rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; re = 1; waddr = a; raddr = a; wdata = C'($urandom());
      model[a] = wdata;
      @(negedge clk); we = 0; re = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; if (failures < 5) $display("FAIL bypass %0d", a); end
    end
    for (int i = 0; i < 10000; i++) begin
      @(negedge clk);
      re = 1; raddr = 13'($urandom_range(DEPTH - 1, 0));
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[raddr]) begin failures++; if (failures < 5) $display("FAIL read %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
