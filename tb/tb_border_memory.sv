// tb_border_memory: writes words one at a time into the four border regions
// (top/bottom: N words per line, left/right: M words per line) and reads
// lines back; a single read returns all four regions (horizontal regions at
// line_h, vertical regions at line_v) one cycle later.
module tb_border_memory;
  import hd_pkg::*;
  localparam int M = 7, N = 7, LINES = 1024;
  logic clk = 0;
  bwr_t wr;
  logic re;
  logic [9:0] lh, lv;
  fp16_t [N-1:0] top, bot;
  fp16_t [M-1:0] left, right;
  fp16_t model [4][LINES][7];
  int checks = 0, failures = 0;

  border_memory #(.M(M), .N(N)) dut (.clk_i(clk), .wr_i(wr), .re_i(re), .line_h_i(lh), .line_v_i(lv),
    .top_o(top), .bot_o(bot), .left_o(left), .right_o(right));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int reg_, input int line, input int word, input fp16_t d);
    @(negedge clk);
    wr = '{valid: 1'b1, region: region_e'(reg_), line: 10'(line), word: 3'(word), data: d};
    model[reg_][line][word] = d;
    @(negedge clk);
    wr.valid = 1'b0;
  endtask

  initial begin
    wr = '0; re = 0; lh = 0; lv = 0;
    for (int r = 0; r < 4; r++)
      for (int l = 0; l < 64; l++)
        for (int w = 0; w < 7; w++) write(r, l, w, 16'($urandom()));
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(1, 0) == 1) begin
        write($urandom_range(3, 0), $urandom_range(63, 0), $urandom_range(6, 0), 16'($urandom()));
      end else begin
        @(negedge clk);
        re = 1; lh = 10'($urandom_range(63, 0)); lv = 10'($urandom_range(63, 0));
        @(negedge clk); re = 0;
        for (int w = 0; w < 7; w++) begin
          checks += 4;
          if (top[w]   !== model[0][lh][w]) failures++;
          if (bot[w]   !== model[1][lh][w]) failures++;
          if (left[w]  !== model[2][lv][w]) failures++;
          if (right[w] !== model[3][lv][w]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
