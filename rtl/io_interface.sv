// io_interface: feature-map load and read-out over the 16-bit data stream.
//
// The chip keeps feature maps on chip: before a network runs, the input FM is
// streamed into the FMM, and at the end the result is streamed out. Both use the
// same order: channel, then global row Y = m * ht + y, then global column
// X = n * wt + x of the chip's M x N tiles of ht x wt pixels. Word (c, Y, X)
// lives in the bank of tile (m, n) at base + c * ht * wt + y * wt + x, the
// layout the controller uses. A border load (to_border) writes `count` words in
// arrival order into one border or corner memory region, in the same order the
// border interface uses for received pixels, so a host can supply the borders
// of the first layer's input in a multi-chip system.
// Loading takes one word per cycle (valid/ready). Read-out issues an FMM read,
// takes the word the next cycle and holds it until accepted (2 cycles a word).
// The paper only names the I/O interface; order, layout and handshake are this
// design's own.
module io_interface
  import hd_pkg::*;
#(
  parameter int unsigned M = M_TILES,
  parameter int unsigned N = N_TILES
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 start_i,
  input  logic                 read_i,     // with start_i: 1 = read-out, 0 = load
  input  io_cfg_t              cfg_i,
  output logic                 done_o,     // pulse
  // data in
  input  logic                 din_valid_i,
  input  fp16_t                din_i,
  output logic                 din_ready_o,
  // data out
  output logic                 dout_valid_o,
  output fp16_t                dout_o,
  input  logic                 dout_ready_i,
  // FMM port (one tile word)
  output logic                 fmm_re_o,
  output logic                 fmm_we_o,
  output logic [FMM_AW-1:0]    fmm_addr_o,
  output logic [M-1:0][N-1:0]  fmm_sel_o,  // tile addressed
  output fp16_t                fmm_wdata_o,
  input  fp16_t [M-1:0][N-1:0] fmm_rdata_i,
  // border / corner memory writes
  output bwr_t                 bwr_o
);
  typedef enum logic [2:0] {I_IDLE, I_LOAD, I_BLOAD, I_RD_ISSUE, I_RD_WAIT, I_RD_HOLD} ist_e;

  ist_e             st_q;
  io_cfg_t          cfg_q;
  logic [CH_W-1:0]  c_q;
  logic [$clog2(M+1)-1:0] m_q;
  logic [$clog2(N+1)-1:0] n_q;
  logic [DIM_W-1:0] y_q, x_q;
  logic [15:0]      cnt_q;
  logic [BM_AW-2:0] bl_q;
  logic [2:0]       bw_q;
  logic [$clog2(M+1)-1:0] m_r;
  logic [$clog2(N+1)-1:0] n_r;
  fp16_t            out_q;
  logic             last_word;

  always_comb begin
    last_word = (c_q == cfg_q.n_ch - 1'b1) && (32'(m_q) == M - 1) && (y_q == cfg_q.ht - 1'b1) &&
                (32'(n_q) == N - 1) && (x_q == cfg_q.wt - 1'b1);
    fmm_addr_o  = FMM_AW'(32'(cfg_q.base) + 32'(c_q) * 32'(cfg_q.ht) * 32'(cfg_q.wt) +
                          32'(y_q) * 32'(cfg_q.wt) + 32'(x_q));
    fmm_sel_o   = '0;
    fmm_sel_o[m_q][n_q] = 1'b1;
    fmm_wdata_o = din_i;
    fmm_we_o    = (st_q == I_LOAD) && din_valid_i;
    fmm_re_o    = (st_q == I_RD_ISSUE);
    din_ready_o = (st_q == I_LOAD) || (st_q == I_BLOAD);
    dout_valid_o = (st_q == I_RD_HOLD);
    dout_o      = out_q;
    bwr_o.valid  = (st_q == I_BLOAD) && din_valid_i;
    bwr_o.region = cfg_q.region;
    bwr_o.line   = {cfg_q.bm_par, bl_q};
    bwr_o.word   = bw_q;
    bwr_o.data   = din_i;
  end

  // next position of the (c, Y, X) scan
  logic [CH_W-1:0]  c_nx;
  logic [$clog2(M+1)-1:0] m_nx;
  logic [$clog2(N+1)-1:0] n_nx;
  logic [DIM_W-1:0] y_nx, x_nx;
  always_comb begin
    c_nx = c_q; m_nx = m_q; n_nx = n_q; y_nx = y_q; x_nx = x_q + 1'b1;
    if (x_q == cfg_q.wt - 1'b1) begin
      x_nx = '0;
      n_nx = n_q + 1'b1;
      if (32'(n_q) == N - 1) begin
        n_nx = '0;
        y_nx = y_q + 1'b1;
        if (y_q == cfg_q.ht - 1'b1) begin
          y_nx = '0;
          m_nx = m_q + 1'b1;
          if (32'(m_q) == M - 1) begin
            m_nx = '0;
            c_nx = c_q + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q  <= I_IDLE;
      cfg_q <= '0;
      c_q   <= '0;
      m_q   <= '0;
      n_q   <= '0;
      y_q   <= '0;
      x_q   <= '0;
      cnt_q <= '0;
      bl_q  <= '0;
      bw_q  <= '0;
      m_r   <= '0;
      n_r   <= '0;
      out_q <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (st_q)
        I_IDLE: if (start_i) begin
          cfg_q <= cfg_i;
          c_q <= '0; m_q <= '0; n_q <= '0; y_q <= '0; x_q <= '0;
          cnt_q <= '0; bl_q <= '0; bw_q <= '0;
          st_q <= read_i ? I_RD_ISSUE : (cfg_i.to_border ? I_BLOAD : I_LOAD);
        end
        I_LOAD: if (din_valid_i) begin
          c_q <= c_nx; m_q <= m_nx; n_q <= n_nx; y_q <= y_nx; x_q <= x_nx;
          if (last_word) begin
            st_q   <= I_IDLE;
            done_o <= 1'b1;
          end
        end
        I_BLOAD: if (din_valid_i) begin
          cnt_q <= cnt_q + 1'b1;
          if (cfg_q.region[2]) begin
            bl_q <= bl_q + 1'b1;
          end else if (bw_q == (((cfg_q.region == REG_TOP) || (cfg_q.region == REG_BOT)) ? 3'(N - 1) : 3'(M - 1))) begin
            bw_q <= '0;
            bl_q <= bl_q + 1'b1;
          end else begin
            bw_q <= bw_q + 1'b1;
          end
          if (cnt_q == cfg_q.count - 1'b1) begin
            st_q   <= I_IDLE;
            done_o <= 1'b1;
          end
        end
        I_RD_ISSUE: begin
          m_r  <= m_q;
          n_r  <= n_q;
          st_q <= I_RD_WAIT;
        end
        I_RD_WAIT: begin
          out_q <= fmm_rdata_i[m_r][n_r];
          st_q  <= I_RD_HOLD;
        end
        I_RD_HOLD: if (dout_ready_i) begin
          c_q <= c_nx; m_q <= m_nx; n_q <= n_nx; y_q <= y_nx; x_q <= x_nx;
          if (last_word) begin
            st_q   <= I_IDLE;
            done_o <= 1'b1;
          end else begin
            st_q <= I_RD_ISSUE;
          end
        end
        default: st_q <= I_IDLE;
      endcase
    end
  end

endmodule
