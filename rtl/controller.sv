// controller: layer sequencer of the Hyperdrive chip.
//
// Takes commands from the control stream. CMD_LOAD / CMD_READ are handed to the
// I/O interface; CMD_LAYER runs one 1x1 or 3x3 convolution layer (stride 1 or
// 2) on the whole on-chip feature map, following the paper's execution flow:
//
//   for each block of C output channels:
//     read C scales (if bnorm) and C biases (if bias) from the weight stream
//     for each output pixel position p of the tiles (raster order):
//       for each filter tap, for each input channel:          (one cycle each)
//         weight word: from the stream for the first p (and stored in the
//         weight buffer), from the weight buffer for all other p
//         input pixel: aligned read of all tile banks (or border/corner memory
//         or zero padding, see ddu) ; all C x M x N TPUs accumulate +/- x
//       scale:  C cycles, one channel per cycle on the shared multiplier
//       bypass: C cycles, read the bypass FM, add (one channel per cycle)
//       bias, ReLU and write-back: C cycles, one channel per cycle to all tile
//         banks; edge values also go to the border interface
//   wait until the border exchange with the neighbour chips is complete
//
// So the convolution issues one input channel/tap per cycle for C x M x N
// output values (2 x C x M x N = 1568 Op/cycle at the default size), the
// per-channel steps run at one operation per tile and cycle, and the order of
// bypass before bias lets the bypass be read and the result written back to
// the same address without stalls.
// Pipeline: stage 0 issues memory reads (FMM, weight buffer, border/corner
// memory), stage 1 applies the TPU operation to the read data, stage 2 writes a
// result back. Stalls: a missing weight-stream word during the first pixel of a
// block; a border/corner-memory read that collides with a write of received
// border pixels; a full border queue before an edge pixel is written back.
// The write-back register sits two stages behind the read (p2a_q, p2_q) so that
// a channel is written the cycle after its bias / ReLU step.
// Own choices (the paper does not give them): the command format, the order of
// scale/bias words on the weight stream, the raster order of pixels, the FMM
// layout base + channel x (tile height x width) + y x width + x, and 2 idle
// cycles after each pixel's write-back.
module controller
  import hd_pkg::*;
#(
  parameter int unsigned C     = C_PAR,
  parameter int unsigned WBUF_D = WBUF_DEPTH
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // control stream
  input  logic                      cmd_valid_i,
  input  cmd_t                      cmd_i,
  output logic                      cmd_ready_o,
  output logic                      busy_o,
  output logic                      done_o,       // pulse: command finished
  // weight stream
  input  logic                      w_valid_i,
  input  logic [15:0]               w_data_i,
  output logic                      w_ready_o,
  // I/O interface
  output logic                      io_start_o,
  output logic                      io_read_o,
  output io_cfg_t                   io_cfg_o,
  input  logic                      io_done_i,
  // FMM (all tiles, aligned)
  output logic                      fmm_re_o,
  output logic                      fmm_we_o,
  output logic [FMM_AW-1:0]         fmm_addr_o,
  // weight buffer
  output logic                      wb_we_o,
  output logic [$clog2(WBUF_D)-1:0] wb_waddr_o,
  output logic [C-1:0]              wb_wdata_o,
  output logic                      wb_re_o,
  output logic [$clog2(WBUF_D)-1:0] wb_raddr_o,
  // border / corner memory reads
  output logic                      bm_re_o,
  output logic [BM_AW-1:0]          bm_line_h_o,
  output logic [BM_AW-1:0]          bm_line_v_o,
  output logic                      cm_re_o,
  output logic [1:0]                cm_corner_o,
  output logic [BM_AW-1:0]          cm_idx_o,
  input  logic                      bwr_busy_i,   // border/corner memory written this cycle
  // TPUs and DDUs (stage 1)
  output tpu_op_e                   tpu_op_o,
  output logic [C-1:0]              tpu_en_o,
  output logic                      relu_o,
  output logic [$clog2(C)-1:0]      mul_sel_o,
  output fp16_t [C-1:0]             bias_o,
  output fp16_t                     scale_o,
  output logic signed [1:0]         sy_o,
  output logic signed [1:0]         sx_o,
  output logic [$clog2(C)-1:0]      out_sel_o,   // stage 2
  // border interface
  output logic                      bi_layer_start_o,
  output logic                      bi_par_out_o,
  output logic [3:0]                bi_edge_o,    // N, S, W, E
  output logic [3:0]                bi_corner_o,  // NW, NE, SW, SE
  input  logic                      bi_room_i,
  input  logic                      bi_sync_i
);
  localparam int unsigned CW  = $clog2(C);
  localparam int unsigned WAW = $clog2(WBUF_D);

  typedef enum logic [3:0] {
    S_IDLE, S_IO, S_PARAM, S_CONV, S_SCALE, S_BYP, S_WAITQ, S_BIASW, S_DRAIN, S_SYNC
  } state_e;

  state_e            state_q;
  layer_cfg_t        cfg_q;
  logic [CH_W-1:0]   cblk_q, cin_q;
  logic [3:0]        tap_q;
  logic [DIM_W-1:0]  yo_q, xo_q;
  logic [CW-1:0]     c_q;
  logic [CW+1:0]     k_q;
  logic [1:0]        drain_q;
  fp16_t [C-1:0]     scale_q, bias_q;

  // derived layer geometry
  logic [DIM_W-1:0]  ht_out, wt_out;
  logic [3:0]        taps;
  logic [15:0]       hw_in, hw_out;
  logic [CW+1:0]     n_param;
  always_comb begin
    ht_out  = cfg_q.stride2 ? (cfg_q.ht_in >> 1) : cfg_q.ht_in;
    wt_out  = cfg_q.stride2 ? (cfg_q.wt_in >> 1) : cfg_q.wt_in;
    taps    = cfg_q.k3 ? 4'd9 : 4'd1;
    hw_in   = 16'(cfg_q.ht_in) * 16'(cfg_q.wt_in);
    hw_out  = 16'(ht_out) * 16'(wt_out);
    n_param = (cfg_q.bnorm_en ? (CW+2)'(C) : '0) + (cfg_q.bias_en ? (CW+2)'(C) : '0);
  end

  // tap geometry for the current convolution step
  logic signed [DIM_W+2:0] yi, xi;
  logic signed [1:0]       sy, sx;
  logic [DIM_W-1:0]        yw, xw;
  logic                    first_pix, last_conv, last_pix, last_blk, edge_pix;
  logic                    need_ext;
  always_comb begin
    automatic logic signed [2:0] dy = cfg_q.k3 ? 3'(int'(tap_q) / 3 - 1) : 3'sd0;
    automatic logic signed [2:0] dx = cfg_q.k3 ? 3'(int'(tap_q) % 3 - 1) : 3'sd0;
    yi = (cfg_q.stride2 ? (DIM_W+3)'({yo_q, 1'b0}) : (DIM_W+3)'(yo_q)) + (DIM_W+3)'(dy);
    xi = (cfg_q.stride2 ? (DIM_W+3)'({xo_q, 1'b0}) : (DIM_W+3)'(xo_q)) + (DIM_W+3)'(dx);
    sy = (yi < 0) ? -2'sd1 : (yi >= (DIM_W+3)'(cfg_q.ht_in)) ? 2'sd1 : 2'sd0;
    sx = (xi < 0) ? -2'sd1 : (xi >= (DIM_W+3)'(cfg_q.wt_in)) ? 2'sd1 : 2'sd0;
    yw = DIM_W'(yi - ((sy < 0) ? -(DIM_W+3)'(cfg_q.ht_in) : (sy > 0) ? (DIM_W+3)'(cfg_q.ht_in) : '0));
    xw = DIM_W'(xi - ((sx < 0) ? -(DIM_W+3)'(cfg_q.wt_in) : (sx > 0) ? (DIM_W+3)'(cfg_q.wt_in) : '0));
    first_pix = (yo_q == '0) && (xo_q == '0);
    last_conv = (cin_q == cfg_q.n_in - 1'b1) && (tap_q == taps - 1'b1);
    last_pix  = (yo_q == ht_out - 1'b1) && (xo_q == wt_out - 1'b1);
    last_blk  = ((cblk_q + 1'b1) * CH_W'(C)) >= cfg_q.n_out;
    edge_pix  = (yo_q == '0) || (xo_q == '0) || (yo_q == ht_out - 1'b1) || (xo_q == wt_out - 1'b1);
    need_ext  = (sy != 2'sd0) || (sx != 2'sd0);
  end

  // stage-0 issue decisions
  logic conv_go;
  always_comb begin
    conv_go   = (state_q == S_CONV) && (!first_pix || w_valid_i) && !(need_ext && bwr_busy_i);
    w_ready_o = ((state_q == S_PARAM) && (k_q != n_param)) || ((state_q == S_CONV) && first_pix && !(need_ext && bwr_busy_i));
  end

  // pipeline registers
  typedef struct packed {
    tpu_op_e           op;
    logic [C-1:0]      en;
    logic signed [1:0] sy, sx;
    logic [CW-1:0]     c;
  } p1_t;
  typedef struct packed {
    logic              we;
    logic [FMM_AW-1:0] addr;
    logic [CW-1:0]     c;
    logic [3:0]        edges;
    logic [3:0]        corners;
  } p2_t;
  p1_t p1_d, p1_q;
  p2_t p2_d, p2a_q, p2_q;   // p2a_q: stage 1, p2_q: stage 2

  logic [FMM_AW-1:0] in_addr, byp_addr, out_addr;
  always_comb begin
    automatic logic [31:0] pix_off = 32'(yo_q) * 32'(wt_out) + 32'(xo_q);
    automatic logic [31:0] och     = 32'(cblk_q) * 32'(C) + 32'(c_q);
    in_addr  = FMM_AW'(32'(cfg_q.in_base) + 32'(cin_q) * 32'(hw_in) + 32'(yw) * 32'(cfg_q.wt_in) + 32'(xw));
    byp_addr = FMM_AW'(32'(cfg_q.byp_base) + och * 32'(hw_out) + pix_off);
    out_addr = FMM_AW'(32'(cfg_q.out_base) + och * 32'(hw_out) + pix_off);
  end

  always_comb begin
    p1_d = '{op: TPU_NOP, en: '0, sy: 2'sd0, sx: 2'sd0, c: c_q};
    p2_d = '{we: 1'b0, addr: out_addr, c: c_q, edges: '0, corners: '0};
    fmm_re_o    = 1'b0;
    wb_we_o     = 1'b0;
    wb_re_o     = 1'b0;
    wb_waddr_o  = WAW'(32'(tap_q) * 32'(cfg_q.n_in) + 32'(cin_q));
    wb_raddr_o  = wb_waddr_o;
    wb_wdata_o  = w_data_i[C-1:0];
    bm_re_o     = 1'b0;
    cm_re_o     = 1'b0;
    bm_line_h_o = bm_line(C, cfg_q.bm_par_in, cin_q, xw, cfg_q.wt_in);
    bm_line_v_o = bm_line(C, cfg_q.bm_par_in, cin_q, yw, cfg_q.ht_in);
    cm_corner_o = {sy > 0, sx > 0};
    cm_idx_o    = {cfg_q.bm_par_in, cin_q[BM_AW-2:0]};
    fmm_addr_o  = in_addr;
    unique case (state_q)
      S_CONV: if (conv_go) begin
        fmm_re_o = 1'b1;
        wb_re_o  = 1'b1;
        wb_we_o  = first_pix;
        bm_re_o  = need_ext;
        cm_re_o  = (sy != 2'sd0) && (sx != 2'sd0);
        p1_d.op  = ((tap_q == '0) && (cin_q == '0)) ? TPU_CONV_FIRST : TPU_CONV;
        p1_d.en  = '1;
        p1_d.sy  = sy;
        p1_d.sx  = sx;
      end
      S_SCALE: begin
        p1_d.op = TPU_SCALE;
        p1_d.en = C'(1) << c_q;
      end
      S_BYP: begin
        fmm_re_o   = 1'b1;
        fmm_addr_o = byp_addr;
        p1_d.op    = TPU_ADD_X;
        p1_d.en    = C'(1) << c_q;
      end
      S_BIASW: begin
        p1_d.op = TPU_BIAS;
        p1_d.en = C'(1) << c_q;
        p2_d.we = 1'b1;
        p2_d.edges   = {yo_q == '0, yo_q == ht_out - 1'b1, xo_q == '0, xo_q == wt_out - 1'b1};
        p2_d.corners = {p2_d.edges[3] & p2_d.edges[1], p2_d.edges[3] & p2_d.edges[0],
                        p2_d.edges[2] & p2_d.edges[1], p2_d.edges[2] & p2_d.edges[0]};
      end
      default: ;
    endcase
    // stage-2 write-back owns the FMM port (the schedule leaves it free)
    fmm_we_o = p2_q.we;
    if (p2_q.we) begin
      fmm_addr_o = p2_q.addr;
      fmm_re_o   = 1'b0;
    end
  end

  // stage 1 / 2 outputs
  always_comb begin
    tpu_op_o  = p1_q.op;
    tpu_en_o  = p1_q.en;
    sy_o      = p1_q.sy;
    sx_o      = p1_q.sx;
    mul_sel_o = p1_q.c;
    scale_o   = scale_q[p1_q.c];
    relu_o    = cfg_q.relu_en;
    for (int c = 0; c < int'(C); c++) bias_o[c] = cfg_q.bias_en ? bias_q[c] : 16'h0000;
    out_sel_o   = p2_q.c;
    bi_edge_o   = p2_q.we ? p2_q.edges : 4'b0;
    bi_corner_o = p2_q.we ? p2_q.corners : 4'b0;
    bi_par_out_o = ~cfg_q.bm_par_in;
  end

  // command interface
  always_comb begin
    cmd_ready_o = (state_q == S_IDLE);
    busy_o      = (state_q != S_IDLE);
    io_cfg_o    = cmd_i.io;
    io_read_o   = (cmd_i.op == CMD_READ);
    io_start_o  = (state_q == S_IDLE) && cmd_valid_i && (cmd_i.op != CMD_LAYER);
    bi_layer_start_o = (state_q == S_IDLE) && cmd_valid_i && (cmd_i.op == CMD_LAYER);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cfg_q   <= '0;
      cblk_q  <= '0;
      cin_q   <= '0;
      tap_q   <= '0;
      yo_q    <= '0;
      xo_q    <= '0;
      c_q     <= '0;
      k_q     <= '0;
      drain_q <= '0;
      scale_q <= '0;
      bias_q  <= '0;
      p1_q    <= '0;
      p2a_q   <= '0;
      p2_q    <= '0;
      done_o  <= 1'b0;
    end else begin
      p1_q   <= p1_d;
      p2a_q  <= p2_d;
      p2_q   <= p2a_q;
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (cmd_valid_i) begin
          if (cmd_i.op == CMD_LAYER) begin
            cfg_q   <= cmd_i.layer;
            cblk_q  <= '0;
            k_q     <= '0;
            state_q <= S_PARAM;
          end else begin
            state_q <= S_IO;
          end
        end
        S_IO: if (io_done_i) begin
          state_q <= S_IDLE;
          done_o  <= 1'b1;
        end
        S_PARAM: begin
          if (k_q == n_param) begin
            k_q     <= '0;
            cin_q   <= '0;
            tap_q   <= '0;
            yo_q    <= '0;
            xo_q    <= '0;
            state_q <= S_CONV;
          end else if (w_valid_i) begin
            if (cfg_q.bnorm_en && k_q < (CW+2)'(C)) scale_q[k_q[CW-1:0]] <= w_data_i;
            else bias_q[k_q[CW-1:0]] <= w_data_i;
            k_q <= k_q + 1'b1;
          end
        end
        S_CONV: if (conv_go) begin
          if (cin_q == cfg_q.n_in - 1'b1) begin
            cin_q <= '0;
            tap_q <= tap_q + 1'b1;
          end else begin
            cin_q <= cin_q + 1'b1;
          end
          if (last_conv) begin
            c_q     <= '0;
            state_q <= cfg_q.bnorm_en ? S_SCALE : cfg_q.bypass_en ? S_BYP : S_WAITQ;
          end
        end
        S_SCALE: begin
          c_q <= c_q + 1'b1;
          if (c_q == CW'(C - 1)) state_q <= cfg_q.bypass_en ? S_BYP : S_WAITQ;
        end
        S_BYP: begin
          c_q <= c_q + 1'b1;
          if (c_q == CW'(C - 1)) state_q <= S_WAITQ;
        end
        S_WAITQ: if (!edge_pix || bi_room_i) state_q <= S_BIASW;
        S_BIASW: begin
          c_q <= c_q + 1'b1;
          if (c_q == CW'(C - 1)) begin
            drain_q <= 2'd1;
            state_q <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (drain_q != 2'd0) begin
            drain_q <= drain_q - 1'b1;
          end else begin
            cin_q <= '0;
            tap_q <= '0;
            if (!last_pix) begin
              if (xo_q == wt_out - 1'b1) begin
                xo_q <= '0;
                yo_q <= yo_q + 1'b1;
              end else begin
                xo_q <= xo_q + 1'b1;
              end
              state_q <= S_CONV;
            end else if (!last_blk) begin
              cblk_q  <= cblk_q + 1'b1;
              k_q     <= '0;
              state_q <= S_PARAM;
            end else begin
              state_q <= S_SYNC;
            end
          end
        end
        S_SYNC: if (bi_sync_i) begin
          state_q <= S_IDLE;
          done_o  <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // the weight buffer must hold all input channels of a block
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (state_q == S_CONV) |-> (32'(cfg_q.n_in) * 32'(taps) <= 32'(WBUF_D)))
    else $error("controller: layer exceeds the weight buffer");
  // write-back and reads never share the single-port FMM in one cycle
  assert property (@(posedge clk_i) disable iff (!rst_ni) p2_q.we |-> !(p1_d.op inside {TPU_CONV_FIRST, TPU_CONV, TPU_ADD_X}))
    else $error("controller: FMM port conflict");
`endif

endmodule
