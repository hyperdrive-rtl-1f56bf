// hyperdrive_top: one Hyperdrive chip -- a binary-weight CNN engine that keeps
// the feature maps on chip and streams only the binary weights.
//
// Blocks (the paper's system overview): C x M x N Tile Processing Units grouped
// per spatial tile (tpu_group, each with its shared FP16 multiplier); the
// Feature Map Memory, one fmm_block of 8 SRAM macros per row of tiles; one Data
// Distribution Unit per tile; the weight buffer; the controller; the I/O
// interface; and, for systolic multi-chip operation, the border memory, the
// corner memory and the border interface with one outgoing and four incoming
// 4 bit + valid links.
//
// Interface: a command port (cmd_t: run a layer, load or read a feature map);
// a 16-bit weight stream (C binary weights per word, preceded per output-channel
// block by the FP16 scale and bias words); 16-bit data-in and data-out streams,
// all valid/ready; chip_type_i telling where the chip sits in the mesh
// (CHIP_SINGLE for a stand-alone chip: no neighbours, zero padding on all
// sides); the link pins. done_o pulses when a command has finished.
// Timing: see controller -- one input-channel/tap step per cycle for all
// C x M x N outputs, then C cycles each for scale, bypass and bias/write-back.
// In a mesh, each layer command must reach all chips in the same cycle, once
// all have pulsed done_o (the border address counters restart with the layer).
// The block set and their connections follow the paper's chip overview; the
// port formats, the chip-type input and the stand-alone type are this design's.
// Lint notes: the DDUs' pad/ext flags and the TPUs' per-channel accumulator
// outputs are left unconnected here on purpose (observation points only).
module hyperdrive_top
  import hd_pkg::*;
#(
  parameter int unsigned M = M_TILES,
  parameter int unsigned N = N_TILES,
  parameter int unsigned C = C_PAR
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  chip_type_e      chip_type_i,
  // control stream
  input  logic            cmd_valid_i,
  input  cmd_t            cmd_i,
  output logic            cmd_ready_o,
  output logic            busy_o,
  output logic            done_o,
  // weight stream
  input  logic            w_valid_i,
  input  logic [15:0]     w_data_i,
  output logic            w_ready_o,
  // feature-map data streams
  input  logic            din_valid_i,
  input  fp16_t           din_i,
  output logic            din_ready_o,
  output logic            dout_valid_o,
  output fp16_t           dout_o,
  input  logic            dout_ready_i,
  // inter-chip links
  output logic [4:0]      link_tx_o,
  input  logic [3:0][4:0] link_rx_i     // from N, S, W, E
);
  localparam int unsigned CW = $clog2(C);

  nbrs_t nbrs;
  assign nbrs = chip_neighbours(chip_type_i);

  // ---------------------------------------------------------------- controller
  logic                      io_start, io_read, io_done;
  io_cfg_t                   io_cfg;
  logic                      c_fmm_re, c_fmm_we;
  logic [FMM_AW-1:0]         c_fmm_addr;
  logic                      wb_we, wb_re;
  logic [$clog2(WBUF_DEPTH)-1:0] wb_waddr, wb_raddr;
  logic [C-1:0]              wb_wdata, wb_rdata;
  logic                      bm_re, cm_re;
  logic [BM_AW-1:0]          bm_line_h, bm_line_v, cm_idx;
  logic [1:0]                cm_corner;
  tpu_op_e                   tpu_op;
  logic [C-1:0]              tpu_en;
  logic                      relu;
  logic [CW-1:0]             mul_sel, out_sel;
  fp16_t [C-1:0]             bias;
  fp16_t                     scale;
  logic signed [1:0]         sy, sx;
  logic                      bi_start, bi_par, bi_room, bi_sync;
  logic [3:0]                bi_edge, bi_corner;
  bwr_t                      bi_wr, io_bwr, bwr;

  controller #(.C(C), .WBUF_D(WBUF_DEPTH)) u_ctrl (
    .clk_i, .rst_ni,
    .cmd_valid_i, .cmd_i, .cmd_ready_o, .busy_o, .done_o,
    .w_valid_i, .w_data_i, .w_ready_o,
    .io_start_o(io_start), .io_read_o(io_read), .io_cfg_o(io_cfg), .io_done_i(io_done),
    .fmm_re_o(c_fmm_re), .fmm_we_o(c_fmm_we), .fmm_addr_o(c_fmm_addr),
    .wb_we_o(wb_we), .wb_waddr_o(wb_waddr), .wb_wdata_o(wb_wdata),
    .wb_re_o(wb_re), .wb_raddr_o(wb_raddr),
    .bm_re_o(bm_re), .bm_line_h_o(bm_line_h), .bm_line_v_o(bm_line_v),
    .cm_re_o(cm_re), .cm_corner_o(cm_corner), .cm_idx_o(cm_idx),
    .bwr_busy_i(bi_wr.valid),
    .tpu_op_o(tpu_op), .tpu_en_o(tpu_en), .relu_o(relu), .mul_sel_o(mul_sel),
    .bias_o(bias), .scale_o(scale), .sy_o(sy), .sx_o(sx), .out_sel_o(out_sel),
    .bi_layer_start_o(bi_start), .bi_par_out_o(bi_par),
    .bi_edge_o(bi_edge), .bi_corner_o(bi_corner),
    .bi_room_i(bi_room), .bi_sync_i(bi_sync)
  );

  // -------------------------------------------------------------- I/O interface
  logic                  io_fmm_re, io_fmm_we;
  logic [FMM_AW-1:0]     io_fmm_addr;
  logic [M-1:0][N-1:0]   io_sel;
  fp16_t                 io_wdata;
  fp16_t [M-1:0][N-1:0]  fmm_rdata;

  io_interface #(.M(M), .N(N)) u_io (
    .clk_i, .rst_ni,
    .start_i(io_start), .read_i(io_read), .cfg_i(io_cfg), .done_o(io_done),
    .din_valid_i, .din_i, .din_ready_o,
    .dout_valid_o, .dout_o, .dout_ready_i,
    .fmm_re_o(io_fmm_re), .fmm_we_o(io_fmm_we), .fmm_addr_o(io_fmm_addr),
    .fmm_sel_o(io_sel), .fmm_wdata_o(io_wdata), .fmm_rdata_i(fmm_rdata),
    .bwr_o(io_bwr)
  );

  // ---------------------------------------------------------- weight buffer
  weight_buffer #(.C(C), .DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk_i, .we_i(wb_we), .waddr_i(wb_waddr), .wdata_i(wb_wdata),
    .re_i(wb_re), .raddr_i(wb_raddr), .rdata_o(wb_rdata)
  );

  // -------------------------------------------------- feature map memory
  fp16_t [M-1:0][N-1:0] tile_out;
  logic                 io_act;
  assign io_act = io_fmm_re || io_fmm_we;

  for (genvar m = 0; m < M; m++) begin : g_fmm
    logic [N-1:0]  wmask;
    fp16_t [N-1:0] wdata;
    always_comb begin
      wmask = io_fmm_we ? io_sel[m] : {N{c_fmm_we}};
      wdata = io_fmm_we ? {N{io_wdata}} : tile_out[m];
    end
    fmm_block #(.N(N)) u_fmm (
      .clk_i,
      .re_i   (io_act ? io_fmm_re : c_fmm_re),
      .we_i   (io_act ? (io_fmm_we && (io_sel[m] != '0)) : c_fmm_we),
      .addr_i (io_act ? io_fmm_addr : c_fmm_addr),
      .wmask_i(wmask),
      .wdata_i(wdata),
      .rdata_o(fmm_rdata[m])
    );
  end

  // ---------------------------------------------- border and corner memory
  fp16_t [N-1:0] bm_top, bm_bot;
  fp16_t [M-1:0] bm_left, bm_right;
  fp16_t         cm_rdata;

  assign bwr = io_bwr.valid ? io_bwr : bi_wr;

  border_memory #(.M(M), .N(N)) u_bm (
    .clk_i, .wr_i(bwr), .re_i(bm_re), .line_h_i(bm_line_h), .line_v_i(bm_line_v),
    .top_o(bm_top), .bot_o(bm_bot), .left_o(bm_left), .right_o(bm_right)
  );

  corner_memory #(.DEPTH(CM_DEPTH)) u_cm (
    .clk_i, .wr_i(bwr), .re_i(cm_re), .corner_i(cm_corner), .idx_i(cm_idx),
    .rdata_o(cm_rdata)
  );

  // ------------------------------------------------------ tiles: DDU + TPUs
  for (genvar m = 0; m < M; m++) begin : g_row
    for (genvar n = 0; n < N; n++) begin : g_col
      fp16_t [2:0][2:0] nb;
      fp16_t [2:0]      t3, b3, l3, r3;
      fp16_t            x;
      logic             pad, ext;
      always_comb begin
        for (int dy = -1; dy <= 1; dy++) begin
          for (int dx = -1; dx <= 1; dx++) begin
            automatic int r = m + dy;
            automatic int c = n + dx;
            nb[dy+1][dx+1] = (r >= 0 && r < int'(M) && c >= 0 && c < int'(N)) ? fmm_rdata[r][c] : 16'h0000;
          end
        end
        for (int k = -1; k <= 1; k++) begin
          automatic int c = n + k;
          automatic int r = m + k;
          t3[k+1] = (c >= 0 && c < int'(N)) ? bm_top[c]   : 16'h0000;
          b3[k+1] = (c >= 0 && c < int'(N)) ? bm_bot[c]   : 16'h0000;
          l3[k+1] = (r >= 0 && r < int'(M)) ? bm_left[r]  : 16'h0000;
          r3[k+1] = (r >= 0 && r < int'(M)) ? bm_right[r] : 16'h0000;
        end
      end

      ddu #(.M(M), .N(N), .ROW(m), .COL(n)) u_ddu (
        .sy_i(sy), .sx_i(sx), .nbrs_i(nbrs), .fmm_i(nb),
        .top_i(t3), .bot_i(b3), .left_i(l3), .right_i(r3), .corner_i(cm_rdata),
        .x_o(x), .pad_o(pad), .ext_o(ext)
      );

      tpu_group #(.C(C)) u_tpus (
        .clk_i, .rst_ni,
        .op_i(tpu_op), .ch_en_i(tpu_en), .weight_i(wb_rdata), .x_i(x),
        .bias_i(bias), .scale_i(scale), .mul_sel_i(mul_sel), .relu_i(relu),
        .out_sel_i(out_sel), .out_o(tile_out[m][n]), .acc_o()
      );
    end
  end

  // ---------------------------------------------------------- border interface
  fp16_t [M-1:0] col_w, col_e;
  always_comb begin
    for (int m = 0; m < int'(M); m++) begin
      col_w[m] = tile_out[m][0];
      col_e[m] = tile_out[m][N-1];
    end
  end

  border_interface #(.M(M), .N(N), .QLINES(C)) u_bi (
    .clk_i, .rst_ni, .nbrs_i(nbrs),
    .layer_start_i(bi_start), .par_out_i(bi_par),
    .edge_i(bi_edge), .corner_i(bi_corner),
    .line_n_i(tile_out[0]), .line_s_i(tile_out[M-1]),
    .line_w_i(col_w), .line_e_i(col_e),
    .room_o(bi_room), .tx_o(link_tx_o), .rx_i(link_rx_i),
    .wr_o(bi_wr), .sync_o(bi_sync)
  );

endmodule
