// hd_pkg: constants and types shared by the Hyperdrive binary-weight CNN engine.
//
// The array has C x M x N Tile Processing Units (TPUs): M x N spatial tiles, each
// with C TPUs working on C output channels in parallel. Feature maps (FMs) are
// FP16 and stay on chip; binary weights are streamed in. The defaults below are
// the taped-out configuration (C=16, M=N=7, 7x8 SRAM macros of 1024 x 112 bit,
// weight buffer for 512 input channels of 3x3 kernels). The command, tag and
// layer-descriptor encodings are this design's own; the paper does not give them.
package hd_pkg;

  // ---- array and memory geometry (paper values) ----
  localparam int unsigned C_PAR     = 16;   // output-channel parallelism C
  localparam int unsigned M_TILES   = 7;    // spatial tiles, rows (M)
  localparam int unsigned N_TILES   = 7;    // spatial tiles, columns (N)
  localparam int unsigned FMM_MACROS = 8;   // SRAM macros per FMM block (M x 8 in total)
  localparam int unsigned SRAM_LINES = 1024;// lines per SRAM macro
  localparam int unsigned MAX_CIN   = 512;  // input channels the weight buffer holds
  localparam int unsigned WBUF_DEPTH = 5120;// 5 x 8 blocks of 128 rows of 16 bit
  localparam int unsigned CM_DEPTH  = 4096; // corner memory words

  // ---- widths ----
  localparam int unsigned FMM_AW = $clog2(FMM_MACROS * SRAM_LINES); // 13: word address in a tile bank
  localparam int unsigned BM_AW  = $clog2(SRAM_LINES);              // 10: border memory line
  localparam int unsigned CH_W   = 11;  // channel counters (up to 1024 channels)
  localparam int unsigned DIM_W  = 8;   // tile height / width

  typedef logic [15:0] fp16_t;

  // ---- TPU operations (one per cycle, issued by the controller) ----
  typedef enum logic [2:0] {
    TPU_NOP       = 3'd0,
    TPU_CONV_FIRST= 3'd1,  // acc <= 0 +/- x   (first contribution of a pixel)
    TPU_CONV      = 3'd2,  // acc <= acc +/- x (sign = binary weight, 1 -> +)
    TPU_ADD_X     = 3'd3,  // acc <= acc + x   (bypass / residual add)
    TPU_BIAS      = 3'd4,  // acc <= relu?(acc + bias)
    TPU_SCALE     = 3'd5   // acc <= acc * scale (shared multiplier)
  } tpu_op_e;

  // ---- chip position in a systolic mesh (Fig. 6d) ----
  typedef enum logic [3:0] {
    CHIP_SINGLE = 4'd0, CHIP_NW = 4'd1, CHIP_N = 4'd2, CHIP_NE = 4'd3,
    CHIP_W      = 4'd4, CHIP_C  = 4'd5, CHIP_E = 4'd6,
    CHIP_SW     = 4'd7, CHIP_S  = 4'd8, CHIP_SE = 4'd9
  } chip_type_e;

  typedef struct packed {
    logic n, s, w, e;   // a neighbour chip exists on that side
  } nbrs_t;

  function automatic nbrs_t chip_neighbours(chip_type_e t);
    nbrs_t r;
    r.n = (t == CHIP_W)  || (t == CHIP_C) || (t == CHIP_E) ||
          (t == CHIP_SW) || (t == CHIP_S) || (t == CHIP_SE);
    r.s = (t == CHIP_NW) || (t == CHIP_N) || (t == CHIP_NE) ||
          (t == CHIP_W)  || (t == CHIP_C) || (t == CHIP_E);
    r.w = (t == CHIP_N)  || (t == CHIP_NE) || (t == CHIP_C) ||
          (t == CHIP_E)  || (t == CHIP_S)  || (t == CHIP_SE);
    r.e = (t == CHIP_NW) || (t == CHIP_N) || (t == CHIP_W) ||
          (t == CHIP_C)  || (t == CHIP_SW) || (t == CHIP_S);
    return r;
  endfunction

  // ---- border / corner memory regions ----
  // 0..3: border regions top, bottom, left, right (pixels of the N, S, W, E neighbour)
  // 4..7: corner regions NW, NE, SW, SE (pixels of the diagonal neighbours)
  typedef enum logic [2:0] {
    REG_TOP = 3'd0, REG_BOT = 3'd1, REG_LEFT = 3'd2, REG_RIGHT = 3'd3,
    REG_NW  = 3'd4, REG_NE  = 3'd5, REG_SW   = 3'd6, REG_SE    = 3'd7
  } region_e;

  // one write into the border or corner memory
  typedef struct packed {
    logic           valid;
    region_e        region;
    logic [BM_AW-1:0] line;   // border: line; corner: word index in region
    logic [2:0]     word;     // border: word within the line (tile index along the edge)
    fp16_t          data;
  } bwr_t;

  // ---- inter-chip link packet tag (first nibble of each 5-nibble packet) ----
  // A chip has one outgoing link seen by all four neighbours; the tag says who
  // the pixel is for. Border pixels name the receiving neighbour; a corner pixel
  // goes out as a border pixel with a "forward" request to the vertical neighbour,
  // which re-sends it sideways as a corner pixel.
  typedef enum logic [3:0] {
    TAG_TO_N     = 4'd0,  TAG_TO_S     = 4'd1,  TAG_TO_W = 4'd2, TAG_TO_E = 4'd3,
    TAG_TO_N_FW  = 4'd4,  TAG_TO_N_FE  = 4'd5,  // to N, N forwards it west / east
    TAG_TO_S_FW  = 4'd6,  TAG_TO_S_FE  = 4'd7,  // to S, S forwards it west / east
    TAG_CW_FROM_S= 4'd8,  TAG_CW_FROM_N= 4'd9,  // corner pixel to W, originally from S / N of sender
    TAG_CE_FROM_S= 4'd10, TAG_CE_FROM_N= 4'd11  // corner pixel to E, originally from S / N of sender
  } link_tag_e;

  // ---- layer descriptor (control stream) ----
  typedef struct packed {
    logic              k3;        // 1: 3x3 kernel, 0: 1x1
    logic              stride2;   // 2x2 striding
    logic [CH_W-1:0]   n_in;      // input channels (<= MAX_CIN)
    logic [CH_W-1:0]   n_out;     // output channels (multiple of C)
    logic [DIM_W-1:0]  ht_in;     // input tile height (pixels per TPU tile)
    logic [DIM_W-1:0]  wt_in;     // input tile width
    logic [FMM_AW-1:0] in_base;   // FMM word address of the input FM
    logic [FMM_AW-1:0] out_base;  // FMM word address of the output FM
    logic [FMM_AW-1:0] byp_base;  // FMM word address of the bypass FM
    logic              bnorm_en;  // multiply by per-channel scale
    logic              bypass_en; // add bypass FM
    logic              bias_en;   // add per-channel bias
    logic              relu_en;   // ReLU on the result
    logic              bm_par_in; // border/corner memory half holding the input FM borders
  } layer_cfg_t;

  typedef enum logic [1:0] {
    CMD_LAYER = 2'd0,  // run one convolution layer
    CMD_LOAD  = 2'd1,  // load a FM (or border/corner data) from the data stream
    CMD_READ  = 2'd2   // stream a FM out
  } cmd_op_e;

  typedef struct packed {
    logic              to_border; // LOAD only: 1 = write border/corner memory region
    region_e           region;    // region for border loads
    logic              bm_par;    // half of the border/corner memory
    logic [CH_W-1:0]   n_ch;      // channels
    logic [DIM_W-1:0]  ht;        // tile height
    logic [DIM_W-1:0]  wt;        // tile width
    logic [FMM_AW-1:0] base;      // FMM base address
    logic [15:0]       count;     // border loads: number of words
  } io_cfg_t;

  typedef struct packed {
    cmd_op_e    op;
    layer_cfg_t layer;
    io_cfg_t    io;
  } cmd_t;

  // border-memory line that holds channel ch, position pos along the edge,
  // for tiles whose edge is len pixels long (same order in which the
  // neighbour writes its output pixels back: channel block, position, channel;
  // c = channels per block, the number of TPUs per tile)
  function automatic logic [BM_AW-1:0] bm_line(input int unsigned c,
                                               input logic par,
                                               input logic [CH_W-1:0] ch,
                                               input logic [DIM_W-1:0] pos,
                                               input logic [DIM_W-1:0] len);
    logic [31:0] l;
    l = ((32'(ch) / c) * 32'(len) + 32'(pos)) * c + (32'(ch) % c);
    return {par, l[BM_AW-2:0]};
  endfunction

endpackage
