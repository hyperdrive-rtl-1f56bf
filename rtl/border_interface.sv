// border_interface: Border Interface (BI/F) -- pixel exchange with the
// neighbouring chips of a systolic mesh.
//
// Sending. When the controller writes back an output pixel that lies on an edge
// of the chip, the line of M or N edge-tile values of that channel is queued for
// the side's neighbour (one queue per side, QLINES lines each; with the defaults
// a queue holds C x 7 = 112 pixels, one output position of C channels). A single
// outgoing link, seen by all four neighbours, sends the queued pixels one at a
// time, round-robin between the queues, as 5 nibbles with a valid bit: a tag
// nibble saying which neighbour the pixel is for, then the FP16 value, most
// significant nibble first. A corner pixel goes to the vertical neighbour with a
// "forward" tag; that chip stores it as a border pixel and re-sends it sideways
// as a corner pixel, so no diagonal links exist (as in the paper).
//
// Receiving. Four deserialisers (from N, S, W, E) rebuild the packets, keep the
// ones addressed to this chip and compute their border- or corner-memory address
// by counting per region: neighbours emit edge pixels in the order they compute
// them (channel block, position along the edge, channel), the same order
// hd_pkg::bm_line gives. One memory write per cycle leaves on wr_o; since each
// link delivers at most one pixel per 5 cycles this never falls behind.
//
// Waiting flags. Whenever this chip computes an edge pixel it adds the number of
// pixels it expects from the opposite neighbour to a per-region counter (the
// neighbour computes the mirror pixel at the same time); each received pixel
// subtracts one. sync_o is high when all counters are zero and nothing is left
// to send or forward: the layer's border exchange is complete.
// The tag encoding, queue-per-side arrangement and counting scheme are this
// design's own; the paper gives the 4 bit + valid links, the 112-entry buffers,
// the forwarding by the vertical neighbour and the flags.
module border_interface
  import hd_pkg::*;
#(
  parameter int unsigned M      = M_TILES,
  parameter int unsigned N      = N_TILES,
  parameter int unsigned QLINES = C_PAR,
  parameter int unsigned FWD_DEPTH = 8
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  nbrs_t             nbrs_i,
  input  logic              layer_start_i,   // clears address counters and flags
  input  logic              par_out_i,       // memory half for received pixels
  // edge pixels of the channel being written back
  input  logic [3:0]        edge_i,          // line on the N, S, W, E edge (bit 3..0 = N,S,W,E)
  input  logic [3:0]        corner_i,        // corner pixel NW, NE, SW, SE (bit 3..0)
  input  fp16_t [N-1:0]     line_n_i,        // tile row 0 values
  input  fp16_t [N-1:0]     line_s_i,        // tile row M-1 values
  input  fp16_t [M-1:0]     line_w_i,        // tile column 0 values
  input  fp16_t [M-1:0]     line_e_i,        // tile column N-1 values
  output logic              room_o,          // every queue can take QLINES lines
  // links
  output logic [4:0]        tx_o,            // {valid, nibble}
  input  logic [3:0][4:0]   rx_i,            // from N, S, W, E (index 3..0)
  // border / corner memory writes
  output bwr_t              wr_o,
  output logic              sync_o
);
  localparam int unsigned L   = (M > N) ? M : N;
  localparam int unsigned QAW = $clog2(QLINES) + 1;

  typedef struct packed {
    fp16_t [L-1:0] w;
    logic          f_lo;   // word 0 is a corner pixel to be forwarded
    logic          f_hi;   // last word is a corner pixel to be forwarded
  } qline_t;

  typedef struct packed {
    link_tag_e tag;
    fp16_t     data;
  } pkt_t;

  // ------------------------------------------------------------------ queues
  // side index: 0 = N, 1 = S, 2 = W, 3 = E
  qline_t q_mem [4][QLINES];
  logic [QAW-1:0] q_wp [4], q_rp [4];
  logic [QAW-1:0] q_cnt [4];
  logic [3:0] push, pop;
  qline_t     q_in [4];

  always_comb begin
    push[0] = edge_i[3] && nbrs_i.n;
    push[1] = edge_i[2] && nbrs_i.s;
    push[2] = edge_i[1] && nbrs_i.w;
    push[3] = edge_i[0] && nbrs_i.e;
    q_in[0] = '{w: (16*L)'(line_n_i), f_lo: corner_i[3] && nbrs_i.w, f_hi: corner_i[2] && nbrs_i.e};
    q_in[1] = '{w: (16*L)'(line_s_i), f_lo: corner_i[1] && nbrs_i.w, f_hi: corner_i[0] && nbrs_i.e};
    q_in[2] = '{w: (16*L)'(line_w_i), f_lo: 1'b0, f_hi: 1'b0};
    q_in[3] = '{w: (16*L)'(line_e_i), f_lo: 1'b0, f_hi: 1'b0};
    room_o = 1'b1;
    for (int s = 0; s < 4; s++) begin
      q_cnt[s] = q_wp[s] - q_rp[s];
      if (q_cnt[s] != '0) room_o = 1'b0;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < 4; s++) begin
        q_wp[s] <= '0;
        q_rp[s] <= '0;
      end
    end else begin
      for (int s = 0; s < 4; s++) begin
        if (push[s]) begin
          q_mem[s][q_wp[s][QAW-2:0]] <= q_in[s];
          q_wp[s] <= q_wp[s] + 1'b1;
        end
        if (pop[s]) q_rp[s] <= q_rp[s] + 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ forward FIFO
  localparam int unsigned FAW = $clog2(FWD_DEPTH) + 1;
  pkt_t           f_mem [FWD_DEPTH];
  logic [FAW-1:0] f_wp, f_rp;
  logic           f_push, f_pop;
  pkt_t           f_in;
  logic           f_empty;
  assign f_empty = (f_wp == f_rp);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      f_wp <= '0;
      f_rp <= '0;
    end else begin
      if (f_push) begin
        f_mem[f_wp[FAW-2:0]] <= f_in;
        f_wp <= f_wp + 1'b1;
      end
      if (f_pop) f_rp <= f_rp + 1'b1;
    end
  end

  // -------------------------------------------------------------- serialiser
  logic       busy_q;
  logic [2:0] src_q;       // 0..3 side queues, 4 forward FIFO
  logic [2:0] rr_q;
  logic [2:0] widx_q;      // word in the line
  logic [2:0] nib_q;       // nibble 0..4
  pkt_t       cur;
  logic [2:0] pick;
  logic       pick_ok;
  logic [2:0] wlast;

  always_comb begin
    // choose next source, round robin
    pick_ok = 1'b0;
    pick    = 3'd0;
    for (int k = 0; k < 5; k++) begin
      automatic int s = (int'(rr_q) + k) % 5;
      if (!pick_ok) begin
        if ((s < 4 && q_cnt[s] != '0) || (s == 4 && !f_empty)) begin
          pick_ok = 1'b1;
          pick    = 3'(s);
        end
      end
    end
    // the packet being sent
    cur = '{tag: TAG_TO_N, data: 16'h0};
    wlast = (src_q < 3'd2) ? 3'(N - 1) : 3'(M - 1);
    if (src_q == 3'd4) begin
      cur = f_mem[f_rp[FAW-2:0]];
    end else begin
      automatic qline_t ql = q_mem[src_q[1:0]][q_rp[src_q[1:0]][QAW-2:0]];
      cur.data = ql.w[widx_q];
      unique case (src_q[1:0])
        2'd0: cur.tag = (widx_q == 3'd0 && ql.f_lo) ? TAG_TO_N_FW :
                        (widx_q == wlast && ql.f_hi) ? TAG_TO_N_FE : TAG_TO_N;
        2'd1: cur.tag = (widx_q == 3'd0 && ql.f_lo) ? TAG_TO_S_FW :
                        (widx_q == wlast && ql.f_hi) ? TAG_TO_S_FE : TAG_TO_S;
        2'd2: cur.tag = TAG_TO_W;
        default: cur.tag = TAG_TO_E;
      endcase
    end
    unique case (nib_q)
      3'd0: tx_o = {busy_q, cur.tag};
      3'd1: tx_o = {busy_q, cur.data[15:12]};
      3'd2: tx_o = {busy_q, cur.data[11:8]};
      3'd3: tx_o = {busy_q, cur.data[7:4]};
      default: tx_o = {busy_q, cur.data[3:0]};
    endcase
    pop   = '0;
    f_pop = 1'b0;
    if (busy_q && nib_q == 3'd4) begin
      if (src_q == 3'd4) f_pop = 1'b1;
      else if (widx_q == wlast) pop[src_q[1:0]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      src_q  <= '0;
      rr_q   <= '0;
      widx_q <= '0;
      nib_q  <= '0;
    end else if (!busy_q) begin
      if (pick_ok) begin
        busy_q <= 1'b1;
        src_q  <= pick;
        rr_q   <= (pick == 3'd4) ? 3'd0 : pick + 3'd1;
        widx_q <= '0;
        nib_q  <= '0;
      end
    end else if (nib_q != 3'd4) begin
      nib_q <= nib_q + 3'd1;
    end else begin
      nib_q <= '0;
      if (src_q != 3'd4 && widx_q != wlast) widx_q <= widx_q + 3'd1;
      else busy_q <= 1'b0;
    end
  end

  // ----------------------------------------------------------- deserialisers
  // input index: 0 = from N, 1 = from S, 2 = from W, 3 = from E (rx_i[3-d])
  logic [2:0]  rn_q  [4];
  logic [19:0] rsh_q [4];
  logic [3:0]  hv_q;            // holding register full
  region_e     hreg_q [4];
  fp16_t       hdat_q [4];
  logic [3:0]  pkt_done;
  pkt_t        rpkt [4];
  logic [3:0]  acc_pkt;
  region_e     acc_reg [4];
  logic [3:0]  want_fwd;
  link_tag_e   fwd_tag [4];

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      automatic logic [4:0] in = rx_i[3-d];
      pkt_done[d] = in[4] && (rn_q[d] == 3'd4);
      rpkt[d]     = pkt_t'({rsh_q[d][15:0], in[3:0]});
      acc_pkt[d]  = 1'b0;
      acc_reg[d]  = REG_TOP;
      want_fwd[d] = 1'b0;
      fwd_tag[d]  = TAG_TO_N;
      unique case (d)
        0: begin // from N
          if (rpkt[d].tag inside {TAG_TO_S, TAG_TO_S_FW, TAG_TO_S_FE}) begin
            acc_pkt[d] = 1'b1; acc_reg[d] = REG_TOP;
          end
          if (rpkt[d].tag == TAG_TO_S_FW && nbrs_i.w) begin want_fwd[d] = 1'b1; fwd_tag[d] = TAG_CW_FROM_N; end
          if (rpkt[d].tag == TAG_TO_S_FE && nbrs_i.e) begin want_fwd[d] = 1'b1; fwd_tag[d] = TAG_CE_FROM_N; end
        end
        1: begin // from S
          if (rpkt[d].tag inside {TAG_TO_N, TAG_TO_N_FW, TAG_TO_N_FE}) begin
            acc_pkt[d] = 1'b1; acc_reg[d] = REG_BOT;
          end
          if (rpkt[d].tag == TAG_TO_N_FW && nbrs_i.w) begin want_fwd[d] = 1'b1; fwd_tag[d] = TAG_CW_FROM_S; end
          if (rpkt[d].tag == TAG_TO_N_FE && nbrs_i.e) begin want_fwd[d] = 1'b1; fwd_tag[d] = TAG_CE_FROM_S; end
        end
        2: begin // from W
          if (rpkt[d].tag == TAG_TO_E)      begin acc_pkt[d] = 1'b1; acc_reg[d] = REG_LEFT; end
          if (rpkt[d].tag == TAG_CE_FROM_S) begin acc_pkt[d] = 1'b1; acc_reg[d] = REG_SW;   end
          if (rpkt[d].tag == TAG_CE_FROM_N) begin acc_pkt[d] = 1'b1; acc_reg[d] = REG_NW;   end
        end
        default: begin // from E
          if (rpkt[d].tag == TAG_TO_W)      begin acc_pkt[d] = 1'b1; acc_reg[d] = REG_RIGHT; end
          if (rpkt[d].tag == TAG_CW_FROM_S) begin acc_pkt[d] = 1'b1; acc_reg[d] = REG_SE;    end
          if (rpkt[d].tag == TAG_CW_FROM_N) begin acc_pkt[d] = 1'b1; acc_reg[d] = REG_NE;    end
        end
      endcase
    end
    // at most one forward per cycle: forwarding only happens for packets from N or S
    f_push = 1'b0;
    f_in   = '{tag: TAG_TO_N, data: 16'h0};
    for (int d = 1; d >= 0; d--) begin
      if (pkt_done[d] && want_fwd[d]) begin
        f_push = 1'b1;
        f_in   = '{tag: fwd_tag[d], data: rpkt[d].data};
      end
    end
  end

  // write arbiter: one stored pixel per cycle, lowest input first
  logic [3:0] grant;
  always_comb begin
    grant = '0;
    for (int d = 3; d >= 0; d--) if (hv_q[d]) grant = 4'(1) << d;
  end

  // per-region address counters and waiting flags
  logic [BM_AW-2:0] rl_q [8];
  logic [2:0]       rw_q [8];
  logic signed [15:0] exp_q [8];
  region_e wreg;

  always_comb begin
    wr_o = '{valid: 1'b0, region: REG_TOP, line: '0, word: '0, data: 16'h0};
    wreg = REG_TOP;
    for (int d = 0; d < 4; d++) begin
      if (grant[d]) begin
        wreg = hreg_q[d];
        wr_o.valid  = 1'b1;
        wr_o.region = hreg_q[d];
        wr_o.data   = hdat_q[d];
      end
    end
    wr_o.line = {par_out_i, rl_q[wreg]};
    wr_o.word = rw_q[wreg];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int d = 0; d < 4; d++) begin
        rn_q[d]  <= '0;
        rsh_q[d] <= '0;
        hreg_q[d] <= REG_TOP;
        hdat_q[d] <= '0;
      end
      hv_q <= '0;
      for (int r = 0; r < 8; r++) begin
        rl_q[r]  <= '0;
        rw_q[r]  <= '0;
        exp_q[r] <= '0;
      end
    end else begin
      for (int d = 0; d < 4; d++) begin
        automatic logic [4:0] in = rx_i[3-d];
        if (in[4]) begin
          rsh_q[d] <= {rsh_q[d][15:0], in[3:0]};
          rn_q[d]  <= (rn_q[d] == 3'd4) ? 3'd0 : rn_q[d] + 3'd1;
        end
        if (grant[d]) hv_q[d] <= 1'b0;
        if (pkt_done[d] && acc_pkt[d]) begin
          hv_q[d]   <= 1'b1;
          hreg_q[d] <= acc_reg[d];
          hdat_q[d] <= rpkt[d].data;
        end
      end
      // address counters
      if (wr_o.valid) begin
        if (wreg[2]) begin
          rl_q[wreg] <= rl_q[wreg] + 1'b1;
        end else begin
          automatic logic [2:0] last = (wreg == REG_TOP || wreg == REG_BOT) ? 3'(N - 1) : 3'(M - 1);
          if (rw_q[wreg] == last) begin
            rw_q[wreg] <= '0;
            rl_q[wreg] <= rl_q[wreg] + 1'b1;
          end else begin
            rw_q[wreg] <= rw_q[wreg] + 1'b1;
          end
        end
      end
      // waiting flags
      for (int r = 0; r < 8; r++) begin
        automatic logic signed [15:0] inc = '0;
        unique case (r)
          0: inc = (edge_i[2] && nbrs_i.n) ? 16'(N) : 16'sd0;  // top <- N chip's S edge
          1: inc = (edge_i[3] && nbrs_i.s) ? 16'(N) : 16'sd0;  // bottom <- S chip's N edge
          2: inc = (edge_i[0] && nbrs_i.w) ? 16'(M) : 16'sd0;  // left <- W chip's E edge
          3: inc = (edge_i[1] && nbrs_i.e) ? 16'(M) : 16'sd0;  // right <- E chip's W edge
          4: inc = (corner_i[0] && nbrs_i.n && nbrs_i.w) ? 16'sd1 : 16'sd0; // NW <- SE corner
          5: inc = (corner_i[1] && nbrs_i.n && nbrs_i.e) ? 16'sd1 : 16'sd0; // NE <- SW corner
          6: inc = (corner_i[2] && nbrs_i.s && nbrs_i.w) ? 16'sd1 : 16'sd0; // SW <- NE corner
          default: inc = (corner_i[3] && nbrs_i.s && nbrs_i.e) ? 16'sd1 : 16'sd0; // SE <- NW corner
        endcase
        exp_q[r] <= exp_q[r] + inc - ((wr_o.valid && wreg == region_e'(r)) ? 16'sd1 : 16'sd0);
      end
      if (layer_start_i) begin
        for (int r = 0; r < 8; r++) begin
          rl_q[r]  <= '0;
          rw_q[r]  <= '0;
          exp_q[r] <= '0;
        end
      end
    end
  end

  always_comb begin
    sync_o = !busy_q && f_empty && (hv_q == '0) && room_o;
    for (int r = 0; r < 8; r++) if (exp_q[r] != 16'sd0) sync_o = 1'b0;
  end

`ifndef SYNTHESIS
  // a full forward FIFO would lose a corner pixel
  assert property (@(posedge clk_i) disable iff (!rst_ni) f_push |-> (f_wp - f_rp) != FAW'(FWD_DEPTH))
    else $error("border_interface: forward FIFO overflow");
  // a holding register must be free when the next pixel arrives
  for (genvar d = 0; d < 4; d++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) (pkt_done[d] && acc_pkt[d]) |-> !hv_q[d] || grant[d])
      else $error("border_interface: receive overrun");
  end
`endif

endmodule
