// cutie_top: completely unrolled ternary inference core.
//
// The core runs a ternary CNN layer by layer. Each layer is a convolution with
// ternary weights and activations, optionally fused with max or average
// pooling, followed by a two-threshold ternarization. The convolution is
// unrolled over the whole K x K x N_I window and over all N_O output channels:
// every cycle one window leaves the tile buffer and all OCUs compute their
// output channel of that pixel in a single combinational step.
//
// Blocks and data flow:
//   fmap_memory  two feature map buffers (input / output of the running layer,
//                swapped per layer), K*P banks each, 5 trits per byte;
//   tile_buffer  reads K pixels per cycle, decompresses them, keeps K lines
//                and releases K x K x N_I windows with zero padding;
//   ocu_stage    P pipeline stages of N_O/P OCUs; the window is broadcast
//                through the stages, a stage not needed by the layer's
//                output channels keeps its input register still;
//   alignment    stage s results are delayed by P-1-s cycles so that all N_O
//                trits of a pixel arrive together, are compressed and written
//                back as one pixel;
//   weight_memory one bank per OCU; kernels are copied into the OCUs' double
//                weight buffers while the previous layer computes;
//   replay_fifo  the layer instruction queue (L entries), replayed per
//                inference; each OCU has a threshold queue of the same depth;
//   cutie_ctrl   runs the queued layers and raises eoi_o at the end.
//
// Host side (SoC interface), all synchronous to clk_i:
//   layer_we_i/layer_cfg_i   push one layer instruction; queue_clear_i empties
//                            the layer and threshold queues;
//   thr_we_i/thr_ocu_i/thr_i push one {high, low} threshold pair into the
//                            queue of OCU thr_ocu_i;
//   wm_we_i/...              write one word (N_I/W_S trits, compressed) of
//                            the weight memory of OCU wm_ocu_i; layer l's
//                            kernel occupies words l*K*K*W_S .. +K*K*W_S-1 in
//                            the order ((ky*K)+kx)*N_I + ci;
//   fm_we_i/...              write one word of one pixel of a feature map
//                            buffer; accepted when fm_ready_o is high;
//   fm_re_i/...              read one compressed pixel (data next cycle) while
//                            the core is idle;
//   start_i, busy_o, eoi_o, out_buf_o.
// The input feature map goes into buffer 0; channels a layer does not use
// must have zero weights. Parameters are the paper's main configuration
// (K=3, N_I=N_O=128, P=2, 32x32 pixels, L=8, W_S=2); the design requires
// N_I == N_O and W_S == P, as in that configuration.
//
// Lint notes: layer_last (queue at its last entry), tile_busy, win_last,
// preload_overlap, the per-stage out_valid and the valid bit leaving the
// last stage are status outputs of sub-blocks that this top does not need
// (the controller counts layers itself, the write-back is timed by the
// delayed window metadata); they are left unused on purpose.
module cutie_top
  import cutie_pkg::*;
#(
  parameter int unsigned K  = 3,
  parameter int unsigned NI = 128,
  parameter int unsigned NO = 128,
  parameter int unsigned P  = 2,
  parameter int unsigned IW = 32,
  parameter int unsigned IH = 32,
  parameter int unsigned L  = 8,
  parameter int unsigned WS = 2,
  localparam int unsigned TW        = NO / P,
  localparam int unsigned NOCU      = NO / P,
  localparam int unsigned WORD_BITS = 8 * groups5(TW),
  localparam int unsigned PIX_BITS  = P * WORD_BITS,
  localparam int unsigned N         = K * K * NI,
  localparam int unsigned NW        = N / TW,
  localparam int unsigned DEPTH     = (IW * IH + K - 1) / K,
  localparam int unsigned AW        = $clog2(DEPTH * K),
  localparam int unsigned WDEPTH    = L * NW,
  localparam int unsigned WAW       = $clog2(WDEPTH),
  localparam int unsigned OW_BITS   = (NO > 1) ? $clog2(NO) : 1,
  localparam int unsigned PW        = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned LW        = $clog2(L + 1),
  localparam int unsigned NWW       = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // layer instruction queue
  input  logic                 layer_we_i,
  input  layer_cfg_t           layer_cfg_i,
  output logic                 layer_full_o,
  input  logic                 queue_clear_i,
  // thresholds
  input  logic                 thr_we_i,
  input  logic [OW_BITS-1:0]   thr_ocu_i,
  input  logic [THR_W-1:0]     thr_i,
  // weight memories
  input  logic                 wm_we_i,
  input  logic [OW_BITS-1:0]   wm_ocu_i,
  input  logic [WAW-1:0]       wm_addr_i,
  input  logic [WORD_BITS-1:0] wm_data_i,
  // feature map memory, host write
  input  logic                 fm_we_i,
  input  logic                 fm_buf_i,
  input  logic [AW-1:0]        fm_addr_i,
  input  logic [PW-1:0]        fm_word_i,
  input  logic [WORD_BITS-1:0] fm_data_i,
  output logic                 fm_ready_o,
  // feature map memory, host read
  input  logic                 fm_re_i,
  input  logic                 fm_rbuf_i,
  input  logic [AW-1:0]        fm_raddr_i,
  output logic [PIX_BITS-1:0]  fm_rdata_o,
  // control
  input  logic                 start_i,
  output logic                 busy_o,
  output logic                 eoi_o,
  output logic                 out_buf_o
);
  localparam int unsigned DLY = P + 1;  // tile buffer window -> aligned results

  // ---------------- layer instruction queue ----------------
  layer_cfg_t    cur_cfg;
  logic [LW-1:0] n_layers;
  logic          q_rewind, q_advance, layer_last;

  replay_fifo #(.WIDTH($bits(layer_cfg_t)), .DEPTH(L)) u_layer_fifo (
    .clk_i, .rst_ni, .clear_i(queue_clear_i), .push_i(layer_we_i), .data_i(layer_cfg_i),
    .rewind_i(q_rewind), .advance_i(q_advance), .head_o(cur_cfg), .count_o(n_layers),
    .full_o(layer_full_o), .last_o(layer_last)
  );

  // ---------------- controller ----------------
  logic           tile_start, tile_done, tile_busy;
  logic           wm_rd_en, wb_we, wb_sel, wb_rd_sel, fm_in_buf, preload_overlap;
  logic [WAW-1:0] wm_rd_addr;
  logic [NWW-1:0] wb_word;

  cutie_ctrl #(.L(L), .NW(NW), .DRAIN(P + 2)) u_ctrl (
    .clk_i, .rst_ni, .start_i, .n_layers_i(n_layers),
    .q_rewind_o(q_rewind), .q_advance_o(q_advance),
    .tile_start_o(tile_start), .tile_done_i(tile_done),
    .wm_rd_en_o(wm_rd_en), .wm_rd_addr_o(wm_rd_addr),
    .wb_we_o(wb_we), .wb_sel_o(wb_sel), .wb_word_o(wb_word), .wb_rd_sel_o(wb_rd_sel),
    .fm_in_buf_o(fm_in_buf), .busy_o, .eoi_o, .out_buf_o,
    .preload_overlap_o(preload_overlap)
  );

  // ---------------- feature map memory ----------------
  logic                  t_rd_en, rd_en, rd_buf;
  logic [AW-1:0]         t_rd_addr, rd_addr;
  logic [K*PIX_BITS-1:0] rd_data;
  logic                  cwr_en;
  logic [AW-1:0]         cwr_addr;
  logic [PIX_BITS-1:0]   cwr_data;
  logic [P-1:0]          active;

  // the host reads only while the core is idle
  assign rd_en   = busy_o ? t_rd_en   : fm_re_i;
  assign rd_buf  = busy_o ? fm_in_buf : fm_rbuf_i;
  assign rd_addr = busy_o ? t_rd_addr : fm_raddr_i;
  assign fm_rdata_o = rd_data[PIX_BITS-1:0];

  fmap_memory #(.K(K), .P(P), .TW(TW), .DEPTH(DEPTH)) u_fmap (
    .clk_i,
    .rd_en_i(rd_en), .rd_buf_i(rd_buf), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
    .cwr_en_i(cwr_en), .cwr_buf_i(!fm_in_buf), .cwr_addr_i(cwr_addr),
    .cwr_word_en_i(active), .cwr_data_i(cwr_data),
    .hwr_en_i(fm_we_i), .hwr_buf_i(fm_buf_i), .hwr_addr_i(fm_addr_i),
    .hwr_word_i(fm_word_i), .hwr_data_i(fm_data_i), .hwr_ready_o(fm_ready_o)
  );

  // ---------------- tile buffer ----------------
  logic              win_valid, win_wr, win_last;
  logic [2*N-1:0]    win_act;
  pool_ctl_t         win_pool;
  logic [AW-1:0]     win_addr;

  tile_buffer #(.K(K), .P(P), .TW(TW), .IW(IW), .IH(IH)) u_tile (
    .clk_i, .rst_ni, .start_i(tile_start), .cfg_i(cur_cfg), .busy_o(tile_busy),
    .done_o(tile_done), .rd_en_o(t_rd_en), .rd_addr_o(t_rd_addr), .rd_data_i(rd_data),
    .win_valid_o(win_valid), .win_act_o(win_act), .win_pool_o(win_pool),
    .win_wr_o(win_wr), .win_addr_o(win_addr), .win_last_o(win_last)
  );

  // ---------------- weight memories ----------------
  logic [NO*WORD_BITS-1:0] wm_rd_data;

  weight_memory #(.NB(NO), .DEPTH(WDEPTH), .WORD_BITS(WORD_BITS)) u_wmem (
    .clk_i, .wr_en_i(wm_we_i), .wr_bank_i(wm_ocu_i), .wr_addr_i(wm_addr_i),
    .wr_data_i(wm_data_i), .rd_en_i(wm_rd_en), .rd_addr_i(wm_rd_addr), .rd_data_o(wm_rd_data)
  );

  // ---------------- OCU pipeline ----------------
  logic [P:0]          st_valid;
  logic [2*N-1:0]      st_act  [P+1];
  pool_ctl_t           st_pool [P+1];
  logic [2*NO-1:0]     aligned;

  assign st_valid[0] = win_valid;
  assign st_act[0]   = win_act;
  assign st_pool[0]  = win_pool;

  for (genvar s = 0; s < P; s++) begin : g_stage
    logic [NOCU-1:0]   thr_we;
    logic              out_valid;
    logic [2*NOCU-1:0] out_trits;
    logic [2*NOCU-1:0] dly [P-s];

    assign active[s] = (s * NOCU) < int'(cur_cfg.out_ch);

    always_comb begin
      thr_we = '0;
      if (thr_we_i && int'(thr_ocu_i) / NOCU == s) thr_we[int'(thr_ocu_i) % NOCU] = 1'b1;
    end

    ocu_stage #(.NOCU(NOCU), .N(N), .TW(TW), .L(L), .POOL_DEPTH((IW >= 2) ? IW / 2 : 1)) u_stage (
      .clk_i, .rst_ni, .active_i(active[s]),
      .win_valid_i(st_valid[s]), .win_act_i(st_act[s]), .win_pool_i(st_pool[s]),
      .win_valid_o(st_valid[s+1]), .win_act_o(st_act[s+1]), .win_pool_o(st_pool[s+1]),
      .wb_we_i(wb_we), .wb_sel_i(wb_sel), .wb_word_i(wb_word),
      .wb_data_i(wm_rd_data[s*NOCU*WORD_BITS +: NOCU*WORD_BITS]), .wb_rd_sel_i(wb_rd_sel),
      .thr_clear_i(queue_clear_i), .thr_we_i(thr_we), .thr_i,
      .thr_rewind_i(q_rewind), .thr_advance_i(q_advance),
      .out_valid_o(out_valid), .out_trits_o(out_trits)
    );

    // output pipeline registers: stage s is P-1-s cycles early
    assign dly[0] = out_trits;
    for (genvar d = 1; d < P - s; d++) begin : g_dly
      always_ff @(posedge clk_i) dly[d] <= dly[d-1];
    end
    assign aligned[s*2*NOCU +: 2*NOCU] = dly[P-1-s];

    // compression of this stage's word
    trit_compress #(.N(TW)) u_comp (
      .trits_i(aligned[s*2*NOCU +: 2*NOCU]), .code_o(cwr_data[s*WORD_BITS +: WORD_BITS])
    );
  end

  // write-back information travels alongside the windows
  logic [DLY-1:0] m_wr;
  logic [AW-1:0]  m_addr [DLY];

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      m_wr <= '0;
    end else begin
      m_wr <= {m_wr[DLY-2:0], win_valid && win_wr};
    end
  end

  always_ff @(posedge clk_i) begin
    m_addr[0] <= win_addr;
    for (int d = 1; d < int'(DLY); d++) m_addr[d] <= m_addr[d-1];
  end

  assign cwr_en   = m_wr[DLY-1];
  assign cwr_addr = m_addr[DLY-1];

  // ---------------- configuration checks ----------------
  initial begin
    assert (NI == NO) else $fatal(1, "cutie_top: N_I must equal N_O");
    assert (WS == P) else $fatal(1, "cutie_top: W_S must equal P");
    assert (NO % P == 0 && N % TW == 0) else $fatal(1, "cutie_top: N_O/P must divide K*K*N_I");
  end
endmodule
