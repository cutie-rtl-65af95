// tile_buffer: line storage and sliding-window scheduler in front of the OCUs.
//
// For one layer (start_i with the layer instruction cfg_i) the tile buffer
// reads the input feature map from the feature map memory, K adjacent pixels
// per read (rd_*; data one cycle later, decompressed here), keeps K image
// lines of decompressed pixels (line r in slot r mod K) and releases one
// K x K x N_I window per cycle on win_*_o, in raster order of the window
// centres.
//
// Scheduling follows the window centre. With padding, the first centre is
// the top-left pixel and pixels outside the image read as zero; without
// padding, the first centre is (p, p), p = (kernel-1)/2. Centres advance by
// stride_x / stride_y. A kernel smaller than K uses the middle of the K x K
// window; the other window positions are zero. Lines are loaded with
// ceil(in_w/K) reads each. While a row of windows is released (one window per
// cycle), the lines the next row needs are already read into the slots of
// lines that row no longer uses; a column of a slot still used by the current
// row is overwritten only once every remaining window of the row lies to the
// right of it. Lines that are still missing when a row starts (the first
// rows of a layer) are loaded before its windows, so a layer stalls only for
// those and for three cycles per window row.
//
// Each window carries its pooling control (position inside the pooling
// window, pool_size x pool_size, stride pool_size) and the output pixel index
// its result is written to (win_addr_o, valid when win_wr_o). Windows that
// would only feed an incomplete pooling window at the right or bottom edge
// are not released. done_o pulses one cycle after the last window.
// The K-line store, the K-pixel reads and the centre-based padding follow the
// paper; the column-wise replacement rule, the per-row overhead and the
// pooling bookkeeping are this design's choices.
//
// Lint note: the output channel count of the layer instruction (cfg[7:0]) is
// not used by the tile buffer; it is for the OCU stage silencing.
module tile_buffer
  import cutie_pkg::*;
#(
  parameter int unsigned K  = 3,
  parameter int unsigned P  = 2,
  parameter int unsigned TW = 64,
  parameter int unsigned IW = 32,
  parameter int unsigned IH = 32,
  localparam int unsigned NI        = P * TW,
  localparam int unsigned WORD_BITS = 8 * groups5(TW),
  localparam int unsigned PIX_BITS  = P * WORD_BITS,
  localparam int unsigned DEPTH     = (IW * IH + K - 1) / K,
  localparam int unsigned AW        = $clog2(DEPTH * K),
  localparam int unsigned WIN_BITS  = 2 * K * K * NI
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  start_i,
  input  layer_cfg_t            cfg_i,
  output logic                  busy_o,
  output logic                  done_o,
  // feature map memory read port
  output logic                  rd_en_o,
  output logic [AW-1:0]         rd_addr_o,
  input  logic [K*PIX_BITS-1:0] rd_data_i,
  // windows
  output logic                  win_valid_o,
  output logic [WIN_BITS-1:0]   win_act_o,
  output pool_ctl_t             win_pool_o,
  output logic                  win_wr_o,
  output logic [AW-1:0]         win_addr_o,
  output logic                  win_last_o
);
  typedef enum logic [2:0] {S_IDLE, S_INIT, S_PREP, S_LOAD, S_WAIT, S_REL} state_e;
  localparam int unsigned CHALF = K / 2;
  localparam int unsigned SW    = (K > 1) ? $clog2(K) : 1;

  state_e     state;
  layer_cfg_t cfg;

  // derived layer geometry
  int unsigned p, off, ps, qw, nwx, nwy;
  // window counters
  int unsigned wx, wy, pcx, pcy, qx, qy, cx, cy;
  // line loading
  int unsigned nr, lx, hi;

  logic [2*NI-1:0] lines [K][IW];
  // read request issued (rd_pend) and read data present (rd_pend_q)
  logic            rd_pend, rd_pend_q;
  logic [SW-1:0]   rd_slot, rd_slot_q;
  int unsigned     rd_lx, rd_lx_q;

  // decompression of the K pixels of a read (the DECOMPR. stage)
  wire [K*2*NI-1:0] rd_trits;
  for (genvar j = 0; j < K; j++) begin : g_pix
    for (genvar w = 0; w < P; w++) begin : g_word
      trit_decompress #(.N(TW)) u_dec (
        .code_i (rd_data_i[j*PIX_BITS + w*WORD_BITS +: WORD_BITS]),
        .trits_o(rd_trits[j*2*NI + w*2*TW +: 2*TW])
      );
    end
  end

  // line store: the read is registered in the tile buffer and in the memory,
  // so the pixels are written two cycles after the request was decided
  always_ff @(posedge clk_i) begin
    rd_pend_q <= rd_pend && rst_ni;
    rd_slot_q <= rd_slot;
    rd_lx_q   <= rd_lx;
    if (rd_pend_q) begin
      for (int j = 0; j < int'(K); j++) begin
        if (rd_lx_q + j < int'(cfg.in_w) && rd_lx_q + j < IW) begin
          lines[rd_slot_q][rd_lx_q + j] <= rd_trits[j*2*NI +: 2*NI];
        end
      end
    end
  end

  // window formed from the line store for centre (cx, cy)
  logic [WIN_BITS-1:0] window;
  always_comb begin
    window = '0;
    for (int ky = 0; ky < int'(K); ky++) begin
      for (int kx = 0; kx < int'(K); kx++) begin
        int r, c, dy, dx;
        dy = ky - int'(CHALF);
        dx = kx - int'(CHALF);
        r  = int'(cy) + dy;
        c  = int'(cx) + dx;
        if ((dy <= int'(p)) && (-dy <= int'(p)) && (dx <= int'(p)) && (-dx <= int'(p)) &&
            r >= 0 && r < int'(cfg.in_h) && c >= 0 && c < int'(cfg.in_w) && c < int'(IW)) begin
          window[((ky*K) + kx)*2*NI +: 2*NI] = lines[r % K][c];
        end
      end
    end
  end

  assign busy_o = (state != S_IDLE);

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      state       <= S_IDLE;
      done_o      <= 1'b0;
      rd_en_o     <= 1'b0;
      rd_addr_o   <= '0;
      rd_pend     <= 1'b0;
      win_valid_o <= 1'b0;
      win_wr_o    <= 1'b0;
      win_last_o  <= 1'b0;
      win_addr_o  <= '0;
      win_pool_o  <= '0;
      cfg         <= '0;
      {p, off, ps, qw, nwx, nwy} <= '0;
      {wx, wy, pcx, pcy, qx, qy, cx, cy} <= '0;
      {nr, lx, hi, rd_slot, rd_lx} <= '0;
    end else begin
      done_o      <= 1'b0;
      rd_en_o     <= 1'b0;
      rd_pend     <= 1'b0;
      win_valid_o <= 1'b0;
      win_wr_o    <= 1'b0;
      win_last_o  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_i) begin
            cfg   <= cfg_i;
            state <= S_INIT;
          end
        end
        S_INIT: begin
          int unsigned ow, oh, pp, oo, s;
          pp  = (int'(cfg.kernel) - 1) / 2;
          oo  = cfg.pad ? 0 : pp;
          s   = cfg.pool_en ? int'(cfg.pool_size) : 1;
          if (s == 0) s = 1;
          ow  = (int'(cfg.in_w) > 2*oo) ? (int'(cfg.in_w) - 1 - 2*oo) / int'(cfg.stride_x) + 1 : 0;
          oh  = (int'(cfg.in_h) > 2*oo) ? (int'(cfg.in_h) - 1 - 2*oo) / int'(cfg.stride_y) + 1 : 0;
          p   <= pp;
          off <= oo;
          ps  <= s;
          qw  <= ow / s;
          nwx <= (ow / s) * s;
          nwy <= (ow / s == 0) ? 0 : (oh / s) * s;
          wy  <= 0;
          pcy <= 0;
          qy  <= 0;
          cy  <= oo;
          nr  <= 0;
          state <= S_PREP;
        end
        S_PREP: begin
          if (wy == nwy) begin
            done_o <= 1'b1;
            state  <= S_IDLE;
          end else begin
            int unsigned l, h;
            l  = (cy >= p) ? cy - p : 0;
            h  = (cy + p < int'(cfg.in_h)) ? cy + p : int'(cfg.in_h) - 1;
            hi <= h;
            if (nr < l) begin
              nr <= l;
              lx <= 0;
            end
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          if (nr > hi) begin
            wx  <= 0;
            pcx <= 0;
            qx  <= 0;
            cx  <= off;
            state <= S_WAIT;
          end else begin
            rd_en_o   <= 1'b1;
            rd_addr_o <= AW'(nr * int'(cfg.in_w) + lx);
            rd_pend   <= 1'b1;
            rd_slot   <= SW'(nr % K);
            rd_lx     <= lx;
            if (lx + K >= int'(cfg.in_w)) begin
              lx <= 0;
              nr <= nr + 1;
            end else begin
              lx <= lx + K;
            end
          end
        end
        // the data of the last read reaches the line store
        S_WAIT: state <= S_REL;
        S_REL: begin
          win_valid_o          <= 1'b1;
          win_pool_o.pool_en   <= cfg.pool_en;
          win_pool_o.pool_avg  <= cfg.pool_avg;
          win_pool_o.first_col <= (pcx == 0);
          win_pool_o.last_col  <= (pcx == ps - 1);
          win_pool_o.first_row <= (pcy == 0);
          win_pool_o.last_row  <= (pcy == ps - 1);
          win_wr_o             <= (pcx == ps - 1) && (pcy == ps - 1);
          win_addr_o           <= AW'(qy * qw + qx);
          win_last_o           <= (wx == nwx - 1) && (wy == nwy - 1);
          if (pcx == ps - 1) begin
            pcx <= 0;
            qx  <= qx + 1;
          end else begin
            pcx <= pcx + 1;
          end
          // lines of the next window row are loaded while this row is
          // released; a column of the line being replaced is overwritten
          // only after every remaining window of this row has passed it
          if (wy + 1 < nwy) begin
            int unsigned ln, hn, lc, nrr;
            ln  = (cy + int'(cfg.stride_y) >= p) ? cy + int'(cfg.stride_y) - p : 0;
            hn  = (cy + int'(cfg.stride_y) + p < int'(cfg.in_h)) ? cy + int'(cfg.stride_y) + p
                                                               : int'(cfg.in_h) - 1;
            lc  = (cy >= p) ? cy - p : 0;
            nrr = (nr < ln) ? ln : nr;
            if (nrr <= hn && (nrr < lc + K || lx + K - 1 + p < cx)) begin
              rd_en_o   <= 1'b1;
              rd_addr_o <= AW'(nrr * int'(cfg.in_w) + lx);
              rd_pend   <= 1'b1;
              rd_slot   <= SW'(nrr % K);
              rd_lx     <= lx;
              if (lx + K >= int'(cfg.in_w)) begin
                lx <= 0;
                nr <= nrr + 1;
              end else begin
                lx <= lx + K;
                nr <= nrr;
              end
            end
          end
          wx <= wx + 1;
          cx <= cx + int'(cfg.stride_x);
          if (wx == nwx - 1) begin
            wy <= wy + 1;
            cy <= cy + int'(cfg.stride_y);
            if (pcy == ps - 1) begin
              pcy <= 0;
              qy  <= qy + 1;
            end else begin
              pcy <= pcy + 1;
            end
            state <= S_PREP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (state == S_REL) win_act_o <= window;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   start_i && state == S_IDLE |-> cfg_i.kernel[0] && int'(cfg_i.kernel) <= K &&
                   cfg_i.stride_x != 0 && cfg_i.stride_y != 0 &&
                   int'(cfg_i.in_w) <= IW && int'(cfg_i.in_h) <= IH)
    else $error("tile_buffer: unsupported layer instruction");
endmodule
