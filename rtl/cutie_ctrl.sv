// cutie_ctrl: central control logic of the core.
//
// After start_i (with at least one layer instruction queued) the controller
// runs all queued layers one after another without the host:
//   1. weight loading: the first layer's kernels are copied from the weight
//      memories into weight buffer 0 of every OCU (NW words, one per cycle,
//      all OCUs in parallel);
//   2. per layer: the tile buffer is started on the current layer; at the
//      same time the next layer's kernels are copied into the other weight
//      buffer, so from the second layer on loading and execution overlap;
//   3. when the tile buffer has released its last window the controller
//      waits DRAIN cycles for the OCU pipeline and the write-back to finish,
//      then swaps the feature map buffers and weight buffers and steps the
//      layer and threshold queues to the next layer.
// After the last layer eoi_o (end-of-inference interrupt) goes high and stays
// high until the next start; out_buf_o tells which feature map buffer holds
// the result. The first layer always reads feature map buffer 0.
// The phase order and the overlap of weight loading with execution follow the
// paper; the drain wait between layers is this design's choice (the paper
// quotes a single-cycle layer switch).
module cutie_ctrl #(
  parameter int unsigned L     = 8,
  parameter int unsigned NW    = 18,
  parameter int unsigned DRAIN = 4,
  localparam int unsigned LW   = $clog2(L + 1),
  localparam int unsigned WAW  = $clog2(L * NW),
  localparam int unsigned WW   = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           start_i,
  input  logic [LW-1:0]  n_layers_i,
  // layer and threshold queues
  output logic           q_rewind_o,
  output logic           q_advance_o,
  // tile buffer
  output logic           tile_start_o,
  input  logic           tile_done_i,
  // weight memory -> weight buffers
  output logic           wm_rd_en_o,
  output logic [WAW-1:0] wm_rd_addr_o,
  output logic           wb_we_o,
  output logic           wb_sel_o,
  output logic [WW-1:0]  wb_word_o,
  output logic           wb_rd_sel_o,
  // feature map buffers
  output logic           fm_in_buf_o,
  // status
  output logic           busy_o,
  output logic           eoi_o,
  output logic           out_buf_o,
  output logic           preload_overlap_o
);
  typedef enum logic [2:0] {S_IDLE, S_WLOAD, S_START, S_EXEC, S_DRAIN} state_e;

  state_e        state;
  logic [LW-1:0] layer;
  int unsigned   dcnt;

  // weight loader
  logic          wl_busy, wl_sel;
  logic [WW-1:0] wl_cnt;
  logic [WAW-1:0] wl_base;
  logic          wl_start;
  logic [LW-1:0] wl_layer;
  logic          wl_start_sel;
  logic          wl_idle;

  assign wl_idle = !wl_busy && !wm_rd_en_o && !wb_we_o;
  assign busy_o  = (state != S_IDLE);

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      wl_busy      <= 1'b0;
      wl_sel       <= 1'b0;
      wl_cnt       <= '0;
      wl_base      <= '0;
      wm_rd_en_o   <= 1'b0;
      wm_rd_addr_o <= '0;
      wb_we_o      <= 1'b0;
      wb_sel_o     <= 1'b0;
      wb_word_o    <= '0;
    end else begin
      // the word read in the previous cycle is written into the buffer now
      wb_we_o   <= wm_rd_en_o;
      wb_sel_o  <= wl_sel;
      wb_word_o <= wl_cnt;
      wm_rd_en_o <= 1'b0;
      if (wl_start) begin
        wl_busy <= 1'b1;
        wl_sel  <= wl_start_sel;
        wl_base <= WAW'(int'(wl_layer) * NW);
        wl_cnt  <= '1;
      end else if (wl_busy) begin
        logic [WW-1:0] nxt;
        nxt = (wl_cnt == '1) ? '0 : wl_cnt + 1'b1;
        wl_cnt       <= nxt;
        wm_rd_en_o   <= 1'b1;
        wm_rd_addr_o <= wl_base + WAW'(nxt);
        if (int'(nxt) == NW - 1) wl_busy <= 1'b0;
      end
    end
  end

  always_comb begin
    wl_start     = 1'b0;
    wl_layer     = layer;
    wl_start_sel = wb_rd_sel_o;
    if (state == S_IDLE && start_i && n_layers_i != 0) begin
      wl_start     = 1'b1;
      wl_layer     = '0;
      wl_start_sel = 1'b0;
    end else if (state == S_START && layer + 1'b1 < n_layers_i) begin
      wl_start     = 1'b1;
      wl_layer     = layer + 1'b1;
      wl_start_sel = !wb_rd_sel_o;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      state             <= S_IDLE;
      layer             <= '0;
      dcnt              <= 0;
      q_rewind_o        <= 1'b0;
      q_advance_o       <= 1'b0;
      tile_start_o      <= 1'b0;
      wb_rd_sel_o       <= 1'b0;
      fm_in_buf_o       <= 1'b0;
      eoi_o             <= 1'b0;
      out_buf_o         <= 1'b0;
      preload_overlap_o <= 1'b0;
    end else begin
      q_rewind_o        <= 1'b0;
      q_advance_o       <= 1'b0;
      tile_start_o      <= 1'b0;
      preload_overlap_o <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_i && n_layers_i != 0) begin
            q_rewind_o  <= 1'b1;
            layer       <= '0;
            fm_in_buf_o <= 1'b0;
            wb_rd_sel_o <= 1'b0;
            eoi_o       <= 1'b0;
            state       <= S_WLOAD;
          end
        end
        S_WLOAD: if (wl_idle && !wl_start) state <= S_START;
        S_START: begin
          tile_start_o      <= 1'b1;
          preload_overlap_o <= wl_start;
          state             <= S_EXEC;
        end
        S_EXEC: begin
          if (tile_done_i) begin
            dcnt  <= DRAIN;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (dcnt != 0) begin
            dcnt <= dcnt - 1;
          end else if (wl_idle) begin
            if (layer + 1'b1 >= n_layers_i) begin
              eoi_o     <= 1'b1;
              out_buf_o <= !fm_in_buf_o;
              state     <= S_IDLE;
            end else begin
              layer       <= layer + 1'b1;
              fm_in_buf_o <= !fm_in_buf_o;
              wb_rd_sel_o <= !wb_rd_sel_o;
              q_advance_o <= 1'b1;
              state       <= S_START;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the OCUs never compute with the buffer being loaded
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   wb_we_o && state inside {S_START, S_EXEC, S_DRAIN} |-> wb_sel_o != wb_rd_sel_o)
    else $error("cutie_ctrl: weight buffer written while in use");
endmodule
