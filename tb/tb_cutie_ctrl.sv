// tb_cutie_ctrl: checks the central controller against a model of the
// sequence it must produce. The tile buffer is replaced by a stub that
// reports done a random number of cycles after each start. For every run the
// bench watches the weight memory reads and weight buffer writes and checks
// that layer l's kernels (addresses l*NW .. l*NW+NW-1) arrive complete, in
// order, in weight buffer l%2 before that layer starts; that the buffer being
// computed with is never written; that feature map buffers alternate; that
// the queues are rewound once and advanced once per layer switch; and that
// the end-of-inference flag and result buffer are right.
module tb_cutie_ctrl;
  localparam int L = 8, NW = 18, DRAIN = 4;
  localparam int LW = $clog2(L + 1), WAW = $clog2(L * NW), WW = $clog2(NW);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, tile_done = 0;
  logic [LW-1:0] n_layers = 0;
  logic q_rewind, q_advance, tile_start, wm_rd_en, wb_we, wb_sel, wb_rd_sel;
  logic [WAW-1:0] wm_rd_addr;
  logic [WW-1:0] wb_word;
  logic fm_in_buf, busy, eoi, out_buf, overlap;
  int checks = 0, failures = 0;

  cutie_ctrl #(.L(L), .NW(NW), .DRAIN(DRAIN)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .n_layers_i(n_layers),
    .q_rewind_o(q_rewind), .q_advance_o(q_advance), .tile_start_o(tile_start), .tile_done_i(tile_done),
    .wm_rd_en_o(wm_rd_en), .wm_rd_addr_o(wm_rd_addr), .wb_we_o(wb_we), .wb_sel_o(wb_sel),
    .wb_word_o(wb_word), .wb_rd_sel_o(wb_rd_sel), .fm_in_buf_o(fm_in_buf), .busy_o(busy),
    .eoi_o(eoi), .out_buf_o(out_buf), .preload_overlap_o(overlap)
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", s); end
  endtask

  // monitor state
  int buf_layer[2];        // layer whose kernels are complete in each buffer
  int wr_cnt[2];           // words written into each buffer since its load began
  int wr_layer[2];
  int last_addr;
  logic last_rd;
  int layer_now, n_adv, n_rew, n_ovl, n_start;
  logic executing;

  always @(posedge clk) if (rst_n) begin
    if (wb_we) begin
      int a, l, wd;
      chk(last_rd, "buffer write one cycle after a memory read");
      a = last_addr; l = a / NW; wd = a % NW;
      chk(int'(wb_word) == wd, "word index matches the address read");
      chk(int'(wb_sel) == l % 2, "layer l loads into buffer l%2");
      if (executing) chk(wb_sel != wb_rd_sel, "buffer in use is never written");
      if (wd == 0) begin wr_cnt[wb_sel] = 0; wr_layer[wb_sel] = l; buf_layer[wb_sel] = -1; end
      chk(wr_cnt[wb_sel] == wd && wr_layer[wb_sel] == l, "words in order");
      wr_cnt[wb_sel]++;
      if (wr_cnt[wb_sel] == NW) buf_layer[wb_sel] = l;
    end
    last_rd   = wm_rd_en;
    last_addr = int'(wm_rd_addr);
    if (q_rewind) n_rew++;
    if (q_advance) n_adv++;
    if (overlap) n_ovl++;
    if (tile_start) begin
      chk(int'(wb_rd_sel) == layer_now % 2, "OCUs read buffer layer%2");
      chk(int'(fm_in_buf) == layer_now % 2, "feature map buffers alternate");
      chk(buf_layer[wb_rd_sel] == layer_now, "kernels complete before the layer starts");
      chk(n_adv == layer_now, "queues advanced once per layer switch");
      n_start++;
      executing = 1;
    end
  end

  task automatic run(input int nl);
    int guard;
    n_layers = LW'(nl);
    buf_layer = '{-1, -1}; wr_cnt = '{0, 0}; wr_layer = '{-1, -1};
    layer_now = 0; n_adv = 0; n_rew = 0; n_ovl = 0; n_start = 0; executing = 0;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    chk(busy && !eoi, "busy after start, eoi cleared");
    for (int l = 0; l < nl; l++) begin
      guard = 0;
      while (!tile_start && guard < 1000) begin @(posedge clk); #1 guard++; end
      chk(guard < 1000, "tile buffer started");
      repeat ($urandom_range(1, 60)) @(posedge clk);
      #1 tile_done = 1;
      @(posedge clk); #1 tile_done = 0;
      executing = 0;
      layer_now++;
      if (l + 1 < nl) chk(busy && !eoi, "still busy between layers");
    end
    guard = 0;
    while (busy && guard < 1000) begin @(posedge clk); #1 guard++; end
    chk(!busy && eoi, "eoi after the last layer");
    chk(int'(out_buf) == nl % 2, "result buffer");
    chk(n_rew == 1, "queues rewound once");
    chk(n_adv == nl - 1, "queues advanced per switch");
    chk(n_ovl == nl - 1, "weight loading overlapped with every layer but the last");
    chk(n_start == nl, "one tile run per layer");
    repeat (5) @(posedge clk);
    #1 chk(eoi && !busy, "eoi held until the next start");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // start with an empty queue does nothing
    start = 1; @(posedge clk); #1 start = 0;
    @(posedge clk); #1 chk(!busy, "empty queue ignored");
    for (int r = 0; r < 12; r++) run((r < 8) ? r + 1 : $urandom_range(1, L));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
