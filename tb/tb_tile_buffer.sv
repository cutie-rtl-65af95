// tb_tile_buffer: checks the sliding-window scheduler at a small size (K=3,
// 8 channels, up to 7x7 pixels) against a feature map memory model with the
// same one-cycle read latency. For padded and unpadded layers, kernels 3
// and 1, strides 1..3 and pooling 2x2 / 3x3, every released window is
// compared trit by trit with the expected window (zeros outside the image and
// outside the kernel), together with its pooling flags, write flag, output
// address and last flag; the number of windows must match, and the windows of
// one row must come out on consecutive cycles (one window per cycle).
module tb_tile_buffer;
  import cutie_pkg::*;
  import cutie_ref_pkg::*;
  localparam int K = 3, P = 2, TW = 4, NI = P * TW, IW = 7, IH = 7;
  localparam int WB = 8 * ((TW + 4) / 5), PB = P * WB;
  localparam int DEPTH = (IW * IH + K - 1) / K, AW = $clog2(DEPTH * K);
  localparam int WIN = 2 * K * K * NI;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, rd_en, win_valid, win_wr, win_last;
  layer_cfg_t cfg;
  logic [AW-1:0] rd_addr, win_addr;
  logic [K*PB-1:0] rd_data;
  logic [WIN-1:0] win_act;
  pool_ctl_t win_pool;
  int fm[];   // (y*IW + x)*NI + c, current layer width
  int checks = 0, failures = 0;

  tile_buffer #(.K(K), .P(P), .TW(TW), .IW(IW), .IH(IH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg), .busy_o(busy), .done_o(done),
    .rd_en_o(rd_en), .rd_addr_o(rd_addr), .rd_data_i(rd_data),
    .win_valid_o(win_valid), .win_act_o(win_act), .win_pool_o(win_pool),
    .win_wr_o(win_wr), .win_addr_o(win_addr), .win_last_o(win_last)
  );

  // memory model: K compressed pixels one cycle after the request
  always @(posedge clk) begin
    if (rd_en) begin
      for (int j = 0; j < K; j++)
        for (int w = 0; w < P; w++) begin
          int px[];
          logic [4095:0] pk;
          int n;
          px = new[TW];
          n = int'(rd_addr) + j;
          for (int t = 0; t < TW; t++) px[t] = (n < fm.size() / NI) ? fm[n*NI + w*TW + t] : 0;
          pk = ref_pack(px, 0, TW);
          rd_data[j*PB + w*WB +: WB] <= pk[WB-1:0];
        end
    end
  end

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

  task automatic run(input int w, input int h, input int k, input int sx, input int sy,
                     input int pad, input int pool, input int ps);
    int p, off, ow, oh, s, qw, qh, nwx, nwy, got, cyc, prev_valid_cycle, row_breaks;
    fm = new[w * h * NI];
    foreach (fm[i]) fm[i] = rand_trit(30);
    cfg = '0;
    cfg.in_w = 8'(w); cfg.in_h = 8'(h); cfg.kernel = 4'(k);
    cfg.stride_x = 2'(sx); cfg.stride_y = 2'(sy); cfg.pad = pad[0];
    cfg.pool_en = pool[0]; cfg.pool_avg = 1'b0; cfg.pool_size = 3'(ps); cfg.out_ch = 8'(NI);
    p = (k - 1) / 2; off = pad ? 0 : p;
    ow = (w - 1 - 2*off) / sx + 1; oh = (h - 1 - 2*off) / sy + 1;
    s = pool ? ps : 1;
    qw = ow / s; qh = oh / s; nwx = qw * s; nwy = qh * s;
    start = 1; @(posedge clk); #1; start = 0;
    got = 0; cyc = 0; prev_valid_cycle = -10; row_breaks = 0;
    while (!done && cyc < 5000) begin
      if (win_valid) begin
        int wx, wy, cx, cy, bad;
        wx = got % nwx; wy = got / nwx;
        cx = off + wx * sx; cy = off + wy * sy;
        bad = 0;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            for (int c = 0; c < NI; c++) begin
              int y, x, e;
              y = cy + ky - K/2; x = cx + kx - K/2;
              e = (ky - K/2 <= p && K/2 - ky <= p && kx - K/2 <= p && K/2 - kx <= p &&
                   y >= 0 && y < h && x >= 0 && x < w) ? fm[(y*w + x)*NI + c] : 0;
              if (t2i(win_act[2*(((ky*K)+kx)*NI + c) +: 2]) != e) bad = 1;
            end
        chk(!bad, $sformatf("window %0d (w=%0d k=%0d s=%0d,%0d pad=%0d)", got, w, k, sx, sy, pad));
        chk(win_pool.first_col == (wx % s == 0) && win_pool.last_col == (wx % s == s-1) &&
            win_pool.first_row == (wy % s == 0) && win_pool.last_row == (wy % s == s-1) &&
            win_pool.pool_en == pool[0], "pool flags");
        chk(win_wr == (wx % s == s-1 && wy % s == s-1), "write flag");
        if (win_wr) chk(int'(win_addr) == (wy / s) * qw + wx / s, "write address");
        chk(win_last == (got == nwx * nwy - 1), "last flag");
        if (wx != 0) chk(prev_valid_cycle == cyc - 1, "windows of a row back to back");
        prev_valid_cycle = cyc;
        got++;
      end
      @(posedge clk); #1; cyc++;
    end
    chk(got == nwx * nwy, $sformatf("window count %0d vs %0d", got, nwx * nwy));
    @(posedge clk); #1;
  endtask

  initial begin
    #1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    run(7, 7, 3, 1, 1, 1, 0, 1);
    run(7, 7, 3, 1, 1, 0, 0, 1);
    run(7, 7, 3, 2, 1, 0, 0, 1);
    run(7, 6, 3, 3, 2, 1, 0, 1);
    run(7, 7, 1, 1, 1, 0, 0, 1);
    run(5, 7, 1, 2, 3, 1, 0, 1);
    run(6, 6, 3, 1, 1, 1, 1, 2);
    run(7, 7, 3, 1, 1, 1, 1, 3);
    run(4, 4, 3, 1, 1, 0, 1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
