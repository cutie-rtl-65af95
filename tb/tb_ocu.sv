// tb_ocu: checks one Output Channel Compute Unit at a small size
// (72-trit windows, 8-trit weight words). Two kernels are loaded into the
// two weight buffers and two threshold pairs into the queue. Layer A (buffer
// 0, no pooling): each random window must give sign-thresholded dot product
// one cycle later. Layer B (buffer 1, next thresholds): a 4x4 map of windows
// with 2x2 max pooling, then a 4x4 map with 2x2 sum pooling; results appear
// one cycle after the last window of each pooling window.
module tb_ocu;
  import cutie_pkg::*;
  import cutie_ref_pkg::*;
  localparam int N = 72, TW = 8, NWORDS = N / TW, L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wb_we = 0, wb_sel = 0, wb_rd_sel = 0;
  logic [$clog2(NWORDS)-1:0] wb_word;
  logic [2*TW-1:0] wb_data;
  logic thr_clear = 0, thr_push = 0, thr_rewind = 0, thr_advance = 0;
  logic [31:0] thr;
  logic valid = 0;
  logic [2*N-1:0] act;
  pool_ctl_t pc;
  logic out_valid;
  logic [1:0] out_trit;
  int w[2][N];
  int lo[3], hi[3];
  int checks = 0, failures = 0;

  ocu #(.N(N), .TW(TW), .L(L), .POOL_DEPTH(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wb_we_i(wb_we), .wb_sel_i(wb_sel), .wb_word_i(wb_word),
    .wb_data_i(wb_data), .wb_rd_sel_i(wb_rd_sel), .thr_clear_i(thr_clear), .thr_push_i(thr_push),
    .thr_i(thr), .thr_rewind_i(thr_rewind), .thr_advance_i(thr_advance),
    .valid_i(valid), .act_i(act), .pool_i(pc), .out_valid_o(out_valid), .out_trit_o(out_trit)
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", s); end
  endtask

  function automatic int dot(input int b);
    int s;
    s = 0;
    for (int i = 0; i < N; i++) s += t2i(act[2*i +: 2]) * w[b][i];
    return s;
  endfunction

  task automatic pooled_map(input int l, input logic avg);
    int conv[16];
    pc.pool_en = 1; pc.pool_avg = avg;
    for (int y = 0; y < 4; y++)
      for (int x = 0; x < 4; x++) begin
        for (int i = 0; i < N; i++) act[2*i +: 2] = i2t(rand_trit(30));
        conv[y*4+x] = dot(1);
        valid = 1;
        pc.first_col = (x % 2 == 0); pc.last_col = (x % 2 == 1);
        pc.first_row = (y % 2 == 0); pc.last_row = (y % 2 == 1);
        tick();
        valid = 0;
        chk(out_valid == (x % 2 == 1 && y % 2 == 1), "pooled valid");
        if (out_valid) begin
          int v, e;
          v = avg ? conv[y*4+x] + conv[y*4+x-1] + conv[(y-1)*4+x] + conv[(y-1)*4+x-1]
                  : conv[y*4+x];
          if (!avg)
            foreach (conv[i]) if ((i / 4 == y || i / 4 == y - 1) && (i % 4 == x || i % 4 == x - 1) && conv[i] > v) v = conv[i];
          e = (v > hi[l]) ? 1 : (v < lo[l]) ? -1 : 0;
          chk(t2i(out_trit) == e, $sformatf("pooled result at (%0d,%0d) avg=%0d v=%0d", x, y, avg, v));
        end
      end
  endtask

  initial begin
    pc = '0;
    repeat (2) tick();
    rst_n = 1;
    tick();
    for (int b = 0; b < 2; b++)
      for (int j = 0; j < NWORDS; j++) begin
        wb_we = 1; wb_sel = b[0]; wb_word = j[$clog2(NWORDS)-1:0];
        for (int t = 0; t < TW; t++) begin
          w[b][j*TW+t] = rand_trit(30);
          wb_data[2*t +: 2] = i2t(w[b][j*TW+t]);
        end
        tick();
      end
    wb_we = 0;
    lo = '{-2, -6, -9}; hi = '{2, 5, 9};
    for (int l = 0; l < 3; l++) begin
      thr_push = 1; thr = {16'(hi[l]), 16'(lo[l])}; tick();
    end
    thr_push = 0;
    thr_rewind = 1; tick(); thr_rewind = 0;
    // layer A
    wb_rd_sel = 0;
    for (int it = 0; it < 60; it++) begin
      int s, e;
      for (int i = 0; i < N; i++) act[2*i +: 2] = i2t(rand_trit(it % 80));
      s = dot(0);
      e = (s > hi[0]) ? 1 : (s < lo[0]) ? -1 : 0;
      valid = 1; pc = '0; pc.first_col = 1; pc.last_col = 1; pc.first_row = 1; pc.last_row = 1;
      tick();
      valid = 0;
      chk(out_valid, "valid after one cycle");
      chk(t2i(out_trit) == e, $sformatf("layer A result: sum %0d got %0d", s, t2i(out_trit)));
    end
    tick();
    chk(!out_valid, "no result without a window");
    // layer B
    thr_advance = 1; tick(); thr_advance = 0;
    wb_rd_sel = 1;
    pooled_map(1, 0);
    thr_advance = 1; tick(); thr_advance = 0;
    pooled_map(2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
