// tb_cutie_top: end-to-end test of the core at a reduced size (K=3,
// N_I=N_O=8, P=2, 8x8 pixels, L=4).
// Network A (4 layers: 3x3 padded conv; 3x3 padded conv + 2x2 max pooling;
// 3x3 padded conv with stride 2; 1x1 conv with 2x2 sum pooling and only 3
// output channels, which leaves stage 1 silent) is run twice on different
// inputs from the same pre-loaded queue. Then the queues are cleared and
// network B (3x3 unpadded conv, stride (2,1); 3x3 padded conv + 3x3 sum
// pooling) is run. Every output trit is compared with the golden model, the
// number of released windows with the one-window-per-cycle expectation, and
// each mechanism must have occurred at least once.
module tb_cutie_top;
  import cutie_pkg::*;
  import cutie_ref_pkg::*;

  localparam int unsigned K = 3, NI = 8, NO = 8, P = 2, IW = 8, IH = 8, L = 4;
  localparam int unsigned TW = NO / P, NOCU = NO / P;
  localparam int unsigned WORD_BITS = 8 * ((TW + 4) / 5), PIX_BITS = P * WORD_BITS;
  localparam int unsigned N = K * K * NI, NW = N / TW;
  localparam int unsigned AW = $clog2(((IW * IH + K - 1) / K) * K);
  localparam int unsigned WAW = $clog2(L * NW), OW_BITS = $clog2(NO), PW = (P > 1) ? $clog2(P) : 1;

  `include "cutie_tb_body.svh"

  cutie_top #(.K(K), .NI(NI), .NO(NO), .P(P), .IW(IW), .IH(IH), .L(L), .WS(P)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .layer_we_i(layer_we), .layer_cfg_i(layer_cfg), .layer_full_o(layer_full),
    .queue_clear_i(queue_clear),
    .thr_we_i(thr_we), .thr_ocu_i(thr_ocu), .thr_i(thr),
    .wm_we_i(wm_we), .wm_ocu_i(wm_ocu), .wm_addr_i(wm_addr), .wm_data_i(wm_data),
    .fm_we_i(fm_we), .fm_buf_i(fm_buf), .fm_addr_i(fm_addr), .fm_word_i(fm_word),
    .fm_data_i(fm_data), .fm_ready_o(fm_ready),
    .fm_re_i(fm_re), .fm_rbuf_i(fm_rbuf), .fm_raddr_i(fm_raddr), .fm_rdata_o(fm_rdata),
    .start_i(start), .busy_o(busy), .eoi_o(eoi), .out_buf_o(out_buf)
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_cfg_t c;
    do_reset();
    // network A
    c = '{in_w:8, in_h:8, ch_in:6, ch_out:8, kernel:3, sx:1, sy:1, pad:1, pool_en:0, pool_avg:0, pool_size:1};
    add_layer(c, 40, 3);
    c = '{in_w:8, in_h:8, ch_in:8, ch_out:8, kernel:3, sx:1, sy:1, pad:1, pool_en:1, pool_avg:0, pool_size:2};
    add_layer(c, 40, 3);
    c = '{in_w:4, in_h:4, ch_in:8, ch_out:8, kernel:3, sx:2, sy:2, pad:1, pool_en:0, pool_avg:0, pool_size:1};
    add_layer(c, 40, 3);
    c = '{in_w:2, in_h:2, ch_in:8, ch_out:3, kernel:1, sx:1, sy:1, pad:0, pool_en:1, pool_avg:1, pool_size:2};
    add_layer(c, 20, 3);
    program_net();
    infer(20000);
    infer(20000);
    n_replay++;
    // network B
    net.delete();
    wts.delete(); thr_lo.delete(); thr_hi.delete();
    c = '{in_w:8, in_h:8, ch_in:5, ch_out:8, kernel:3, sx:2, sy:1, pad:0, pool_en:0, pool_avg:0, pool_size:1};
    add_layer(c, 40, 3);
    c = '{in_w:3, in_h:6, ch_in:8, ch_out:8, kernel:3, sx:1, sy:1, pad:1, pool_en:1, pool_avg:1, pool_size:3};
    add_layer(c, 40, 8);
    program_net();
    infer(20000);
    report_mechanisms();
    chk(n_pad > 0, "padding exercised");
    chk(n_nopad > 0, "unpadded layer exercised");
    chk(n_stride > 0, "stride exercised");
    chk(n_k1 > 0, "kernel smaller than K exercised");
    chk(n_maxpool > 0, "max pooling exercised");
    chk(n_avgpool > 0, "average pooling exercised");
    chk(n_silenced > 0 && n_hold > 0, "stage silencing exercised");
    chk(n_overlap > 0, "weight pre-loading during execution exercised");
    chk(n_swap > 0, "feature map buffer swap exercised");
    chk(n_eoi == 3, "three end-of-inference interrupts");
    chk(n_replay > 0, "queue replay exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
