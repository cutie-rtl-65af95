// tb_cutie_full: end-to-end run of the core with every parameter at its
// default (K=3, N_I=N_O=128, P=2, 32x32 pixels, L=8, two weight buffers).
// The eight fused convolution layers of the CIFAR-10 network of the
// evaluation (Table III) are loaded with random ternary kernels and
// thresholds and run once, filling the whole layer queue and weight memory:
//   32x32x126 conv; 32x32x128 conv; 32x32x128 conv + 2x2 max pool;
//   16x16 conv; 16x16 conv + 2x2 max pool; 8x8 conv; 8x8 conv + 2x2 max
//   pool; 4x4 conv + 4x4 average pool -> 1x1x128
// (all 3x3 kernels, padding 1). The closing fully connected layer needs a
// ninth queue entry and is not part of this run. Every output trit is
// compared with the golden model, the number of released windows with the
// one-window-per-cycle expectation.
module tb_cutie_full;
  import cutie_pkg::*;
  import cutie_ref_pkg::*;

  localparam int unsigned K = 3, NI = 128, NO = 128, P = 2, IW = 32, IH = 32, L = 8;
  localparam int unsigned TW = NO / P, NOCU = NO / P;
  localparam int unsigned WORD_BITS = 8 * ((TW + 4) / 5), PIX_BITS = P * WORD_BITS;
  localparam int unsigned N = K * K * NI, NW = N / TW;
  localparam int unsigned AW = $clog2(((IW * IH + K - 1) / K) * K);
  localparam int unsigned WAW = $clog2(L * NW), OW_BITS = $clog2(NO), PW = (P > 1) ? $clog2(P) : 1;

  `include "cutie_tb_body.svh"

  cutie_top dut (
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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_cfg_t c;
    do_reset();
    c = '{in_w:32, in_h:32, ch_in:126, ch_out:128, kernel:3, sx:1, sy:1, pad:1, pool_en:0, pool_avg:0, pool_size:1};
    add_layer(c, 40, 4);
    for (int l = 1; l < 8; l++) begin
      int sz;
      sz = (l < 3) ? 32 : (l < 5) ? 16 : (l < 7) ? 8 : 4;
      c = '{in_w:sz, in_h:sz, ch_in:128, ch_out:128, kernel:3, sx:1, sy:1, pad:1,
            pool_en:(l % 2 == 0 || l == 7), pool_avg:(l == 7), pool_size:(l == 7) ? 4 : 2};
      add_layer(c, 40, (l == 7) ? 40 : 4);
    end
    program_net();
    infer(100000);
    report_mechanisms();
    chk(n_maxpool > 0, "max pooling exercised");
    chk(n_avgpool > 0, "average pooling exercised");
    chk(n_overlap == 7, "weights of every later layer pre-loaded during execution");
    chk(n_swap == 7, "feature map buffers swapped at every layer switch");
    chk(n_eoi == 1, "one end-of-inference interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
