// cutie_tb_body.svh: body shared by the end-to-end testbenches of cutie_top.
//
// Included inside a testbench module that has declared the core's sizes
// (K, NI, NO, P, IW, IH, L and the derived TW, NOCU, WORD_BITS, PIX_BITS, N,
// NW, AW, WAW, OW_BITS, PW) and instantiated cutie_top as dut on the signals
// below. It provides a host model that programs a network (layer
// instructions, thresholds, weights), writes an input feature map, starts the
// core, waits for the end-of-inference interrupt and compares the result
// with the golden model of cutie_ref_pkg, plus counters of the mechanisms an
// inference exercised.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 layer_we = 0, queue_clear = 0, layer_full;
  cutie_pkg::layer_cfg_t layer_cfg;
  logic                 thr_we = 0;
  logic [OW_BITS-1:0]   thr_ocu;
  logic [31:0]          thr;
  logic                 wm_we = 0;
  logic [OW_BITS-1:0]   wm_ocu;
  logic [WAW-1:0]       wm_addr;
  logic [WORD_BITS-1:0] wm_data;
  logic                 fm_we = 0, fm_buf = 0, fm_ready;
  logic [AW-1:0]        fm_addr;
  logic [PW-1:0]        fm_word;
  logic [WORD_BITS-1:0] fm_data;
  logic                 fm_re = 0, fm_rbuf = 0;
  logic [AW-1:0]        fm_raddr;
  logic [PIX_BITS-1:0]  fm_rdata;
  logic                 start = 0, busy, eoi, out_buf;

  int checks = 0, failures = 0;

  // the network under test
  cutie_ref_pkg::ref_cfg_t net[$];
  int wts[][][];          // [layer][ocu][tap]
  int thr_lo[][], thr_hi[][];

  // mechanism counters
  int n_pad = 0, n_nopad = 0, n_stride = 0, n_k1 = 0, n_maxpool = 0, n_avgpool = 0;
  int n_silenced = 0, n_overlap = 0, n_swap = 0, n_eoi = 0, n_replay = 0, n_windows = 0;
  int n_hold = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.preload_overlap_o) n_overlap++;
    if (dut.q_advance) n_swap++;
    if (dut.win_valid) n_windows++;
    if (dut.g_stage[P-1].u_stage.win_valid_i && !dut.active[P-1]) n_hold++;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic tick();
    @(posedge clk); #1;
  endtask

  task automatic do_reset();
    rst_n = 0;
    repeat (3) tick();
    rst_n = 1;
    tick();
  endtask

  task automatic add_layer(input cutie_ref_pkg::ref_cfg_t c, input int zero_pct, input int tscale);
    int l;
    l = net.size();
    net.push_back(c);
    wts = new[l + 1](wts);
    thr_lo = new[l + 1](thr_lo);
    thr_hi = new[l + 1](thr_hi);
    wts[l] = new[NO];
    thr_lo[l] = new[NO];
    thr_hi[l] = new[NO];
    for (int o = 0; o < NO; o++) begin
      wts[l][o] = new[N];
      for (int i = 0; i < N; i++)
        wts[l][o][i] = (o < c.ch_out && (i % NI) < c.ch_in) ? cutie_ref_pkg::rand_trit(zero_pct) : 0;
      thr_lo[l][o] = -int'($urandom_range(tscale)) - 1;
      thr_hi[l][o] = int'($urandom_range(tscale)) + 1;
    end
  endtask

  function automatic cutie_pkg::layer_cfg_t to_hw(input cutie_ref_pkg::ref_cfg_t c);
    cutie_pkg::layer_cfg_t h;
    h.in_w = 8'(c.in_w);   h.in_h = 8'(c.in_h);
    h.kernel = 4'(c.kernel);
    h.stride_x = 2'(c.sx); h.stride_y = 2'(c.sy);
    h.pad = c.pad[0];
    h.pool_en = c.pool_en[0]; h.pool_avg = c.pool_avg[0]; h.pool_size = 3'(c.pool_size);
    h.out_ch = 8'(c.ch_out);
    return h;
  endfunction

  // host setup phase: layer instructions, thresholds, weights
  task automatic program_net();
    queue_clear = 1; tick(); queue_clear = 0;
    foreach (net[l]) begin
      layer_we = 1; layer_cfg = to_hw(net[l]); tick();
    end
    layer_we = 0;
    foreach (net[l])
      for (int o = 0; o < NO; o++) begin
        thr_we = 1; thr_ocu = OW_BITS'(o);
        thr = {16'(thr_hi[l][o]), 16'(thr_lo[l][o])};
        tick();
      end
    thr_we = 0;
    foreach (net[l])
      for (int o = 0; o < NO; o++)
        for (int j = 0; j < NW; j++) begin
          logic [4095:0] pk;
          pk = cutie_ref_pkg::ref_pack(wts[l][o], j * TW, TW);
          wm_we = 1; wm_ocu = OW_BITS'(o); wm_addr = WAW'(l * NW + j);
          wm_data = pk[WORD_BITS-1:0];
          tick();
        end
    wm_we = 0;
  endtask

  // input feature map into buffer 0 (channel count NI, unused channels zero)
  task automatic write_input(input int fin[], input int iw, input int ih, input int ch);
    for (int n = 0; n < iw * ih; n++)
      for (int w = 0; w < P; w++) begin
        int px[];
        logic [4095:0] pk;
        px = new[TW];
        for (int t = 0; t < TW; t++) px[t] = (w*TW + t < ch) ? fin[n * ch + w*TW + t] : 0;
        pk = cutie_ref_pkg::ref_pack(px, 0, TW);
        fm_we = 1; fm_buf = 0; fm_addr = AW'(n); fm_word = PW'(w); fm_data = pk[WORD_BITS-1:0];
        #1;
        while (!fm_ready) tick();
        tick();
      end
    fm_we = 0;
  endtask

  // one inference: input, start, wait, compare
  task automatic infer(input int max_cycles);
    int fin[], fout[], ow, oh, cyc, expected_windows;
    cutie_ref_pkg::ref_cfg_t c0;
    c0 = net[0];
    fin = new[c0.in_w * c0.in_h * c0.ch_in];
    foreach (fin[i]) fin[i] = cutie_ref_pkg::rand_trit(40);
    write_input(fin, c0.in_w, c0.in_h, c0.ch_in);
    n_windows = 0;
    start = 1; tick(); start = 0;
    cyc = 0;
    while (!eoi && cyc < max_cycles) begin tick(); cyc++; end
    chk(eoi, "end-of-inference interrupt");
    if (eoi) n_eoi++;
    $display("inference of %0d layers took %0d cycles", net.size(), cyc);
    // golden model, layer by layer
    expected_windows = 0;
    foreach (net[l]) begin
      int p, off, cw, ch, ps;
      cutie_ref_pkg::ref_layer(fin, net[l], K, NI, wts[l], thr_lo[l], thr_hi[l], fout, ow, oh);
      p = (net[l].kernel - 1) / 2; off = net[l].pad ? 0 : p;
      cw = (net[l].in_w - 1 - 2*off) / net[l].sx + 1;
      ch = (net[l].in_h - 1 - 2*off) / net[l].sy + 1;
      ps = net[l].pool_en ? net[l].pool_size : 1;
      expected_windows += (cw / ps) * ps * (ch / ps) * ps;
      if (net[l].pad && net[l].kernel > 1) n_pad++;
      if (!net[l].pad && net[l].kernel > 1) n_nopad++;
      if (net[l].sx > 1 || net[l].sy > 1) n_stride++;
      if (net[l].kernel < K) n_k1++;
      if (net[l].pool_en && !net[l].pool_avg) n_maxpool++;
      if (net[l].pool_en && net[l].pool_avg) n_avgpool++;
      if (net[l].ch_out <= NO - NOCU) n_silenced++;
      fin = fout;
    end
    // one window per cycle: exactly the expected number of windows
    chk(n_windows == expected_windows,
        $sformatf("window count %0d, expected %0d", n_windows, expected_windows));
    // read back the result
    for (int n = 0; n < ow * oh; n++) begin
      int co;
      co = net[net.size()-1].ch_out;
      fm_re = 1; fm_rbuf = out_buf; fm_raddr = AW'(n);
      tick();
      fm_re = 0;
      #1;
      for (int c = 0; c < co; c++) begin
        int t[5], w, b;
        w = c / TW;
        b = (c % TW) / 5;
        cutie_ref_pkg::ref_decode5(fm_rdata[w*WORD_BITS + 8*b +: 8], t);
        chk(t[(c % TW) % 5] == fout[n * co + c],
            $sformatf("output pixel %0d channel %0d: %0d vs %0d", n, c, t[(c % TW) % 5], fout[n * co + c]));
      end
    end
  endtask

  task automatic report_mechanisms();
    $display("mechanisms: pad=%0d nopad=%0d stride=%0d kernel<K=%0d maxpool=%0d avgpool=%0d silenced_layers=%0d held_stage_inputs=%0d weight_preload_overlap=%0d layer_switches=%0d eoi=%0d replays=%0d",
             n_pad, n_nopad, n_stride, n_k1, n_maxpool, n_avgpool, n_silenced, n_hold, n_overlap, n_swap, n_eoi, n_replay);
  endtask
