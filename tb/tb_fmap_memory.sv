// tb_fmap_memory: checks the double-buffered feature map memory at a small
// size (K=3, P=2, 8 trits per word, 36 pixels per buffer). The host fills
// both buffers word by word; every K-pixel read at every start address is
// compared with a model; compute-side pixel writes with partial word enables
// update only the enabled words; a host write in the same cycle as a compute
// write is refused (hwr_ready low) and leaves the memory unchanged.
module tb_fmap_memory;
  localparam int K = 3, P = 2, TW = 8, NPIX = 36, DEPTH = NPIX / K;
  localparam int WB = 8 * ((TW + 4) / 5), PB = P * WB;
  localparam int AW = $clog2(DEPTH * K);
  logic clk = 0;
  always #5 clk = ~clk;
  logic rd_en = 0, rd_buf = 0, cwr_en = 0, cwr_buf = 0, hwr_en = 0, hwr_buf = 0, hwr_ready;
  logic [AW-1:0] rd_addr, cwr_addr, hwr_addr;
  logic [K*PB-1:0] rd_data;
  logic [P-1:0] cwr_we;
  logic [PB-1:0] cwr_data;
  logic [0:0] hwr_word;
  logic [WB-1:0] hwr_data;
  logic [WB-1:0] model [2][NPIX][P];
  int checks = 0, failures = 0, refused = 0;

  fmap_memory #(.K(K), .P(P), .TW(TW), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rd_en_i(rd_en), .rd_buf_i(rd_buf), .rd_addr_i(rd_addr), .rd_data_o(rd_data),
    .cwr_en_i(cwr_en), .cwr_buf_i(cwr_buf), .cwr_addr_i(cwr_addr), .cwr_word_en_i(cwr_we),
    .cwr_data_i(cwr_data), .hwr_en_i(hwr_en), .hwr_buf_i(hwr_buf), .hwr_addr_i(hwr_addr),
    .hwr_word_i(hwr_word), .hwr_data_i(hwr_data), .hwr_ready_o(hwr_ready)
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic check_reads();
    for (int b = 0; b < 2; b++)
      for (int a = 0; a <= NPIX - K; a++) begin
        rd_en = 1; rd_buf = b[0]; rd_addr = AW'(a);
        tick();
        rd_en = 0;
        for (int j = 0; j < K; j++)
          for (int w = 0; w < P; w++) begin
            checks++;
            if (rd_data[j*PB + w*WB +: WB] !== model[b][a+j][w]) begin
              failures++;
              if (failures < 10) $display("FAIL buf %0d addr %0d pix %0d word %0d", b, a, j, w);
            end
          end
      end
  endtask

  initial begin
    tick();
    for (int b = 0; b < 2; b++)
      for (int n = 0; n < NPIX; n++)
        for (int w = 0; w < P; w++) begin
          hwr_en = 1; hwr_buf = b[0]; hwr_addr = AW'(n); hwr_word = w[0];
          hwr_data = WB'($urandom);
          #1;
          checks++;
          if (!hwr_ready) failures++;
          model[b][n][w] = hwr_data;
          tick();
        end
    hwr_en = 0;
    check_reads();
    // compute writes, some colliding with host writes
    for (int i = 0; i < 80; i++) begin
      int b, n, hn;
      b = $urandom_range(1); n = $urandom_range(NPIX - 1);
      cwr_en = 1; cwr_buf = b[0]; cwr_addr = AW'(n);
      cwr_we = P'($urandom_range((1 << P) - 1));
      cwr_data = PB'({$urandom, $urandom});
      for (int w = 0; w < P; w++) if (cwr_we[w]) model[b][n][w] = cwr_data[w*WB +: WB];
      hn = (n + 1) % NPIX;
      hwr_en = (i % 3 == 0); hwr_buf = b[0]; hwr_addr = AW'(hn); hwr_word = 1'b0;
      hwr_data = WB'($urandom);
      #1;
      if (hwr_en) begin
        checks++;
        if (hwr_ready) begin failures++; $display("FAIL host not refused"); end
        refused++;
      end
      tick();
    end
    cwr_en = 0; hwr_en = 0;
    check_reads();
    checks++;
    if (refused == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
