// tb_weight_buffer: loads different kernels into both halves of the double
// weight buffer, word by word, and checks that the read side shows the
// selected buffer and that loading one buffer leaves the other unchanged.
module tb_weight_buffer;
  localparam int N = 72, TW = 8, NWORDS = N / TW;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, wsel = 0, rsel = 0;
  logic [$clog2(NWORDS)-1:0] word;
  logic [2*TW-1:0] wdata;
  logic [2*N-1:0] wout;
  logic [2*N-1:0] model [2];
  int checks = 0, failures = 0;

  weight_buffer #(.N(N), .TW(TW)) dut (
    .clk_i(clk), .wr_en_i(we), .wr_sel_i(wsel), .wr_word_i(word), .wr_data_i(wdata),
    .rd_sel_i(rsel), .weights_o(wout)
  );

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input logic sel);
    for (int w = 0; w < NWORDS; w++) begin
      we = 1; wsel = sel; word = w[$clog2(NWORDS)-1:0];
      for (int i = 0; i < TW; i++) wdata[2*i +: 2] = cutie_ref_pkg::i2t(cutie_ref_pkg::rand_trit(30));
      model[sel][2*TW*w +: 2*TW] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
  endtask

  task automatic check_both();
    for (int s = 0; s < 2; s++) begin
      rsel = s[0]; #1;
      checks++;
      if (wout !== model[s]) begin failures++; $display("FAIL buffer %0d", s); end
    end
  endtask

  initial begin
    @(posedge clk);
    load(0);
    load(1);
    check_both();
    for (int r = 0; r < 6; r++) begin
      rsel = r[0];
      load(!r[0]);   // load the buffer that is not being read
      check_both();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
