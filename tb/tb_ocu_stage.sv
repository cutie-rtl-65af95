// tb_ocu_stage: checks one pipeline stage of 4 OCUs (72-trit windows).
// Compressed weight words are loaded into every OCU through the stage's
// decompressors, each OCU gets its own thresholds. An active stage must pass
// each window to its output register one cycle later and give all four
// channel results two cycles after the window was presented. An inactive
// (silenced) stage must keep its register unchanged and produce nothing.
module tb_ocu_stage;
  import cutie_pkg::*;
  import cutie_ref_pkg::*;
  localparam int NOCU = 4, N = 72, TW = 8, L = 2, NW = N / TW;
  localparam int WB = 8 * ((TW + 4) / 5);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic active = 1, vin = 0, vout;
  logic [2*N-1:0] ain, aout;
  pool_ctl_t pin, pout;
  logic wb_we = 0, wb_sel = 0, wb_rd_sel = 0;
  logic [$clog2(NW)-1:0] wb_word;
  logic [NOCU*WB-1:0] wb_data;
  logic thr_clear = 0, thr_rewind = 0, thr_advance = 0;
  logic [NOCU-1:0] thr_we = '0;
  logic [31:0] thr;
  logic out_valid;
  logic [2*NOCU-1:0] out_trits;
  int w[NOCU][];
  int lo[NOCU], hi[NOCU];
  int checks = 0, failures = 0;

  ocu_stage #(.NOCU(NOCU), .N(N), .TW(TW), .L(L), .POOL_DEPTH(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .active_i(active),
    .win_valid_i(vin), .win_act_i(ain), .win_pool_i(pin),
    .win_valid_o(vout), .win_act_o(aout), .win_pool_o(pout),
    .wb_we_i(wb_we), .wb_sel_i(wb_sel), .wb_word_i(wb_word), .wb_data_i(wb_data), .wb_rd_sel_i(wb_rd_sel),
    .thr_clear_i(thr_clear), .thr_we_i(thr_we), .thr_i(thr), .thr_rewind_i(thr_rewind),
    .thr_advance_i(thr_advance), .out_valid_o(out_valid), .out_trits_o(out_trits)
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

  initial begin
    logic [2*N-1:0] prev;
    int exp[NOCU];
    pin = '0; pin.first_col = 1; pin.last_col = 1; pin.first_row = 1; pin.last_row = 1;
    repeat (2) tick();
    rst_n = 1;
    tick();
    for (int o = 0; o < NOCU; o++) begin
      w[o] = new[N];
      foreach (w[o][i]) w[o][i] = rand_trit(40);
      lo[o] = -o - 1; hi[o] = o + 1;
    end
    for (int j = 0; j < NW; j++) begin
      wb_we = 1; wb_sel = 0; wb_word = j[$clog2(NW)-1:0];
      for (int o = 0; o < NOCU; o++) begin
        logic [4095:0] pk;
        pk = ref_pack(w[o], j * TW, TW);
        wb_data[o*WB +: WB] = pk[WB-1:0];
      end
      tick();
    end
    wb_we = 0;
    for (int o = 0; o < NOCU; o++) begin
      thr_we = '0; thr_we[o] = 1'b1; thr = {16'(hi[o]), 16'(lo[o])}; tick();
    end
    thr_we = '0;
    thr_rewind = 1; tick(); thr_rewind = 0;
    for (int it = 0; it < 40; it++) begin
      active = (it % 4 != 3);
      for (int i = 0; i < N; i++) ain[2*i +: 2] = i2t(rand_trit(35));
      for (int o = 0; o < NOCU; o++) begin
        int s;
        s = 0;
        for (int i = 0; i < N; i++) s += t2i(ain[2*i +: 2]) * w[o][i];
        exp[o] = (s > hi[o]) ? 1 : (s < lo[o]) ? -1 : 0;
      end
      prev = aout;
      vin = 1;
      tick();
      vin = 0;
      if (active) begin
        chk(vout && aout == ain, "window in pipeline register");
        tick();
        chk(out_valid, "results two cycles after the window");
        for (int o = 0; o < NOCU; o++)
          chk(t2i(out_trits[2*o +: 2]) == exp[o], $sformatf("OCU %0d result", o));
      end else begin
        chk(!vout && aout == prev, "silenced stage register unchanged");
        tick();
        chk(!out_valid, "silenced stage produces nothing");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
