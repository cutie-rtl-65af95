// tb_weight_memory: writes random words into every bank and address of a
// small weight memory, then reads all banks in parallel at every address and
// compares with a model; checks the one-cycle read latency.
module tb_weight_memory;
  localparam int NB = 6, DEPTH = 20, WB = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [$clog2(NB)-1:0] wbank;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  logic [WB-1:0] wdata;
  logic [NB*WB-1:0] rdata;
  logic [WB-1:0] model [NB][DEPTH];
  int checks = 0, failures = 0;

  weight_memory #(.NB(NB), .DEPTH(DEPTH), .WORD_BITS(WB)) dut (
    .clk_i(clk), .wr_en_i(we), .wr_bank_i(wbank), .wr_addr_i(waddr), .wr_data_i(wdata),
    .rd_en_i(re), .rd_addr_i(raddr), .rd_data_o(rdata)
  );

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int b = 0; b < NB; b++)
      for (int a = 0; a < DEPTH; a++) begin
        we = 1; wbank = b[$clog2(NB)-1:0]; waddr = a[$clog2(DEPTH)-1:0];
        wdata = WB'($urandom); model[b][a] = wdata;
        @(posedge clk); #1;
      end
    we = 0;
    for (int a = DEPTH - 1; a >= 0; a--) begin
      re = 1; raddr = a[$clog2(DEPTH)-1:0];
      @(posedge clk); #1;
      re = 0;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rdata[b*WB +: WB] !== model[b][a]) begin
          failures++;
          $display("FAIL bank %0d addr %0d: %h vs %h", b, a, rdata[b*WB +: WB], model[b][a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
