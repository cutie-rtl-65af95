// tb_trit_decompress: checks the decompression bank. Every byte code 0..242
// is placed in every byte position of a 64-trit word (13 bytes, the last one
// partly used) and the output trits are compared with an independent base-3
// decoding; random words of valid codes are checked as well.
module tb_trit_decompress;
  import cutie_ref_pkg::*;
  localparam int N = 64;
  localparam int G = (N + 4) / 5;

  logic [8*G-1:0] code;
  logic [2*N-1:0] trits;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  trit_decompress #(.N(N)) dut (.code_i(code), .trits_o(trits));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_word();
    int t[5];
    int bad;
    bad = 0;
    #1;
    for (int g = 0; g < G; g++) begin
      ref_decode5(code[8*g +: 8], t);
      for (int i = 0; i < 5; i++)
        if (5*g + i < N && t2i(trits[2*(5*g+i) +: 2]) != t[i]) bad = 1;
    end
    checks++;
    if (bad) begin
      failures++;
      if (failures < 5) $display("mismatch code=%h trits=%h", code, trits);
    end
    @(posedge clk);
  endtask

  initial begin
    for (int c = 0; c < 243; c++) begin
      for (int g = 0; g < G; g++) code[8*g +: 8] = 8'((c + 7*g) % 243);
      check_word();
    end
    for (int it = 0; it < 200; it++) begin
      for (int g = 0; g < G; g++) code[8*g +: 8] = 8'($urandom_range(242));
      check_word();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
