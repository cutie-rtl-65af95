// tb_trit_compress: checks the 5-trits-per-byte compression bank.
// Random 64-trit words (various zero densities, plus all-zero, all +1 and
// all -1) are compressed and every byte is compared with the base-3 code
// computed independently in cutie_ref_pkg.
module tb_trit_compress;
  import cutie_ref_pkg::*;
  localparam int N = 64;
  localparam int G = (N + 4) / 5;

  logic [2*N-1:0] trits;
  logic [8*G-1:0] code;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  trit_compress #(.N(N)) dut (.trits_i(trits), .code_o(code));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v[];
    logic [4095:0] exp;
    v = new[N];
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < N; i++) begin
        case (it)
          0: v[i] = 0;
          1: v[i] = 1;
          2: v[i] = -1;
          default: v[i] = rand_trit(it % 100);
        endcase
        trits[2*i +: 2] = i2t(v[i]);
      end
      #1;
      exp = ref_pack(v, 0, N);
      checks++;
      if (code !== exp[8*G-1:0]) begin
        failures++;
        if (failures < 5) $display("mismatch it=%0d got %h exp %h", it, code, exp[8*G-1:0]);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
