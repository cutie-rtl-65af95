// tb_ocu_tmac: checks the unrolled ternary multiply-accumulate at the full
// size (K*K*N_I = 1152 products) against an integer dot product, for random
// activations and weights of different sparsity and for the extreme sums
// +1152 and -1152.
module tb_ocu_tmac;
  import cutie_ref_pkg::*;
  localparam int N = 1152;
  logic [2*N-1:0] act, wgt;
  logic signed [11:0] sum;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ocu_tmac #(.N(N)) dut (.act_i(act), .wgt_i(wgt), .sum_o(sum));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      int exp;
      exp = 0;
      for (int i = 0; i < N; i++) begin
        int a, w;
        case (it)
          0: begin a = 1; w = 1; end
          1: begin a = -1; w = 1; end
          2: begin a = -1; w = -1; end
          default: begin a = rand_trit(it % 90); w = rand_trit((it * 7) % 90); end
        endcase
        act[2*i +: 2] = i2t(a);
        wgt[2*i +: 2] = i2t(w);
        exp += a * w;
      end
      #1;
      checks++;
      if (int'(sum) != exp) begin
        failures++;
        if (failures < 5) $display("FAIL it=%0d sum=%0d exp=%0d", it, sum, exp);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
