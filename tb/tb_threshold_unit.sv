// tb_threshold_unit: pushes a threshold pair per layer, steps through the
// layers twice (advance / rewind) and checks the ternary decision for values
// below, between, at and above the thresholds.
module tb_threshold_unit;
  import cutie_ref_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, push = 0, rewind = 0, advance = 0;
  logic [31:0] thr;
  logic signed [15:0] val;
  logic [1:0] trit;
  int lo[L], hi[L];
  int checks = 0, failures = 0;

  threshold_unit #(.L(L)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .push_i(push), .thr_i(thr),
    .rewind_i(rewind), .advance_i(advance), .val_i(val), .trit_o(trit)
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int l = 0; l < L; l++) begin
      lo[l] = int'($urandom_range(400)) - 300;
      hi[l] = lo[l] + int'($urandom_range(200));
      push = 1; thr = {16'(hi[l]), 16'(lo[l])};
      @(posedge clk); #1;
    end
    push = 0;
    for (int pass = 0; pass < 2; pass++) begin
      rewind = 1; @(posedge clk); #1; rewind = 0;
      for (int l = 0; l < L; l++) begin
        int tv[6];
        tv = '{lo[l] - 1, lo[l], hi[l], hi[l] + 1, -2000, 2000};
        for (int r = 0; r < 26; r++) begin
          int v, exp;
          v = (r < 6) ? tv[r] : int'($urandom_range(1200)) - 600;
          val = 16'(v); #1;
          exp = (v > hi[l]) ? 1 : (v < lo[l]) ? -1 : 0;
          checks++;
          if (t2i(trit) != exp) begin
            failures++;
            $display("FAIL layer %0d v=%0d lo=%0d hi=%0d got %0d", l, v, lo[l], hi[l], t2i(trit));
          end
        end
        advance = 1; @(posedge clk); #1; advance = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
