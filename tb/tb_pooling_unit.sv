// tb_pooling_unit: feeds raster-ordered convolution results of several
// maps (widths 4..9, pooling 2x2, 3x3, 4x4, max and sum) through the pooling
// unit with the window flags a scheduler produces, and compares every
// completed window with a directly computed max / sum. Also checks the
// pass-through of unpooled values and that out_valid is only raised at the
// last element of each pooling window.
module tb_pooling_unit;
  import cutie_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic valid = 0;
  pool_ctl_t pc;
  logic signed [11:0] vin;
  logic out_valid;
  logic signed [15:0] vout;
  int checks = 0, failures = 0;

  pooling_unit #(.IN_W(12), .DEPTH(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .pool_i(pc), .val_i(vin),
    .out_valid_o(out_valid), .val_o(vout)
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_map(input int w, input int h, input int ps, input logic avg, input logic en);
    int m[];
    m = new[w*h];
    foreach (m[i]) m[i] = int'($urandom_range(2000)) - 1000;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int s;
        s = en ? ps : 1;
        valid = 1;
        vin = 12'(m[y*w+x]);
        pc.pool_en = en; pc.pool_avg = avg;
        pc.first_col = (x % s == 0); pc.last_col = (x % s == s - 1);
        pc.first_row = (y % s == 0); pc.last_row = (y % s == s - 1);
        #1;
        if (!en) begin
          checks++;
          if (!out_valid || int'(vout) != m[y*w+x]) begin failures++; $display("FAIL passthrough"); end
        end else begin
          checks++;
          if (out_valid != (pc.last_col && pc.last_row)) begin failures++; $display("FAIL valid flag"); end
          if (out_valid) begin
            int exp;
            exp = avg ? 0 : -100000;
            for (int py = y - ps + 1; py <= y; py++)
              for (int px = x - ps + 1; px <= x; px++)
                exp = avg ? exp + m[py*w+px] : ((m[py*w+px] > exp) ? m[py*w+px] : exp);
            checks++;
            if (int'(vout) != exp) begin
              failures++;
              $display("FAIL w=%0d ps=%0d avg=%0d at (%0d,%0d): %0d vs %0d", w, ps, avg, x, y, vout, exp);
            end
          end
        end
        @(posedge clk); #1;
      end
    valid = 0;
    @(posedge clk); #1;
  endtask

  initial begin
    pc = '0; vin = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    run_map(4, 4, 2, 0, 1);
    run_map(8, 8, 2, 0, 1);
    run_map(9, 9, 3, 0, 1);   // the 9x9 / 3x3 example schedule
    run_map(9, 9, 3, 1, 1);
    run_map(8, 8, 4, 1, 1);
    run_map(4, 4, 4, 1, 1);
    run_map(6, 6, 2, 1, 1);
    run_map(5, 3, 1, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
