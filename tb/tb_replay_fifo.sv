// tb_replay_fifo: checks the replayable layer / threshold queue: push order,
// head, advance, last flag, rewind for a second pass, full handling and
// clear.
module tb_replay_fifo;
  localparam int W = 38, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, push = 0, rewind = 0, advance = 0;
  logic [W-1:0] din, head;
  logic [$clog2(D+1)-1:0] count;
  logic full, last;
  int checks = 0, failures = 0;

  replay_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .push_i(push), .data_i(din),
    .rewind_i(rewind), .advance_i(advance), .head_o(head), .count_o(count),
    .full_o(full), .last_o(last)
  );

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] vals[D];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    chk(count == 0, "empty after reset");
    for (int n = 5; n <= D; n += 3) begin
      // fill n entries
      for (int i = 0; i < n; i++) begin
        vals[i] = {$urandom, $urandom};
        push = 1; din = vals[i];
        @(posedge clk); #1;
        push = 0;
      end
      chk(count == n, "count after pushes");
      chk(full == (n == D), "full flag");
      for (int pass = 0; pass < 2; pass++) begin
        rewind = 1; @(posedge clk); #1; rewind = 0;
        for (int i = 0; i < n; i++) begin
          chk(head == vals[i], $sformatf("head pass %0d entry %0d", pass, i));
          chk(last == (i == n - 1), "last flag");
          advance = 1; @(posedge clk); #1; advance = 0;
        end
        chk(head == vals[n-1], "head stays on last entry");
      end
      clear = 1; @(posedge clk); #1; clear = 0;
      chk(count == 0, "clear empties");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
