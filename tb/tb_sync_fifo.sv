// tb_sync_fifo: random push/pop traffic against a queue model. Checks the
// head, empty and full flags after every cycle and the clear input.
module tb_sync_fifo;
  localparam int W = 16, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, push = 0, pop = 0, empty, full;
  logic [W-1:0] din = '0, head;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .push_i(push), .data_i(din),
    .pop_i(pop), .head_o(head), .empty_o(empty), .full_o(full)
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int bias;
      bias = ((it / 200) % 2) ? 70 : 30;
      push  = (q.size() < D || pop) && ($urandom_range(0, 99) < bias);
      pop   = 0;
      if (q.size() > 0) pop = $urandom_range(0, 99) >= bias;
      if (q.size() == D) push = 0;
      clear = (it % 997 == 996);
      din   = W'($urandom);
      @(posedge clk);
      if (clear) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
      #1;
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == D), "full flag");
      if (q.size() > 0) chk(head == q[0], "head value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
