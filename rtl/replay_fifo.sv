// replay_fifo: the layer instruction queue, and (per OCU) the threshold
// queue.
//
// The host pushes up to DEPTH entries during setup. The core reads them in
// order with a read pointer that does not discard them: advance_i steps to the
// next entry, rewind_i returns to the first one. That way one set of layer
// instructions and thresholds is replayed for every inference, matching the
// core's use of pre-loaded network data for many input feature maps.
// clear_i empties the queue. head_o is the entry at the read pointer
// (combinational), count_o the number of entries stored, last_o is high when
// the head is the final entry. Pushing into a full queue is ignored and
// flagged by an assertion.
module replay_fifo #(
  parameter int unsigned WIDTH = 38,
  parameter int unsigned DEPTH = 8
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     clear_i,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         data_i,
  input  logic                     rewind_i,
  input  logic                     advance_i,
  output logic [WIDTH-1:0]         head_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic                     full_o,
  output logic                     last_o
);
  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [CW-1:0]    count;
  logic [AW-1:0]    rd_ptr;

  assign count_o = count;
  assign full_o  = (count == CW'(DEPTH));
  assign head_o  = mem[rd_ptr];
  assign last_o  = (CW'(rd_ptr) + 1'b1 == count);

  always_ff @(posedge clk_i) begin
    if (!rst_ni || clear_i) begin
      count  <= '0;
      rd_ptr <= '0;
    end else begin
      if (push_i && !full_o) begin
        mem[count[AW-1:0]] <= data_i;
        count <= count + 1'b1;
      end
      if (rewind_i) begin
        rd_ptr <= '0;
      end else if (advance_i && (CW'(rd_ptr) + 1'b1 < count)) begin
        rd_ptr <= rd_ptr + 1'b1;
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> !full_o)
    else $error("replay_fifo: push into full queue");
endmodule
