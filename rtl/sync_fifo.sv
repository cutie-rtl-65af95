// sync_fifo: small synchronous FIFO used as the pooling unit's line FIFO.
//
// DEPTH entries of WIDTH bits in a register array with read and write
// pointers. head_o shows the oldest entry combinationally; push_i and pop_i
// may be asserted in the same cycle (also when the FIFO is empty only if the
// pushed value is not the one being popped, which the pooling schedule never
// needs). Synchronous, active-low reset of the pointers only.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             push_i,
  input  logic [WIDTH-1:0] data_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] head_o,
  output logic             empty_o,
  output logic             full_o
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  assign head_o  = mem[rd_ptr];
  assign empty_o = (count == 0);
  assign full_o  = (count == (AW+1)'(DEPTH));

  always_ff @(posedge clk_i) begin
    if (!rst_ni || clear_i) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push_i) begin
        mem[wr_ptr] <= data_i;
        wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop_i) begin
        rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      end
      count <= count + (AW+1)'(push_i) - (AW+1)'(pop_i);
    end
  end

  // a well-formed pooling schedule never overflows or underflows the FIFO
  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i && !pop_i |-> !full_o)
    else $error("sync_fifo overflow");
  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o)
    else $error("sync_fifo underflow");
endmodule
