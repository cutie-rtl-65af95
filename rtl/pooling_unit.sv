// pooling_unit: max / average pooling inside one OCU.
//
// The convolution results of a layer arrive in raster order (left to right,
// top to bottom), one per cycle with valid_i. A pooling window of S x S
// results is reduced with an Add/Max ALU, a register holding the running
// value of the current window row and a FIFO that keeps the partial result of
// every window of the current window row until the next image row reaches it
// (the schedule of the paper's Fig. 6):
//   first column of a window, first window row: start from the new value;
//   first column, later rows:  combine with the partial popped from the FIFO;
//   other columns:             combine with the register;
//   last column, not last row: push the partial into the FIFO;
//   last column, last row:     the window is complete, out_valid_o is high.
// Average pooling only sums (the offline thresholds are scaled instead). With
// pooling off, the 12-bit value is sign-extended to 16 bits and passed
// through (the "12b->16b" path) and out_valid_o follows valid_i.
// Outputs are combinational; the register and FIFO update on the clock edge
// of a valid cycle and are idle (silenced) otherwise. The flags come from the
// window scheduler in pool_i. FIFO depth: windows per row (DEPTH).
//
// Lint note: the FIFO's empty and full flags are not needed here, the
// schedule never pops an empty or pushes a full FIFO (the FIFO asserts it).
module pooling_unit
  import cutie_pkg::*;
#(
  parameter int unsigned IN_W  = 12,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   valid_i,
  input  pool_ctl_t              pool_i,
  input  logic signed [IN_W-1:0] val_i,
  output logic                   out_valid_o,
  output logic signed [PV_W-1:0] val_o
);
  logic signed [PV_W-1:0] ext, acc_q, prev, combined, fifo_head;
  logic fifo_push, fifo_pop, fifo_empty, fifo_full;

  assign ext = PV_W'(val_i);

  always_comb begin
    if (pool_i.first_col) prev = pool_i.first_row ? '0 : fifo_head;
    else                  prev = acc_q;
    if (pool_i.first_col && pool_i.first_row) combined = ext;
    else if (pool_i.pool_avg)                 combined = prev + ext;
    else                                      combined = (ext > prev) ? ext : prev;
  end

  assign fifo_push = valid_i && pool_i.pool_en && pool_i.last_col && !pool_i.last_row;
  assign fifo_pop  = valid_i && pool_i.pool_en && pool_i.first_col && !pool_i.first_row;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) acc_q <= '0;
    else if (valid_i && pool_i.pool_en && !pool_i.last_col) acc_q <= combined;
  end

  sync_fifo #(.WIDTH(PV_W), .DEPTH(DEPTH)) u_fifo (
    .clk_i, .rst_ni, .clear_i(1'b0),
    .push_i(fifo_push), .data_i(combined), .pop_i(fifo_pop),
    .head_o(fifo_head), .empty_o(fifo_empty), .full_o(fifo_full)
  );

  assign val_o       = pool_i.pool_en ? combined : ext;
  assign out_valid_o = valid_i && (!pool_i.pool_en || (pool_i.last_col && pool_i.last_row));
endmodule
