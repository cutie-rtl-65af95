// threshold_unit: the threshold decider of one OCU with its threshold FIFO.
//
// The FIFO holds one {high, low} pair of signed 16-bit thresholds per layer
// (bits [31:16] high, [15:0] low), pushed by the host and replayed for each
// inference (see replay_fifo). The decider compares the pooled or direct
// pre-activation with the pair of the current layer:
//   val > high -> +1,  val < low -> -1,  otherwise 0.
// Two programmable thresholds and a ternary result follow the paper; which
// half holds which threshold and the strict comparisons are this design's
// choice. The decision is combinational; the queue is clocked.
//
// Lint note: the threshold queue's count, full and last outputs are not
// needed here; the layer queue in the top reports them for all OCUs.
module threshold_unit
  import cutie_pkg::*;
#(
  parameter int unsigned L = 8
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   clear_i,
  input  logic                   push_i,
  input  logic [THR_W-1:0]       thr_i,
  input  logic                   rewind_i,
  input  logic                   advance_i,
  input  logic signed [PV_W-1:0] val_i,
  output trit_t                  trit_o
);
  logic [THR_W-1:0] head;
  logic signed [PV_W-1:0] thr_lo, thr_hi;
  logic [$clog2(L+1)-1:0] count;
  logic full, last;

  replay_fifo #(.WIDTH(THR_W), .DEPTH(L)) u_thr_fifo (
    .clk_i, .rst_ni, .clear_i, .push_i, .data_i(thr_i),
    .rewind_i, .advance_i, .head_o(head), .count_o(count),
    .full_o(full), .last_o(last)
  );

  assign thr_lo = head[PV_W-1:0];
  assign thr_hi = head[THR_W-1:PV_W];

  always_comb begin
    if (val_i > thr_hi)      trit_o = TRIT_POS;
    else if (val_i < thr_lo) trit_o = TRIT_NEG;
    else                     trit_o = TRIT_ZERO;
  end
endmodule
