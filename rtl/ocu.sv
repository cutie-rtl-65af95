// ocu: Output Channel Compute Unit. Computes one output channel of one output
// pixel per cycle.
//
// Datapath (left to right): the double weight buffer supplies all
// N = K*K*N_I weights of this channel; ocu_tmac multiplies them with the
// K x K x N_I activation window and adds the products in one combinational
// step (12-bit result); the pooling unit optionally reduces several results
// to one (16 bit); the threshold unit turns the value into a trit using the
// current layer's two thresholds. The trit is registered, so a window
// presented in cycle t gives out_trit_o / out_valid_o in cycle t+1 (also for
// pooling layers, where out_valid_o is only high on the last window of a
// pooling window). Nothing in the OCU moves when valid_i is low.
// The structure follows the paper's OCU figure; the output register is this
// design's choice (the paper's OCUs feed pipeline registers).
module ocu
  import cutie_pkg::*;
#(
  parameter int unsigned N          = 1152,
  parameter int unsigned TW         = 64,
  parameter int unsigned L          = 8,
  parameter int unsigned POOL_DEPTH = 16,
  localparam int unsigned NWORDS = (N + TW - 1) / TW,
  localparam int unsigned WW     = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // weight buffer loading
  input  logic             wb_we_i,
  input  logic             wb_sel_i,
  input  logic [WW-1:0]    wb_word_i,
  input  logic [2*TW-1:0]  wb_data_i,
  input  logic             wb_rd_sel_i,
  // threshold queue
  input  logic             thr_clear_i,
  input  logic             thr_push_i,
  input  logic [THR_W-1:0] thr_i,
  input  logic             thr_rewind_i,
  input  logic             thr_advance_i,
  // window
  input  logic             valid_i,
  input  logic [2*N-1:0]   act_i,
  input  pool_ctl_t        pool_i,
  // result
  output logic             out_valid_o,
  output trit_t            out_trit_o
);
  localparam int unsigned CW = $clog2(N + 1);

  logic [2*N-1:0]         weights;
  logic signed [CW:0]     sum;
  logic signed [PV_W-1:0] pooled;
  logic                   pooled_valid;
  trit_t                  trit;

  weight_buffer #(.N(N), .TW(TW)) u_wbuf (
    .clk_i, .wr_en_i(wb_we_i), .wr_sel_i(wb_sel_i), .wr_word_i(wb_word_i),
    .wr_data_i(wb_data_i), .rd_sel_i(wb_rd_sel_i), .weights_o(weights)
  );

  ocu_tmac #(.N(N)) u_tmac (.act_i, .wgt_i(weights), .sum_o(sum));

  pooling_unit #(.IN_W(CW+1), .DEPTH(POOL_DEPTH)) u_pool (
    .clk_i, .rst_ni, .valid_i, .pool_i, .val_i(sum),
    .out_valid_o(pooled_valid), .val_o(pooled)
  );

  threshold_unit #(.L(L)) u_thr (
    .clk_i, .rst_ni, .clear_i(thr_clear_i), .push_i(thr_push_i), .thr_i,
    .rewind_i(thr_rewind_i), .advance_i(thr_advance_i),
    .val_i(pooled), .trit_o(trit)
  );

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      out_valid_o <= 1'b0;
      out_trit_o  <= TRIT_ZERO;
    end else begin
      out_valid_o <= pooled_valid;
      if (pooled_valid) out_trit_o <= trit;
    end
  end
endmodule
