// ocu_stage: one stage of the pipelined OCU array.
//
// The activation windows are broadcast to the OCUs through a chain of P
// stages. Each stage owns a pipeline register for the window (and its pooling
// control) and NOCU = N_O/P OCUs. The register loads only while the stage is
// active (active_i), so a stage whose output channels the current layer does
// not use sees no toggling input: this is how the paper silences clusters of
// compute units. The registered window is also the input of the next stage
// (win_*_o). Each OCU receives its weight words from its own weight memory
// bank through a decompressor (WORD_BITS -> TW trits); all OCUs of the core
// load the same word index in the same cycle.
// Timing: a window on win_*_i in cycle t is in this stage's register in
// cycle t+1 and its result on out_trits_o in cycle t+2.
// Thresholds are pushed to OCU j of the stage with thr_we_i[j].
//
// Lint note: all OCUs of a stage see the same window and pooling flags, so
// their valid outputs are identical; only OCU 0's is used.
module ocu_stage
  import cutie_pkg::*;
#(
  parameter int unsigned NOCU       = 64,
  parameter int unsigned N          = 1152,
  parameter int unsigned TW         = 64,
  parameter int unsigned L          = 8,
  parameter int unsigned POOL_DEPTH = 16,
  localparam int unsigned WORD_BITS = 8 * groups5(TW),
  localparam int unsigned NWORDS    = (N + TW - 1) / TW,
  localparam int unsigned WW        = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      active_i,
  // window in / out of the broadcast chain
  input  logic                      win_valid_i,
  input  logic [2*N-1:0]            win_act_i,
  input  pool_ctl_t                 win_pool_i,
  output logic                      win_valid_o,
  output logic [2*N-1:0]            win_act_o,
  output pool_ctl_t                 win_pool_o,
  // weight loading
  input  logic                      wb_we_i,
  input  logic                      wb_sel_i,
  input  logic [WW-1:0]             wb_word_i,
  input  logic [NOCU*WORD_BITS-1:0] wb_data_i,
  input  logic                      wb_rd_sel_i,
  // thresholds
  input  logic                      thr_clear_i,
  input  logic [NOCU-1:0]           thr_we_i,
  input  logic [THR_W-1:0]          thr_i,
  input  logic                      thr_rewind_i,
  input  logic                      thr_advance_i,
  // results
  output logic                      out_valid_o,
  output logic [2*NOCU-1:0]         out_trits_o
);
  logic [NOCU-1:0] ocu_valid;

  // silenceable pipeline register
  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      win_valid_o <= 1'b0;
      win_pool_o  <= '0;
    end else begin
      win_valid_o <= win_valid_i && active_i;
      if (win_valid_i && active_i) win_pool_o <= win_pool_i;
    end
  end

  always_ff @(posedge clk_i) begin
    if (win_valid_i && active_i) win_act_o <= win_act_i;
  end

  for (genvar j = 0; j < NOCU; j++) begin : g_ocu
    logic [2*TW-1:0] wb_trits;

    trit_decompress #(.N(TW)) u_wdec (
      .code_i(wb_data_i[j*WORD_BITS +: WORD_BITS]), .trits_o(wb_trits)
    );

    ocu #(.N(N), .TW(TW), .L(L), .POOL_DEPTH(POOL_DEPTH)) u_ocu (
      .clk_i, .rst_ni,
      .wb_we_i, .wb_sel_i, .wb_word_i, .wb_data_i(wb_trits), .wb_rd_sel_i,
      .thr_clear_i, .thr_push_i(thr_we_i[j]), .thr_i, .thr_rewind_i, .thr_advance_i,
      .valid_i(win_valid_o), .act_i(win_act_o), .pool_i(win_pool_o),
      .out_valid_o(ocu_valid[j]), .out_trit_o(out_trits_o[2*j +: 2])
    );
  end

  assign out_valid_o = ocu_valid[0];
endmodule
