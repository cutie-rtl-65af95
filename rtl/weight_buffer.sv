// weight_buffer: the double weight buffer of one OCU.
//
// Two buffers of N = K*K*N_I trits, each holding the complete kernel of one
// output channel for one layer. While the OCU computes with the buffer chosen
// by rd_sel_i, the next layer's kernel is written into the other one, TW
// trits per cycle (wr_word_i selects trits wr_word_i*TW .. +TW-1 of buffer
// wr_sel_i). Both buffers are read in full and in parallel; the output is
// combinational. Trit order in a kernel: ((ky*K)+kx)*N_I + ci.
// In silicon the paper builds this from latches (4*K*K*N_I bits); here it is
// an array of enabled flip-flops, which behaves the same at cycle level.
module weight_buffer #(
  parameter int unsigned N  = 1152,
  parameter int unsigned TW = 64,
  localparam int unsigned NWORDS = (N + TW - 1) / TW,
  localparam int unsigned WW     = (NWORDS > 1) ? $clog2(NWORDS) : 1
) (
  input  logic            clk_i,
  input  logic            wr_en_i,
  input  logic            wr_sel_i,
  input  logic [WW-1:0]   wr_word_i,
  input  logic [2*TW-1:0] wr_data_i,
  input  logic            rd_sel_i,
  output logic [2*N-1:0]  weights_o
);
  logic [2*NWORDS*TW-1:0] buf0, buf1;

  always_ff @(posedge clk_i) begin
    if (wr_en_i && int'(wr_word_i) < NWORDS) begin
      if (wr_sel_i) buf1[int'(wr_word_i)*2*TW +: 2*TW] <= wr_data_i;
      else          buf0[int'(wr_word_i)*2*TW +: 2*TW] <= wr_data_i;
    end
  end

  assign weights_o = rd_sel_i ? buf1[2*N-1:0] : buf0[2*N-1:0];
endmodule
