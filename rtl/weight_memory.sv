// weight_memory: the private weight memories of the OCUs.
//
// NB banks (one per OCU), each DEPTH words of WORD_BITS bits. A word holds
// TW compressed trits of a kernel; a layer's kernel for one OCU is
// K*K*N_I/TW consecutive words and the layers follow each other, so DEPTH =
// L*K*K*N_I/TW. The host writes one word of one bank per cycle (wr_*). For
// loading an OCU weight buffer all banks are read at the same address in one
// cycle (rd_en_i / rd_addr_i); bank b's word appears on
// rd_data_o[b*WORD_BITS +: WORD_BITS] one cycle later.
// One bank per OCU and consecutive storage of the layers follow the paper;
// the single shared read address and the read latency are this design's
// choice.
module weight_memory #(
  parameter int unsigned NB        = 128,
  parameter int unsigned DEPTH     = 144,
  parameter int unsigned WORD_BITS = 104,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                      clk_i,
  input  logic                      wr_en_i,
  input  logic [BW-1:0]             wr_bank_i,
  input  logic [AW-1:0]             wr_addr_i,
  input  logic [WORD_BITS-1:0]      wr_data_i,
  input  logic                      rd_en_i,
  input  logic [AW-1:0]             rd_addr_i,
  output logic [NB*WORD_BITS-1:0]   rd_data_o
);
  logic [WORD_BITS-1:0] mem [NB][DEPTH];

  always_ff @(posedge clk_i) begin
    if (wr_en_i && int'(wr_bank_i) < NB && int'(wr_addr_i) < DEPTH) begin
      mem[wr_bank_i][wr_addr_i] <= wr_data_i;
    end
  end

  always_ff @(posedge clk_i) begin
    if (rd_en_i) begin
      for (int b = 0; b < int'(NB); b++) begin
        rd_data_o[b*WORD_BITS +: WORD_BITS] <= mem[b][rd_addr_i];
      end
    end
  end
endmodule
