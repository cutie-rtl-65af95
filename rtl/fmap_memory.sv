// fmap_memory: double-buffered feature map memory with write arbitration.
//
// Two buffers (A = 0, B = 1) alternate between holding the input and the
// output feature map of the running layer. Pixels are stored in H x W x C
// order; a pixel of C channels is P words of TW trits, each word compressed
// to WORD_BITS = 8*ceil(TW/5) bits. Every buffer has M = K*P banks so that K
// adjacent pixels (pixel index a .. a+K-1) can be read in one cycle: pixel
// index n lives in bank group (n mod K) at row n / K, word w of it in bank
// (n mod K)*P + w. Bank depth is DEPTH = ceil(IW*IH/K).
//
// Ports:
//   read        rd_en_i / rd_buf_i / rd_addr_i (pixel index of the leftmost
//               pixel); rd_data_o holds K compressed pixels one cycle later,
//               pixel j at [j*PIX_BITS +: PIX_BITS]. Pixels past the end of
//               the buffer read as whatever the bank holds at row 0.
//   compute wr  cwr_*: one whole pixel, with one enable per word so that only
//               the channels of active OCU stages are written.
//   host wr     hwr_*: one word of one pixel; hwr_ready_o is low in a cycle in
//               which the compute write port uses the memory (compute writes
//               have priority: this is the write arbitration).
// The two buffers, the bank layout and the "write 1 pixel / read K pixels"
// shape follow the paper; the priority rule of the arbitration and the
// one-cycle read latency are this design's choices. Memories are plain arrays
// (standard-cell memory or SRAM in an implementation).
module fmap_memory
  import cutie_pkg::*;
#(
  parameter int unsigned K     = 3,
  parameter int unsigned P     = 2,
  parameter int unsigned TW    = 64,
  parameter int unsigned DEPTH = 342,
  localparam int unsigned WORD_BITS = 8 * groups5(TW),
  localparam int unsigned PIX_BITS  = P * WORD_BITS,
  localparam int unsigned AW        = $clog2(DEPTH * K),
  localparam int unsigned WW        = (P > 1) ? $clog2(P) : 1
) (
  input  logic                    clk_i,
  // read port
  input  logic                    rd_en_i,
  input  logic                    rd_buf_i,
  input  logic [AW-1:0]           rd_addr_i,
  output logic [K*PIX_BITS-1:0]   rd_data_o,
  // compute write port
  input  logic                    cwr_en_i,
  input  logic                    cwr_buf_i,
  input  logic [AW-1:0]           cwr_addr_i,
  input  logic [P-1:0]            cwr_word_en_i,
  input  logic [PIX_BITS-1:0]     cwr_data_i,
  // host write port
  input  logic                    hwr_en_i,
  input  logic                    hwr_buf_i,
  input  logic [AW-1:0]           hwr_addr_i,
  input  logic [WW-1:0]           hwr_word_i,
  input  logic [WORD_BITS-1:0]    hwr_data_i,
  output logic                    hwr_ready_o
);
  localparam int unsigned M  = K * P;
  localparam int unsigned RW = $clog2(DEPTH);

  logic [WORD_BITS-1:0] mem [2][M][DEPTH];

  // ---------------- write arbitration ----------------
  logic                 w_buf;
  logic [M-1:0]         w_bank_en;
  logic [RW-1:0]        w_row;
  logic [WORD_BITS-1:0] w_data [M];

  assign hwr_ready_o = !cwr_en_i;

  always_comb begin
    int unsigned grp;
    int unsigned row;
    w_bank_en = '0;
    w_buf     = cwr_en_i ? cwr_buf_i : hwr_buf_i;
    grp       = cwr_en_i ? int'(cwr_addr_i) % K : int'(hwr_addr_i) % K;
    row       = cwr_en_i ? int'(cwr_addr_i) / K : int'(hwr_addr_i) / K;
    w_row     = RW'(row);
    for (int b = 0; b < int'(M); b++) begin
      w_data[b] = cwr_en_i ? cwr_data_i[(b % P)*WORD_BITS +: WORD_BITS] : hwr_data_i;
    end
    if (row < DEPTH) begin
      if (cwr_en_i) begin
        for (int w = 0; w < int'(P); w++) w_bank_en[grp*P + w] = cwr_word_en_i[w];
      end else if (hwr_en_i) begin
        w_bank_en[grp*P + int'(hwr_word_i)] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    for (int b = 0; b < int'(M); b++) begin
      if (w_bank_en[b]) mem[w_buf][b][w_row] <= w_data[b];
    end
  end

  // ---------------- K-pixel read ----------------
  always_ff @(posedge clk_i) begin
    if (rd_en_i) begin
      for (int j = 0; j < int'(K); j++) begin
        int unsigned n, grp, row;
        n   = int'(rd_addr_i) + j;
        grp = n % K;
        row = n / K;
        if (row >= DEPTH) row = 0;
        for (int w = 0; w < int'(P); w++) begin
          rd_data_o[j*PIX_BITS + w*WORD_BITS +: WORD_BITS] <= mem[rd_buf_i][grp*P + w][RW'(row)];
        end
      end
    end
  end

  assert property (@(posedge clk_i) hwr_en_i |-> P == 1 || int'(hwr_word_i) < P)
    else $error("fmap_memory: host word index out of range");
endmodule
