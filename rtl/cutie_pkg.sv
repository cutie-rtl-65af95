// cutie_pkg: types, constants and helper functions shared by the ternary
// inference core.
//
// Trits travel through the datapath in two's complement on two bits:
// 2'b00 = 0, 2'b01 = +1, 2'b11 = -1 (2'b10 never occurs). A vector of N trits
// is packed with trit i in bits [2i+1:2i].
//
// In memory, trits are stored five at a time in one byte (1.6 bit per trit).
// The code used here is the plain base-3 number of the five digits
// (digit = trit + 1, trit 0 of the group least significant), which gives the
// codes 0..242; codes 243..255 never occur. This is this design's own choice
// of a 5-trits-in-8-bits code; any bijective code would serve the datapath.
//
// layer_cfg_t is one entry of the layer instruction queue: everything the
// core needs to run one fused layer (convolution, optional pooling,
// thresholding). Its dimension fields are DIM_W bits wide so that the same
// struct serves every size the core is built for.
//
// Lint note: a module that imports the package uses only part of it; when
// such a module is linted on its own, the constants it does not use (for
// example THR_W, used by the threshold path only) are reported as unused.
package cutie_pkg;

  typedef logic [1:0] trit_t;

  localparam trit_t TRIT_ZERO = 2'b00;
  localparam trit_t TRIT_POS  = 2'b01;
  localparam trit_t TRIT_NEG  = 2'b11;

  // width of the dimension fields of a layer instruction
  localparam int unsigned DIM_W = 8;
  // width of the pooled / thresholded pre-activation (Fig. 5: 16 bit)
  localparam int unsigned PV_W = 16;
  // one threshold-queue entry: {high threshold, low threshold}
  localparam int unsigned THR_W = 2 * PV_W;

  typedef struct packed {
    logic [DIM_W-1:0] in_w;       // input feature map width
    logic [DIM_W-1:0] in_h;       // input feature map height
    logic [3:0]       kernel;     // odd kernel side, 1..K
    logic [1:0]       stride_x;   // 1..3
    logic [1:0]       stride_y;   // 1..3
    logic             pad;        // 1: zero padding of (kernel-1)/2 on every edge
    logic             pool_en;    // fused pooling after the convolution
    logic             pool_avg;   // 1: average (sum) pooling, 0: max pooling
    logic [2:0]       pool_size;  // pooling window side (= pooling stride)
    logic [DIM_W-1:0] out_ch;     // number of output channels in use
  } layer_cfg_t;

  // control that travels with every window through the OCU pipeline
  typedef struct packed {
    logic pool_en;
    logic pool_avg;
    logic first_row;   // first row of a pooling window
    logic first_col;   // first column of a pooling window
    logic last_row;    // last row of a pooling window
    logic last_col;    // last column of a pooling window
  } pool_ctl_t;

  // number of bytes needed for n trits
  function automatic int unsigned groups5(input int unsigned n);
    return (n + 4) / 5;
  endfunction

  // five trits -> one byte
  function automatic logic [7:0] compress5(input logic [9:0] t);
    logic [7:0] v;
    v = '0;
    for (int i = 4; i >= 0; i--) begin
      logic [1:0] d;
      unique case (t[2*i +: 2])
        TRIT_NEG: d = 2'd0;
        TRIT_POS: d = 2'd2;
        default:  d = 2'd1;
      endcase
      v = 8'(v * 8'd3 + 8'(d));
    end
    return v;
  endfunction

  // one byte -> five trits
  function automatic logic [9:0] decompress5(input logic [7:0] c);
    logic [7:0] v;
    logic [9:0] t;
    v = c;
    t = '0;
    for (int i = 0; i < 5; i++) begin
      unique case (v % 8'd3)
        8'd0:    t[2*i +: 2] = TRIT_NEG;
        8'd2:    t[2*i +: 2] = TRIT_POS;
        default: t[2*i +: 2] = TRIT_ZERO;
      endcase
      v = v / 8'd3;
    end
    return t;
  endfunction

endpackage
