// ocu_tmac: the completely unrolled ternary multiply-accumulate of one OCU.
//
// N = K*K*N_I ternary multipliers each multiply one activation with one
// weight (both two's complement trits). As in the paper, a product is not
// produced in two's complement but in the code f: +1 -> 2'b10, -1 -> 2'b01,
// 0 -> 2'b00. The dot product is then the number of ones among the product
// MSBs (popcount "1") minus the number of ones among the LSBs (popcount
// "-1"). Each popcount is CW = clog2(N+1) bits (11 for N = 1152) and the
// signed result CW+1 bits (12). Entirely combinational and not pipelined, as
// in the paper; one window is processed per cycle.
module ocu_tmac #(
  parameter int unsigned N = 1152,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [2*N-1:0]     act_i,
  input  logic [2*N-1:0]     wgt_i,
  output logic signed [CW:0] sum_o
);
  logic [N-1:0] prod_msb, prod_lsb;
  logic [CW-1:0] pc_pos, pc_neg;

  // ternary multipliers
  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      logic nz, neg;
      nz  = act_i[2*i] & wgt_i[2*i];
      neg = act_i[2*i+1] ^ wgt_i[2*i+1];
      prod_msb[i] = nz & ~neg;
      prod_lsb[i] = nz &  neg;
    end
  end

  // popcounts and final subtraction
  assign pc_pos = CW'($countones(prod_msb));
  assign pc_neg = CW'($countones(prod_lsb));
  assign sum_o  = $signed({1'b0, pc_pos}) - $signed({1'b0, pc_neg});
endmodule
