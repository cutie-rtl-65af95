// trit_compress: compression bank between the OCU outputs and the feature
// map memory (the COMPR. block of the data path).
//
// N trits (two's complement, trit i in bits [2i+1:2i]) are cut into groups of
// five; each group is packed into one byte with cutie_pkg::compress5, so the
// output is 8*ceil(N/5) bits, byte g holding trits 5g..5g+4. A last, short
// group is filled up with zero trits. Storing five trits in eight bits is the
// paper's scheme; the particular code (base 3) is this design's choice.
// Purely combinational, no latency.
module trit_compress
  import cutie_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic [2*N-1:0]            trits_i,
  output logic [8*groups5(N)-1:0]   code_o
);
  localparam int unsigned G = groups5(N);

  logic [10*G-1:0] padded;

  always_comb begin
    padded = '0;
    padded[2*N-1:0] = trits_i;
    for (int g = 0; g < int'(G); g++) begin
      code_o[8*g +: 8] = compress5(padded[10*g +: 10]);
    end
  end
endmodule
