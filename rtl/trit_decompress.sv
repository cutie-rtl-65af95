// trit_decompress: decompression bank in front of the tile buffer and of the
// OCU weight buffers (the DECOMPR. blocks of the data path).
//
// Every byte of the input is expanded into five trits with
// cutie_pkg::decompress5; the first N trits are output (trit i in bits
// [2i+1:2i], two's complement). Inverse of trit_compress. Purely
// combinational, no latency.
//
// Lint note: when N is not a multiple of 5 the last code decodes more trits
// than are needed; the surplus (full[] above 2*N-1) is dropped on purpose.
module trit_decompress
  import cutie_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  logic [8*groups5(N)-1:0] code_i,
  output logic [2*N-1:0]          trits_o
);
  localparam int unsigned G = groups5(N);

  logic [10*G-1:0] full;

  always_comb begin
    for (int g = 0; g < int'(G); g++) begin
      full[10*g +: 10] = decompress5(code_i[8*g +: 8]);
    end
    trits_o = full[2*N-1:0];
  end
endmodule
