// shifter -- weights a partial product by the bit position of its plane.
//
// sh = pp * 2^shamt: the PW-bit two's complement partial product is sign
// extended to SW bits and shifted left by the bit index of the plane it came
// from (0 .. L-1). This replaces the multiplication by 2^i in the
// distributed-arithmetic sum. Combinational.
//
// A left shift of each plane's product by its index, ahead of the
// accumulator, follows the filter's description. The width SW = 34 (enough
// for a 19-bit product shifted by 15) is this design's choice; the block
// diagram labels this path 32 bits.
module shifter
  import fir_da_pkg::*;
#(
  parameter int unsigned PW = fir_da_pkg::PP_W,
  parameter int unsigned SW = fir_da_pkg::OUT_W,
  parameter int unsigned XW = fir_da_pkg::L
) (
  input  logic signed [PW-1:0]         pp,
  input  logic [$clog2(XW)-1:0]        shamt,
  output logic signed [SW-1:0]         sh
);

  logic signed [SW-1:0] ext;

  assign ext = SW'(pp);             // sign extension
  assign sh  = ext <<< shamt;

endmodule
