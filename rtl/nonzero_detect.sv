// nonzero_detect -- the "input != 0" check at the head of the compressor.
//
// Every input value is tested for being non-zero. The flag drives the stream-level
// Zero-RLE (one bit per value of the zero/non-zero stream) and selects which values
// are handed to the bit-plane encoder. Purely combinational: a wide OR reduction.
//
// Ports: value (M bits) in, nonzero out, same cycle.
module nonzero_detect #(
  parameter int unsigned M = 16   // word width
) (
  input  logic [M-1:0] value,
  output logic         nonzero
);
  assign nonzero = |value;
endmodule
