// sng: stochastic number generator of one row, a single 8-bit comparator.
//
// Outputs 1 when the shared random number, seen through this row's
// inversion mask, is below the stored code seen through the same mask:
//   bit_sc = (rnd ^ MASK) < (code ^ MASK).
// The stored code is already remapped (code = value ^ MASK), so
// P(bit_sc = 1) = value / 256 and the ones fall only inside this row's
// region of the sampling map. MASK = 0 is the plain "rnd < data" SNG;
// MASK = 8'hFF turns it into "rnd > data", the flipped decision direction
// of the source design. Other masks invert only some comparator inputs,
// which is how the 4x4 and 8x8 region splits are built here.
// Purely combinational.
module sng
  import dscim_pkg::*;
#(
  parameter code_t MASK = 8'h00
) (
  input  code_t rnd,
  input  code_t code,
  output logic  bit_sc
);
  assign bit_sc = (rnd ^ MASK) < (code ^ MASK);
endmodule
