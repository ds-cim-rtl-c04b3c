// or_mac_unit: the single-bit OR-MAC, PSUM_SC = OR over n of (A_SC[n] & W_SC[n]).
//
// N = 64 is the OR-MAC64 of the efficient variant, N = 16 the OR-MAC16 of
// the precise one. The source design builds it as AOI22 gates feeding a
// multi-stage NAND; this RTL writes the same Boolean function and lets
// synthesis choose the gates. Because of the data remap, at most one
// product bit is 1 in any cycle, so the OR equals their sum.
// Combinational.
module or_mac_unit #(
  parameter int unsigned N = 64
) (
  input  logic [N-1:0] a_sc,
  input  logic [N-1:0] w_sc,
  output logic         psum_sc
);
  assign psum_sc = |(a_sc & w_sc);
endmodule
