// csum_simd: correction term c, the sum of the ROWS signed activations of
// one input channel.
//
// The unipolar MAC computes sum x'w' with x' = x + 128 and w' = w + 128;
// the signed result needs 128 * sum(x) subtracted. This sum depends only
// on the channel, so it is formed once when the channel is loaded and is
// shared by all 32 weight columns. With 'sgn' clear the activations are
// unsigned (0..255) and are summed as such. Built as a combinational adder tree
// (balanced by the synthesis tool); the caller registers the result.
module csum_simd
  import dscim_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned SUM_W = 16
) (
  input  logic                     sgn,
  input  code_t                    act [ROWS],
  output logic signed [SUM_W-1:0]  sum
);
  always_comb begin
    sum = '0;
    for (int r = 0; r < ROWS; r++)
      sum = sum + (sgn ? SUM_W'(signed'(act[r])) : SUM_W'(act[r]));
  end
endmodule
