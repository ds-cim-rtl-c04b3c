// signed_recovery: turns the unsigned count of one OR-MAC into a signed
// partial sum.
//
// Each product bit is 1 with probability a*w / 2^16, where a, w are the
// shifted unsigned operands; the operands were shifted right by SHIFT, so
// sum x'w' ~ count * 2^(16 + 2*SHIFT) / L for a bitstream of L = 2^len_log2
// samples. Then Eq. 4 of the unipolar scheme gives
//   psum = sum x'w' - 128 * c - 128 * d,
// with c = sum x (channel) and d = sum w' (column). For unsigned
// activations (use_d = 0) x' = x and x*w = x*w' - 128*x, so only the c
// term is subtracted.
// Combinational; the shift is a small barrel shifter on len_log2.
module signed_recovery #(
  parameter int unsigned SHIFT  = 3,
  parameter int unsigned CNT_W  = 10,
  parameter int unsigned C_W    = 16,
  parameter int unsigned D_W    = 16,
  parameter int unsigned PSUM_W = 25
) (
  input  logic        [CNT_W-1:0]  count,
  input  logic        [3:0]        len_log2,
  input  logic signed [C_W-1:0]    c,
  input  logic        [D_W-1:0]    d,
  input  logic                     use_d,
  output logic signed [PSUM_W-1:0] psum
);
  localparam int unsigned BASE = 16 + 2 * SHIFT;

  logic        [4:0]        sh;
  logic signed [PSUM_W-1:0] b_est;

  assign sh    = 5'(BASE) - 5'(len_log2);
  assign b_est = signed'(PSUM_W'(count) << sh);
  assign psum  = b_est - (PSUM_W'(c) <<< 7) - (use_d ? signed'(PSUM_W'(d) << 7) : '0);
endmodule
