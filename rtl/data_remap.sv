// data_remap: converts N signed INT8 values into the remapped codes the
// SNGs compare against.
//
// Three steps per value, all wiring and inverters:
//   1. when 'sgn' is set, invert the sign bit: two's complement x becomes
//      x + 128 in [0, 255] (the unipolar conversion), e.g. 1000_0011 (-125)
//      -> 0000_0011; when 'sgn' is clear the input is already unsigned;
//   2. shift right by SHIFT bits so the value fits one sub-square of the
//      2^SHIFT x 2^SHIFT split of the sampling map (SHIFT LSBs are lost);
//   3. XOR with the mask of the value's array row (dscim_pkg::remap_mask)
//      so the row lands in its own sub-square of the map.
// AXIS_W selects the coordinate the values use: 0 for activations (region
// column ra = row mod 2^SHIFT), 1 for weights (region row
// rw = (row / 2^SHIFT) mod 2^SHIFT). 'row' is the array row of each value;
// the activation path ties it to constants, the weight write path drives
// it with the row address. Combinational.
module data_remap
  import dscim_pkg::*;
#(
  parameter int unsigned N      = 128,
  parameter int unsigned SHIFT  = 3,
  parameter bit          AXIS_W = 1'b0,
  parameter int unsigned ROW_W  = 7
) (
  input  logic             sgn,
  input  code_t            din  [N],
  input  logic [ROW_W-1:0] row  [N],
  output code_t            dout [N]
);
  localparam int unsigned SIDE = 1 << SHIFT;

  for (genvar i = 0; i < N; i++) begin : g_val
    logic [SHIFT-1:0] rc;      // region code on this axis
    code_t            mask;
    code_t            u;
    assign rc   = AXIS_W ? SHIFT'(row[i] >> SHIFT) : SHIFT'(row[i]);
    assign mask = {rc, {(DATA_W-SHIFT){rc != '0}}};
    assign u    = {din[i][DATA_W-1] ^ sgn, din[i][DATA_W-2:0]};
    assign dout[i] = (u >> SHIFT) ^ mask;
  end

  initial assert (SHIFT >= 1 && SHIFT < DATA_W && SIDE * SIDE <= (1 << ROW_W))
    else $error("data_remap: bad SHIFT");
endmodule
