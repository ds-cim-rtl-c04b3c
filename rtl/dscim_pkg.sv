// dscim_pkg: constants and helper functions shared by the DS-CIM macro.
//
// The macro multiplies a 128-row by 32-column INT8 weight array with up to
// 64 INT8 input channels at once, using stochastic bitstreams instead of
// adder trees. The data remap that keeps OR accumulation collision-free is
// defined here once (remap_mask) so the SNGs, the remap logic and the
// testbenches all use the same rule.
//
// Remap rule: an OR group holds 4^S rows (S = right shift). Row r of a group
// owns the sub-square (ra, rw) of the 256x256 sampling map, with
// ra = r mod 2^S (activation axis) and rw = (r / 2^S) mod 2^S (weight axis).
// On an axis whose region code c is non-zero, the mask is {c, all ones}:
// the top S bits select the region and the low bits mirror the data, which
// for S = 1 is exactly "invert all bits and flip the comparator direction".
// For S = 2 and 3 the exact bit pattern is this design's choice.
package dscim_pkg;

  localparam int unsigned DATA_W = 8;   // INT8 activations and weights

  typedef logic [DATA_W-1:0] code_t;

  // Bitstream length selection: 64, 128 or 256 samples.
  typedef enum logic [1:0] {
    LEN_64  = 2'd0,
    LEN_128 = 2'd1,
    LEN_256 = 2'd2
  } len_e;

  function automatic int unsigned len_cycles(len_e l);
    case (l)
      LEN_64:  return 64;
      LEN_128: return 128;
      default: return 256;
    endcase
  endfunction

  function automatic logic [3:0] len_log2(len_e l);
    case (l)
      LEN_64:  return 4'd6;
      LEN_128: return 4'd7;
      default: return 4'd8;
    endcase
  endfunction

  // Region code of row r on one axis (0 = activation, 1 = weight).
  function automatic int unsigned region_code(int unsigned r, int unsigned s, bit axis_w);
    int unsigned side;
    side = 1 << s;
    if (axis_w) return (r / side) % side;
    else        return r % side;
  endfunction

  // Inversion mask applied to the random number and the data of row r.
  function automatic code_t remap_mask(int unsigned r, int unsigned s, bit axis_w);
    int unsigned c;
    code_t m;
    c = region_code(r, s, axis_w);
    m = code_t'(c << (DATA_W - s));
    if (c != 0) m = m | code_t'((1 << (DATA_W - s)) - 1);
    return m;
  endfunction

  // Signed INT8 to remapped code: invert sign bit (+128), shift right by s,
  // then apply the row mask.
  function automatic code_t remap_value(logic signed [DATA_W-1:0] x, int unsigned r,
                                        int unsigned s, bit axis_w);
    code_t u;
    u = {~x[DATA_W-1], x[DATA_W-2:0]};
    u = u >> s;
    return u ^ remap_mask(r, s, axis_w);
  endfunction

endpackage
